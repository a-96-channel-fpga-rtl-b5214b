// tb_xft_od: checks one Occupancy Detector with random words, random
// time-window bits, random clears and random truth tables. The reference
// keeps the previous word, finds four high cells starting at cells 19..15
// (early) or 14..10 (late) by scanning, sets and holds the window flags,
// applies the clears and evaluates the primitives.
module tb_xft_od;
  timeunit 1ns;
  timeprecision 1ps;

  logic        clk = 0, rst_n = 0;
  logic [9:0]  store_in = 0;
  logic [10:0] ramp_e = 0, ramp_l = 0, aclr_win = 0;
  logic [7:0]  lut [5];
  logic        major_e, major_l;
  logic [10:0] flag;
  logic [5:0]  sbin;
  int checks = 0, failures = 0;

  xft_od dut (.*);
  always #6 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit run4(input logic [19:0] s, input int hi, input int lo);
    for (int c = hi; c >= lo; c--)
      if (s[c] && s[c-1] && s[c-2] && s[c-3]) return 1;
    return 0;
  endfunction

  logic [9:0]  prev_m = 0;
  logic [10:0] flag_m = 0;
  int n_e = 0, n_l = 0;

  initial begin
    for (int k = 0; k < 5; k++) lut[k] = 8'($urandom);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      logic [19:0] s;
      bit me, ml;
      @(negedge clk);
      store_in = 10'($urandom) & 10'($urandom);
      if ($urandom_range(3) == 0) store_in = 10'b0111110000 >> $urandom_range(5);
      ramp_e = 11'($urandom) & 11'($urandom);
      ramp_l = 11'($urandom) & 11'($urandom);
      if (it % 500 == 0) for (int k = 0; k < 5; k++) lut[k] = 8'($urandom);
      #1;
      s  = {prev_m, store_in};
      me = run4(s, 19, 15);
      ml = run4(s, 14, 10);
      n_e += me; n_l += ml;
      checks++;
      if (major_e != me || major_l != ml) begin
        failures++; $display("FAIL major %b%b vs %b%b s=%b", major_e, major_l, me, ml, s);
      end
      @(posedge clk);
      for (int i = 0; i < 11; i++) if ((ramp_e[i] && me) || (ramp_l[i] && ml)) flag_m[i] = 1;
      prev_m = store_in;
      #1;
      checks++;
      if (flag != flag_m) begin failures++; $display("FAIL flags %b vs %b", flag, flag_m); end
      // primitives
      for (int k = 0; k < 6; k++) begin
        automatic bit e = (k == 0) ? flag_m[0] : lut[k-1][{flag_m[2*k-2], flag_m[2*k-1], flag_m[2*k]}];
        checks++;
        if (sbin[k] != e) begin failures++; $display("FAIL sbin[%0d]", k); end
      end
      // asynchronous clear between edges
      if ($urandom_range(7) == 0) begin
        automatic logic [10:0] c = 11'($urandom);
        aclr_win = c; #1; aclr_win = 0;
        flag_m &= ~c;
        #1;
        checks++;
        if (flag != flag_m) begin failures++; $display("FAIL after clear %b vs %b", flag, flag_m); end
      end
    end
    checks++;
    if (n_e == 0 || n_l == 0) begin failures++; $display("FAIL scanners never fired"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
