// tb_xft_tlc: checks the Trigger Logic Control. For several start and
// output delays it sends one BC (with or without B0) and checks that XFT
// Enable follows BC by start_delay clocks, that the time-window bits then
// step through RAM addresses 0..32 on consecutive clocks (two clocks after
// XFT Enable) and are zero otherwise, that BC_delayed and B0_delayed follow
// XFT Enable by out_delay+1 clocks (tap 0 is one register after XFT Enable), and that the six clear pulses come at
// their taps after BC_delayed and reach the right windows.
module tb_xft_tlc;
  timeunit 1ns;
  timeprecision 1ps;

  logic        clk = 0, rst_n = 0;
  logic        bc = 0, b0 = 0;
  logic [5:0]  start_delay = 0, out_delay = 0;
  logic        tw_we = 0;
  logic [5:0]  tw_addr = 0;
  logic [21:0] tw_wdata = 0;
  logic        xft_enable, bc_delayed, b0_delayed;
  logic [10:0] ramp_e, ramp_l, aclr_win;
  logic [5:0]  tw_clear;
  int checks = 0, failures = 0;

  xft_tlc dut (.*);
  always #6 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [21:0] ram [64];
  localparam int TAP [6] = '{10, 15, 21, 26, 32, 37};

  task automatic crossing(input int sd, input int od, input bit isb0);
    int t_en = -1, t_dl = -1, t_first = -1, nramp = 0;
    int t_clr [6];
    bit b0seen = 0;
    foreach (t_clr[k]) t_clr[k] = -1;
    start_delay = 6'(sd); out_delay = 6'(od);
    @(negedge clk); bc = 1; b0 = isb0;
    @(negedge clk); bc = 0; b0 = 0;
    // cycle 0 = the cycle after the edge that sampled BC
    for (int t = 0; t < 200; t++) begin
      if (xft_enable && t_en < 0) t_en = t;
      if (bc_delayed && t_dl < 0) begin t_dl = t; b0seen = b0_delayed; end
      for (int k = 0; k < 6; k++) if (tw_clear[k] && t_clr[k] < 0) t_clr[k] = t;
      if ({ramp_l, ramp_e} != 0) begin
        if (t_first < 0) t_first = t;
        checks++;
        if ({ramp_l, ramp_e} != ram[t - t_first]) begin
          failures++; $display("FAIL ramp at %0d: %h vs %h", t - t_first, {ramp_l, ramp_e}, ram[t - t_first]);
        end
        nramp++;
      end
      // window clears follow the bit that reads them last
      for (int i = 0; i < 11; i++) begin
        int k = (i < 2) ? 1 : (i >= 8) ? 5 : i/2 + 1;
        checks++;
        if (aclr_win[i] != tw_clear[k]) begin failures++; $display("FAIL aclr_win[%0d]", i); end
      end
      @(negedge clk);
    end
    checks += 5;
    if (t_en != sd) begin failures++; $display("FAIL enable at %0d, delay %0d", t_en, sd); end
    if (t_first != t_en + 2) begin failures++; $display("FAIL first ramp at %0d", t_first); end
    if (nramp != 33) begin failures++; $display("FAIL %0d ramp words", nramp); end
    if (t_dl != t_en + od + 1) begin failures++; $display("FAIL BC_delayed at %0d", t_dl); end
    if (b0seen != isb0) begin failures++; $display("FAIL B0_delayed %b", b0seen); end
    for (int k = 0; k < 6; k++) begin
      checks++;
      if (t_clr[k] != t_dl + TAP[k]) begin failures++; $display("FAIL clear %0d at %0d", k, t_clr[k]); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int a = 0; a < 64; a++) begin
      ram[a] = 22'($urandom) | 22'd1;     // never all zero
      @(negedge clk); tw_we = 1; tw_addr = 6'(a); tw_wdata = ram[a];
    end
    @(negedge clk); tw_we = 0;
    crossing(0, 0, 1);
    crossing(5, 3, 0);
    crossing(20, 40, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
