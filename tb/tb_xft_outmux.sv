// tb_xft_outmux: checks the Output Multiplexer against the paper's P3
// table: after a start pulse, 18 words, one per clock starting one clock
// later; word c holds bit c/3 of wires 16*(c%3)..+15; Word-0 high on words
// 0, 6, 12; B0 on every word of a bunch-zero crossing; strobe high on even
// words. Two crossings, with and without B0, back to back.
module tb_xft_outmux;
  timeunit 1ns;
  timeprecision 1ps;

  logic        clk = 0, rst_n = 0;
  logic        start = 0, start_b0 = 0;
  logic [5:0]  sbin [48];
  logic [15:0] tp;
  logic        word0, b0_out, strobe, active, tp_valid;
  logic [4:0]  tp_idx;
  logic [5:0]  bit_sent;
  int checks = 0, failures = 0;

  xft_outmux dut (.*);
  always #11 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic crossing(input bit b0);
    foreach (sbin[w]) sbin[w] = 6'($urandom);
    @(negedge clk); start = 1; start_b0 = b0;
    @(negedge clk); start = 0; start_b0 = 0;
    for (int c = 0; c < 18; c++) begin
      automatic logic [15:0] e;
      for (int j = 0; j < 16; j++) e[j] = sbin[16*(c%3) + j][c/3];
      checks++;
      if (tp !== e || word0 != (c == 0 || c == 6 || c == 12) || b0_out != b0 ||
          strobe != (c % 2 == 0) || !tp_valid || tp_idx != 5'(c)) begin
        failures++;
        $display("FAIL word %0d: tp %h (exp %h) w0 %b b0 %b ds %b", c, tp, e, word0, b0_out, strobe);
      end
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    crossing(1);
    crossing(0);
    repeat (2) @(negedge clk);
    checks++;
    if (tp != 0 || word0 || b0_out || tp_valid) begin failures++; $display("FAIL idle outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
