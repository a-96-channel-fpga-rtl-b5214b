// tb_serdes_out: checks the calibration serialiser. Random 10-bit words
// are presented on the word clock. In local mode the output must send each
// word bit 9 first, one bit per 1.2 ns, starting one sample clock after the
// word clock edge that took the word, with no gaps between words. Outside
// local mode the output must follow the CDF calibration input.
module tb_serdes_out;
  timeunit 1ns;
  timeprecision 1ps;

  logic cdf_clk = 0;
  logic clk_fast, clk12, clk22;
  logic rst_n = 0;
  logic [9:0] word = 0;
  logic local_mode = 1, cdf_calib = 0, calib_out;
  logic [9:0] taken [$];
  realtime t0 = -1;
  int checks = 0, failures = 0;

  pll_clockgen pll (.*);
  serdes_out dut (.*);
  always #66 cdf_clk = ~cdf_clk;

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // taken[m] = word seen by word clock edge m (edge m at t0 + 12 m)
  always @(posedge clk12) if (rst_n) begin
    if (t0 < 0) t0 = $realtime;
    taken.push_back(word);
  end
  always @(negedge clk12) word = 10'($urandom);

  initial begin
    repeat (3) @(posedge clk12);
    #1 rst_n = 1;
    repeat (3) @(posedge clk12);
    repeat (1000) begin
      int k, m, j;
      @(negedge clk_fast);
      // k = last sample clock edge, counted from word clock edge 0
      k = int'(($realtime - t0 - 0.6) / 1.2);   // int cast rounds
      m = (k - 1) / 10;
      j = (k - 1) % 10;
      if (m >= 1 && m < taken.size()) begin
        checks++;
        if (calib_out != taken[m][9-j]) begin failures++; $display("FAIL edge %0d word %0d bit %0d", k, m, 9-j); end
      end
    end
    local_mode = 0;
    repeat (50) begin
      @(negedge clk_fast); cdf_calib = 1'($urandom);
      #0.1;
      checks++;
      if (calib_out != cdf_calib) begin failures++; $display("FAIL pass-through"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
