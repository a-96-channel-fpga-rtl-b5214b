// tb_serdes_in: checks the input deserialiser. Every wire gets its own
// random bit stream, one bit per 1.2 ns sample clock. Each 12 ns word must
// hold the ten samples taken since the previous word clock edge, with the
// earliest sample in bit 9, so a word is complete at every word clock.
module tb_serdes_in;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NCH = 48;
  logic cdf_clk = 0;
  logic clk_fast, clk12, clk22;
  logic [NCH-1:0] lvds_in = '0;
  logic [NCH*10-1:0] word;
  int checks = 0, failures = 0;

  pll_clockgen pll (.*);
  serdes_in #(.NCH(NCH)) dut (.*);
  always #66 cdf_clk = ~cdf_clk;

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bits sampled at each sample clock edge, indexed by edge number
  logic [NCH-1:0] hist [$];
  always @(posedge clk_fast) hist.push_back(lvds_in);
  always @(negedge clk_fast) lvds_in = {$urandom, $urandom};

  initial begin
    @(posedge clk12);
    @(posedge clk12);
    repeat (300) begin
      @(posedge clk12);
      #0.1;   // after the edge: word holds the samples of the last 10 edges
      // the sample edge that coincides with this word edge is hist[$]; the
      // word was built from the 10 edges before it
      for (int w = 0; w < NCH; w++) begin
        logic [9:0] exp;
        for (int j = 0; j < 10; j++) exp[9-j] = hist[hist.size() - 11 + j][w];
        checks++;
        if (word[w*10 +: 10] != exp) begin
          failures++; $display("FAIL wire %0d word %b expected %b", w, word[w*10 +: 10], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
