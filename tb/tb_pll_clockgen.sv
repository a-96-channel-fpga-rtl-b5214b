// tb_pll_clockgen: checks the clock generator model. It drives a 132 ns
// CDF clock and measures each output: the word clock must have a 12 ns
// period, the main clock 22 ns and the sampling clock 1.2 ns, and all three
// must rise together with every CDF clock edge (11, 6 and 110 rising edges
// per CDF period).
module tb_pll_clockgen;
  timeunit 1ns;
  timeprecision 1ps;

  logic cdf_clk = 0;
  logic clk_fast, clk12, clk22;
  int checks = 0, failures = 0;
  int n12 = 0, n22 = 0, nf = 0;
  realtime last12 = -1, last22 = -1, lastf = -1;

  pll_clockgen dut (.*);
  always #66 cdf_clk = ~cdf_clk;

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void period(input realtime now, inout realtime last, input realtime want, input string nm);
    if (last >= 0) begin
      checks++;
      if (now - last < want - 0.002 || now - last > want + 0.002) begin
        failures++; $display("FAIL %s period %0t", nm, now - last);
      end
    end
    last = now;
  endfunction

  always @(posedge clk12)    begin n12++; period($realtime, last12, 12.0, "clk12"); end
  always @(posedge clk22)    begin n22++; period($realtime, last22, 22.0, "clk22"); end
  always @(posedge clk_fast) begin nf++;  period($realtime, lastf, 1.2, "clk_fast"); end

  initial begin
    @(posedge cdf_clk);
    repeat (20) begin
      @(posedge cdf_clk);
      #0.001;
      // every output rose at this CDF edge
      checks += 3;
      if (!(clk12 && $realtime - last12 < 0.01)) begin failures++; $display("FAIL clk12 not aligned"); end
      if (!(clk22 && $realtime - last22 < 0.01)) begin failures++; $display("FAIL clk22 not aligned"); end
      if (!(clk_fast && $realtime - lastf < 0.01)) begin failures++; $display("FAIL clk_fast not aligned"); end
      n12 = 1; n22 = 1; nf = 1;
      @(negedge cdf_clk);
      @(posedge cdf_clk);
      #0.001;
      checks += 3;
      if (n12 != 12) begin failures++; $display("FAIL %0d word clocks per CDF period", n12 - 1); end
      if (n22 != 7)  begin failures++; $display("FAIL %0d main clocks per CDF period", n22 - 1); end
      if (nf != 111) begin failures++; $display("FAIL %0d sample clocks per CDF period", nf - 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
