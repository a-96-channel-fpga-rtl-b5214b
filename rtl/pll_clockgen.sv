// pll_clockgen: behavioural model of the Stratix PLLs of one TDC chip.
//
// Behavioural model, not synthesizable logic: in the FPGA this is a hard
// PLL. It locks to the delayed 132 ns CDF clock and produces the three
// clocks the chip uses: the 12 ns word clock (132/11), the 22 ns main clock
// (132/6) and the 1.2 ns sampling clock of the deserialisers (132/110).
// The paper gives the 12 ns and 22 ns periods and the 1.2 ns bin; modelling
// the lock as "start on the first rising CDF clock edge and run free, all
// rising edges aligned" is this model's own simplification.
module pll_clockgen (
  input  logic cdf_clk,   // delayed CDF clock, 132 ns period
  output logic clk_fast,  // 1.2 ns sampling clock
  output logic clk12,     // 12 ns word clock
  output logic clk22      // 22 ns main clock
);
  timeunit 1ns;
  timeprecision 1ps;

  initial begin
    clk_fast = 1'b0;
    clk12    = 1'b0;
    clk22    = 1'b0;
  end

  initial begin
    @(posedge cdf_clk);
    forever begin
      clk12 = 1'b1; #6;
      clk12 = 1'b0; #6;
    end
  end

  initial begin
    @(posedge cdf_clk);
    forever begin
      clk22 = 1'b1; #11;
      clk22 = 1'b0; #11;
    end
  end

  initial begin
    @(posedge cdf_clk);
    forever begin
      clk_fast = 1'b1; #0.6;
      clk_fast = 1'b0; #0.6;
    end
  end
endmodule
