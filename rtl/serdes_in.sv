// serdes_in: the input deserialisers of one TDC chip (SERDES IN).
//
// Each LVDS input is sampled on every rising edge of the 1.2 ns clock and
// shifted into a 10-bit register; on every rising edge of the 12 ns clock
// the register is copied out, so each wire yields one 10-bit word per
// 12 ns. The earliest sample lands in bit 9 and the latest in bit 0, as in
// the paper's bit-position table (time value 0 at bit 9). Wire w occupies
// bits [10*w+9 : 10*w] of the output. In the FPGA this is the dedicated
// serializer/deserializer of each LVDS pair with a x10 PLL; here it is
// plain logic doing the same. The two clocks must be phase locked, 10 fast
// periods per word period. Output changes one 12 ns cycle after the last
// sample of a word.
module serdes_in #(
  parameter int unsigned NCH = 48
) (
  input  logic              clk_fast,
  input  logic              clk12,
  input  logic [NCH-1:0]    lvds_in,
  output logic [NCH*10-1:0] word
);
  logic [9:0] sr [NCH];

  always_ff @(posedge clk_fast)
    for (int w = 0; w < NCH; w++) sr[w] <= {sr[w][8:0], lvds_in[w]};

  always_ff @(posedge clk12)
    for (int w = 0; w < NCH; w++) word[w*10 +: 10] <= sr[w];
endmodule
