// mux_mask: input selection and channel masking (MUX/MASK block).
//
// Chooses, for all 48 wires at once, between the deserialised COT data and
// the Test Data RAM pattern, and forces the words of masked wires to zero
// so that a broken, permanently-high wire produces no hits. Both the mode
// bit and the 48-bit mask are VME registers. One 480-bit word per 12 ns
// clock, registered: one cycle of latency. Selection and masking follow the
// paper; zero as the value of a masked wire is this design's choice.
module mux_mask #(
  parameter int unsigned NCH = 48
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NCH*10-1:0] serdes_word,
  input  logic [NCH*10-1:0] test_word,
  input  logic              test_mode,   // 1: drive from the Test Data RAM
  input  logic [NCH-1:0]    mask,        // 1: wire blocked
  output logic [NCH*10-1:0] word
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) word <= '0;
    else
      for (int w = 0; w < NCH; w++)
        word[w*10 +: 10] <= mask[w] ? 10'd0
                          : (test_mode ? test_word[w*10 +: 10] : serdes_word[w*10 +: 10]);
endmodule
