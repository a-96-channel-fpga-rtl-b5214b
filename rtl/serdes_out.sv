// serdes_out: the output serialiser of the calibration pulser (SERDES OUT)
// and the choice between local and backplane calibration.
//
// Every 12 ns a 10-bit word from the Tx Pulse RAM is taken and sent one
// sample per 1.2 ns, bit 9 first. The word is handed over by a toggle that
// the 12 ns side flips every clock: the first fast edge that sees the
// toggle change loads the word, the nine after it shift. calib_out is this
// serial stream in local mode (VME bit local_mode) and the backplane
// CDF_TDC_CALIB pulse otherwise. In the FPGA the serialiser is the
// dedicated LVDS transmitter; here it is plain logic. The two modes and
// the VME selection follow the paper; the hand-over is this design's own.
module serdes_out (
  input  logic       clk12,
  input  logic       clk_fast,
  input  logic       rst_n,
  input  logic [9:0] word,
  input  logic       local_mode,
  input  logic       cdf_calib,
  output logic       calib_out
);
  logic       tog, tog_f;
  logic [9:0] word_q, sr;

  always_ff @(posedge clk12 or negedge rst_n)
    if (!rst_n) begin
      tog    <= 1'b0;
      word_q <= '0;
    end else begin
      tog    <= ~tog;
      word_q <= word;
    end

  always_ff @(posedge clk_fast or negedge rst_n)
    if (!rst_n) begin
      tog_f <= 1'b0;
      sr    <= '0;
    end else begin
      tog_f <= tog;
      sr    <= (tog_f != tog) ? word_q : {sr[8:0], 1'b0};
    end

  assign calib_out = local_mode ? sr[9] : cdf_calib;
endmodule
