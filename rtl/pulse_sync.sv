// pulse_sync: carries a one-cycle pulse from one clock domain to another.
//
// The source pulse flips a toggle flop; the destination samples the toggle
// through STAGES flops and emits a one-cycle pulse on every change. In this
// design all clocks come from the same PLL and are phase locked, so one
// stage is enough where latency matters; two are used elsewhere. Pulses must
// be further apart than a few destination cycles. This helper is this
// design's own; the paper does not say how its clock domains meet.
module pulse_sync #(
  parameter int unsigned STAGES = 2
) (
  input  logic src_clk,
  input  logic src_rst_n,
  input  logic src_pulse,
  input  logic dst_clk,
  input  logic dst_rst_n,
  output logic dst_pulse
);
  logic              tog;
  logic [STAGES:0]   sh;

  always_ff @(posedge src_clk or negedge src_rst_n)
    if (!src_rst_n)     tog <= 1'b0;
    else if (src_pulse) tog <= ~tog;

  always_ff @(posedge dst_clk or negedge dst_rst_n)
    if (!dst_rst_n) sh <= '0;
    else            sh <= {sh[STAGES-1:0], tog};

  assign dst_pulse = sh[STAGES] ^ sh[STAGES-1];
endmodule
