// xft_spy: the VME readout RAM of the XFT-DAQ path.
//
// Keeps a copy of the trigger primitives as they were last sent to the
// XFT, for diagnosing the link: each 16-bit word the Output Multiplexer
// puts on the backplane is written, on the 22 ns clock, at the index of
// that word within the crossing (0..17), unless VME has set freeze; frozen
// contents stay until freeze is released. VME reads word i (in bits
// [15:0]) on the 12 ns clock with one clock of latency; indices past 17
// read zero. The RAM and its freeze follow the paper; storing the words in
// transmission order is this design's choice.
module xft_spy #(
  parameter int unsigned NWORD = 18
) (
  input  logic        wclk,          // 22 ns
  input  logic        we,
  input  logic [4:0]  waddr,
  input  logic [15:0] wdata,
  input  logic        freeze,
  input  logic        rclk,          // 12 ns
  input  logic [5:0]  raddr,
  output logic [31:0] rdata
);
  logic [15:0] mem [NWORD];

  always_ff @(posedge wclk)
    if (we && !freeze && int'(waddr) < NWORD) mem[waddr] <= wdata;

  always_ff @(posedge rclk)
    rdata <= (int'(raddr) < NWORD) ? {16'h0000, mem[raddr[4:0]]} : 32'd0;
endmodule
