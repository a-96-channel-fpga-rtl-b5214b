// tx_pulse_ram: the Tx Pulse Memory of the ASDQ calibration pulser.
//
// A 512 x 10-bit RAM written from VME that describes a pulse train at
// 1.2 ns resolution: word a holds the ten samples of the a-th 12 ns slot,
// earliest in bit 9. A start request (a VME write) plays the whole RAM
// once, one word per 12 ns clock, into the output serialiser; when idle
// the output word is zero. Read latency is one clock. RAM size and
// contents follow the paper; what starts the playback is not in the paper,
// and a VME write is this design's choice.
module tx_pulse_ram #(
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,     // 12 ns
  input  logic                     rst_n,
  input  logic                     vme_we,
  input  logic [$clog2(DEPTH)-1:0] vme_addr,
  input  logic [9:0]               vme_wdata,
  input  logic                     start,
  output logic                     playing,
  output logic [9:0]               word
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [9:0]    mem [DEPTH];
  logic [AW-1:0] addr;

  always_ff @(posedge clk)
    if (vme_we) mem[vme_addr] <= vme_wdata;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      addr    <= '0;
      playing <= 1'b0;
      word    <= '0;
    end else begin
      if (start) begin
        addr    <= '0;
        playing <= 1'b1;
      end else if (playing) begin
        addr <= addr + 1'b1;
        if (addr == AW'(DEPTH-1)) playing <= 1'b0;
      end
      word <= (playing && !start) ? mem[addr] : 10'd0;
    end
endmodule
