// test_data_ram: the Test Data Generator of the TDC chip.
//
// A two-port RAM of DEPTH words of 512 bits, loaded from VME as 32-bit
// words (8192 of them at the default size): VME word address a writes bits
// [32*(a%16)+31 : 32*(a%16)] of row a/16. The other port plays the rows out,
// one per 12 ns clock, and its address counter returns to row 0 on every
// Bunch-0 pulse, so the pattern is replayed in step with the Tevatron
// revolution. The low 480 bits of a row drive the 48 wires (wire w in bits
// [10*w+9 : 10*w]); the top 32 bits are unused. Sizes and the B0
// synchronisation follow the paper; the lane order inside a row and the
// wrap at the end of the RAM are this design's choices. Read latency: one
// clock from the address counter to test_word.
module test_data_ram #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned NCH   = 48
) (
  input  logic              clk,
  input  logic              rst_n,
  // VME write port
  input  logic              vme_we,
  input  logic [$clog2(DEPTH*16)-1:0] vme_addr,
  input  logic [31:0]       vme_wdata,
  // playback
  input  logic              b0,          // restart at row 0
  output logic [NCH*10-1:0] test_word
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [15:0][31:0] mem [DEPTH];
  logic [AW-1:0]     raddr;

  always_ff @(posedge clk)
    if (vme_we) mem[vme_addr[$clog2(DEPTH*16)-1:4]][vme_addr[3:0]] <= vme_wdata;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  raddr <= '0;
    else if (b0) raddr <= '0;
    else         raddr <= raddr + 1'b1;

  logic [511:0] row;
  always_ff @(posedge clk) row <= mem[raddr];
  assign test_word = row[NCH*10-1:0];
endmodule
