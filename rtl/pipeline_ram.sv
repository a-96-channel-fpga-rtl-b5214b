// pipeline_ram: the Level-1 pipeline, a circular two-port memory.
//
// DEPTH words of NCH*10 bits. The write port stores the MUX/MASK output at
// every 12 ns clock and its address counter advances by one per clock; the
// read port reads the address DELAY words behind the write address, so a
// word comes out DELAY+1 clocks after it went in (one clock for the
// registered read). With 512 words the delay reaches about 6.1 us, more
// than the 5.544 us Level-1 decision time. The paper says the write counter
// is set to zero on a BC pulse; here it is zeroed on the first BC after
// reset and then runs free modulo DEPTH, since zeroing it on every crossing
// would cap the delay at one crossing (33 words).
module pipeline_ram #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned W     = 480
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     bc,
  input  logic [$clog2(DEPTH)-1:0] delay,   // VME: read offset in clocks
  input  logic [W-1:0]             din,
  output logic [W-1:0]             dout
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] waddr;
  logic          armed;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      waddr <= '0;
      armed <= 1'b0;
    end else if (bc && !armed) begin
      waddr <= '0;
      armed <= 1'b1;
    end else begin
      waddr <= waddr + 1'b1;
    end

  always_ff @(posedge clk) begin
    mem[waddr] <= din;
    dout       <= mem[waddr - delay];
  end
endmodule
