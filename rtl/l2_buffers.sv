// l2_buffers: the four Level-2 buffers of the TDC chip.
//
// On a Level-1 Accept the next LEN pipeline words (LEN set by VME, up to
// DEPTH) are copied into the buffer named by the 2-bit buffer address that
// accompanies the accept; each buffer has its own write counter, so one
// buffer may still be filling when the next accept names another. A buffer
// is simply overwritten by a later accept whether or not it was read, and
// nothing is ever erased. The write side runs on the 12 ns clock. The read
// side runs on the 22 ns main clock for the Edge Detector: rd_start selects
// a buffer and zeroes the single read counter that all buffers share, and
// every rd_en returns the next word one clock later. The Bunch Crossing
// counter value at the accept is kept beside each buffer for the event
// header. Four buffers, two-port memories, per-buffer write counters and a
// shared read counter follow the paper; the paper's text puts the maximum
// length at 32 words, its table and block diagram at 64, and 64 is used
// here as the depth.
module l2_buffers #(
  parameter int unsigned NBUF  = 4,
  parameter int unsigned DEPTH = 64,
  parameter int unsigned W     = 480
) (
  // write side, 12 ns clock
  input  logic                       wclk,
  input  logic                       wrst_n,
  input  logic                       l1a,
  input  logic [$clog2(NBUF)-1:0]    l1a_buf,
  input  logic [$clog2(DEPTH):0]     len,        // words per accept, 1..DEPTH
  input  logic [7:0]                 bc_count,
  input  logic [W-1:0]               din,
  output logic [NBUF-1:0]            busy,       // buffer still filling
  // read side, 22 ns clock
  input  logic                       rclk,
  input  logic                       rrst_n,
  input  logic                       rd_start,
  input  logic [$clog2(NBUF)-1:0]    rd_buf,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic [7:0]                 rd_bc_count
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned BW = $clog2(NBUF);

  logic [W-1:0] mem [NBUF*DEPTH];
  logic [AW:0]  wcnt [NBUF];
  logic [7:0]   bcc  [NBUF];

  // write counters, one per buffer
  always_ff @(posedge wclk or negedge wrst_n)
    if (!wrst_n) begin
      for (int b = 0; b < NBUF; b++) begin
        busy[b] <= 1'b0;
        wcnt[b] <= '0;
        bcc[b]  <= '0;
      end
    end else begin
      for (int b = 0; b < NBUF; b++) begin
        if (l1a && l1a_buf == BW'(b)) begin
          busy[b] <= 1'b1;
          wcnt[b] <= '0;
          bcc[b]  <= bc_count;
        end else if (busy[b]) begin
          wcnt[b] <= wcnt[b] + 1'b1;
          if (wcnt[b] + 1'b1 >= len) busy[b] <= 1'b0;
        end
      end
    end

  always_ff @(posedge wclk)
    for (int b = 0; b < NBUF; b++)
      if (busy[b]) mem[b*DEPTH + int'(wcnt[b][AW-1:0])] <= din;

  // shared read counter
  logic [AW-1:0] rcnt;
  logic [BW-1:0] rbuf;

  always_ff @(posedge rclk or negedge rrst_n)
    if (!rrst_n) begin
      rcnt <= '0;
      rbuf <= '0;
    end else if (rd_start) begin
      rcnt <= '0;
      rbuf <= rd_buf;
    end else if (rd_en) begin
      rcnt <= rcnt + 1'b1;
    end

  always_ff @(posedge rclk)
    if (rd_en) rd_data <= mem[{rbuf, rcnt}];

  assign rd_bc_count = bcc[rbuf];
endmodule
