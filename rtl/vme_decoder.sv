// vme_decoder: the VME register decoder inside a TDC chip.
//
// Turns the chip's side of the VME bus into the settings of the other
// blocks and into reads of its memories. The bus is a simple synchronous
// one on the 12 ns clock: a write is one cycle of we with addr and wdata; a
// read is one cycle of re, answered two clocks later with rvalid and rdata
// (one clock to address the memories, one to select). Register addresses
// are in tdc_pkg. Reset values: nothing masked, live data, pipeline delay
// 462 clocks (5.544 us, the CDF Level-1 latency), 33 words per Level-2
// buffer and per ED search (one 396 ns crossing), 7 hits per wire, XFT
// delays 0 and every XFT truth table 8'hFE (a hit in any of the three
// windows). TDC_DONE comes from the 22 ns domain through two flops.
// That these settings are VME registers follows the paper; the bus, the
// map and the reset values are this design's choices.
module vme_decoder
  import tdc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [17:0] addr,
  input  logic        we,
  input  logic        re,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output logic        rvalid,
  // settings
  output logic        test_mode,
  output logic        local_calib,
  output logic        spy_freeze,
  output logic [NCH-1:0] mask,
  output logic [8:0]  pipe_delay,
  output logic [6:0]  l2_len,
  output logic [5:0]  ed_words,
  output logic [2:0]  max_hits,
  output logic [8:0]  module_id,
  output logic [5:0]  xft_start,
  output logic [5:0]  xft_out,
  output logic [7:0]  lut [NTP-1],
  output logic        tx_start,
  // memory write ports
  output logic        test_we,
  output logic [12:0] test_addr,
  output logic        tw_we,
  output logic [5:0]  tw_addr,
  output logic        tx_we,
  output logic [8:0]  tx_addr,
  // memory read ports (one clock latency)
  output logic [7:0]  hd_raddr,
  input  logic [31:0] hd_rdata,
  output logic [2:0]  hc_raddr,
  input  logic [31:0] hc_rdata,
  output logic [5:0]  spy_raddr,
  input  logic [31:0] spy_rdata,
  input  logic        tdc_done_async
);
  logic [1:0] done_sync;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) done_sync <= 2'b11;
    else        done_sync <= {done_sync[0], tdc_done_async};

  // registers
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      test_mode   <= 1'b0;
      local_calib <= 1'b0;
      spy_freeze  <= 1'b0;
      mask        <= '0;
      pipe_delay  <= 9'd462;
      l2_len      <= 7'd33;
      ed_words    <= 6'd33;
      max_hits    <= 3'd7;
      module_id   <= '0;
      xft_start   <= '0;
      xft_out     <= '0;
      for (int k = 0; k < NTP-1; k++) lut[k] <= 8'hFE;
      tx_start    <= 1'b0;
    end else begin
      tx_start <= 1'b0;
      if (we)
        case (addr)
          A_CTRL:       {spy_freeze, local_calib, test_mode} <= wdata[2:0];
          A_MASK_LO:    mask[31:0]     <= wdata;
          A_MASK_HI:    mask[NCH-1:32] <= wdata[NCH-33:0];
          A_PIPE_DELAY: pipe_delay     <= wdata[8:0];
          A_L2_LEN:     l2_len         <= wdata[6:0];
          A_ED_WORDS:   ed_words       <= wdata[5:0];
          A_MAX_HITS:   max_hits       <= wdata[2:0];
          A_MODULE_ID:  module_id      <= wdata[8:0];
          A_XFT_START:  xft_start      <= wdata[5:0];
          A_XFT_OUT:    xft_out        <= wdata[5:0];
          A_XFT_LUT:    for (int k = 0; k < 4; k++) lut[k] <= wdata[8*k +: 8];
          A_XFT_LUT_HI: lut[4]         <= wdata[7:0];
          A_TX_START:   tx_start       <= 1'b1;
          default: ;
        endcase
    end

  // memory ports
  assign test_we   = we && (addr[17:16] == A_TEST_RAM[17:16]);
  assign test_addr = addr[12:0];
  assign tw_we     = we && (addr[17:6] == A_TW_RAM[17:6]);
  assign tw_addr   = addr[5:0];
  assign tx_we     = we && (addr[17:9] == A_TX_RAM[17:9]);
  assign tx_addr   = addr[8:0];
  assign hd_raddr  = addr[7:0];
  assign hc_raddr  = addr[2:0];
  assign spy_raddr = addr[5:0];

  // read path
  logic        re_q;
  logic [17:0] addr_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      re_q   <= 1'b0;
      addr_q <= '0;
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      re_q   <= re;
      addr_q <= addr;
      rvalid <= re_q;
      if (re_q) begin
        if      (addr_q[17:8]  == A_HIT_DATA[17:8])  rdata <= hd_rdata;
        else if (addr_q[17:3]  == A_HIT_COUNT[17:3]) rdata <= hc_rdata;
        else if (addr_q[17:6]  == A_XFT_SPY[17:6])   rdata <= spy_rdata;
        else
          case (addr_q)
            A_CTRL:       rdata <= {29'd0, spy_freeze, local_calib, test_mode};
            A_MASK_LO:    rdata <= mask[31:0];
            A_MASK_HI:    rdata <= 32'(mask[NCH-1:32]);
            A_PIPE_DELAY: rdata <= 32'(pipe_delay);
            A_L2_LEN:     rdata <= 32'(l2_len);
            A_ED_WORDS:   rdata <= 32'(ed_words);
            A_MAX_HITS:   rdata <= 32'(max_hits);
            A_MODULE_ID:  rdata <= 32'(module_id);
            A_XFT_START:  rdata <= 32'(xft_start);
            A_XFT_OUT:    rdata <= 32'(xft_out);
            A_XFT_LUT:    rdata <= {lut[3], lut[2], lut[1], lut[0]};
            A_XFT_LUT_HI: rdata <= 32'(lut[4]);
            A_STATUS:     rdata <= 32'(done_sync[1]);
            default:      rdata <= 32'hDEAD_0000;
          endcase
      end
    end
endmodule
