// tdc_chip: one TDC FPGA, 48 wires (the "TDC Chip").
//
// Hit path: the 48 LVDS inputs are deserialised into one 480-bit word per
// 12 ns (serdes_in), pass MUX/MASK (live data or the Test Data RAM, masked
// wires forced low) and enter the 512-word Level-1 pipeline. A Level-1
// Accept copies the next l2_len pipeline words into one of four Level-2
// buffers; a Level-2 Accept makes the ED48 controller run the 48 Edge
// Detectors over the chosen buffer and pack the hits into the Hit Count
// (7 words) and Hit Data (168 words) RAMs, after which TDC_DONE is set
// again and VME can read the RAMs.
// Trigger path: the MUX/MASK output also feeds the XFT block, which turns
// hits in 11 programmable time windows into 6 trigger primitives per wire
// and sends them to the P3 backplane as 16-bit words every 22 ns.
// Also: the Tx pulse RAM and serialiser for ASDQ calibration, the PLL,
// and the VME register decoder.
// Control inputs (bc, b0, l1a, l2a, l2_buf) are taken as one-cycle pulses
// synchronous to the 12 ns clock, as if latched by the prompt CDF clock.
// The Bunch Crossing counter counts BC pulses and is zeroed by B0. The
// Level-2 Accept reaches the 22 ns domain of the ED48 through a two-flop
// pulse synchroniser, with the buffer number held in a register meanwhile.
// The block structure follows the paper's chip diagram; the clock-domain
// crossings and the VME bus are this design's choices.
module tdc_chip
  import tdc_pkg::*;
#(
  parameter bit CHIP_SERIAL = 1'b0
) (
  input  logic           cdf_clk,       // delayed CDF clock, 132 ns
  input  logic           rst_n,
  input  logic [NCH-1:0] lvds_in,
  // CDF control, synchronous to clk12
  input  logic           bc,
  input  logic           b0,
  input  logic           l1a,
  input  logic           l2a,
  input  logic [1:0]     l2_buf,
  input  logic           cdf_calib,
  // VME side (12 ns clock)
  input  logic [17:0]    vme_addr,
  input  logic           vme_we,
  input  logic           vme_re,
  input  logic [31:0]    vme_wdata,
  output logic [31:0]    vme_rdata,
  output logic           vme_rvalid,
  // XFT outputs to P3
  output logic [15:0]    xft_tp,
  output logic           xft_word0,
  output logic           xft_b0,
  output logic           xft_strobe,
  // other
  output logic           calib_out,
  output logic           tdc_done,
  output logic           clk12,
  output logic           clk22
);
  logic clk_fast;

  pll_clockgen u_pll (.cdf_clk, .clk_fast, .clk12, .clk22);

  // ------------------------------------------------------ VME registers
  logic           test_mode, local_calib, spy_freeze, tx_start;
  logic [NCH-1:0] mask;
  logic [8:0]     pipe_delay, module_id;
  logic [6:0]     l2_len;
  logic [5:0]     ed_words, xft_start, xft_out;
  logic [2:0]     max_hits;
  logic [7:0]     lut [NTP-1];
  logic           test_we, tw_we, tx_we;
  logic [12:0]    test_addr;
  logic [5:0]     tw_addr, spy_raddr;
  logic [8:0]     tx_addr;
  logic [7:0]     hd_raddr;
  logic [2:0]     hc_raddr;
  logic [31:0]    hd_rdata, hc_rdata, spy_rdata;

  vme_decoder u_vme (
    .clk(clk12), .rst_n, .addr(vme_addr), .we(vme_we), .re(vme_re),
    .wdata(vme_wdata), .rdata(vme_rdata), .rvalid(vme_rvalid),
    .test_mode, .local_calib, .spy_freeze, .mask, .pipe_delay, .l2_len,
    .ed_words, .max_hits, .module_id, .xft_start, .xft_out, .lut, .tx_start,
    .test_we, .test_addr, .tw_we, .tw_addr, .tx_we, .tx_addr,
    .hd_raddr, .hd_rdata, .hc_raddr, .hc_rdata, .spy_raddr, .spy_rdata,
    .tdc_done_async(tdc_done)
  );

  // ---------------------------------------------------- control inputs
  logic [7:0] bc_count;
  always_ff @(posedge clk12 or negedge rst_n)
    if (!rst_n)  bc_count <= '0;
    else if (b0) bc_count <= '0;
    else if (bc) bc_count <= bc_count + 1'b1;

  logic [1:0] l2a_buf_q;
  logic       l2a22;
  always_ff @(posedge clk12 or negedge rst_n)
    if (!rst_n)   l2a_buf_q <= '0;
    else if (l2a) l2a_buf_q <= l2_buf;

  pulse_sync #(.STAGES(2)) u_l2a_sync (
    .src_clk(clk12), .src_rst_n(rst_n), .src_pulse(l2a),
    .dst_clk(clk22), .dst_rst_n(rst_n), .dst_pulse(l2a22)
  );

  // --------------------------------------------------------- input path
  logic [NCH*10-1:0] serdes_word, test_word, mm_word, pipe_word;

  serdes_in #(.NCH(NCH)) u_serdes (
    .clk_fast, .clk12, .lvds_in, .word(serdes_word)
  );

  test_data_ram #(.DEPTH(512), .NCH(NCH)) u_test (
    .clk(clk12), .rst_n, .vme_we(test_we), .vme_addr(test_addr),
    .vme_wdata, .b0, .test_word
  );

  mux_mask #(.NCH(NCH)) u_mux (
    .clk(clk12), .rst_n, .serdes_word, .test_word, .test_mode, .mask,
    .word(mm_word)
  );

  pipeline_ram #(.DEPTH(PIPE_DEPTH), .W(NCH*10)) u_pipe (
    .clk(clk12), .rst_n, .bc, .delay(pipe_delay), .din(mm_word),
    .dout(pipe_word)
  );

  // ------------------------------------------------- Level-2 and EDs
  logic              l2_rd_start, l2_rd_en;
  logic [1:0]        l2_rd_buf;
  logic [NCH*10-1:0] l2_data, ed_din;
  logic [7:0]        l2_bc_count;
  logic [L2_NBUF-1:0] l2_busy;

  l2_buffers #(.NBUF(L2_NBUF), .DEPTH(L2_DEPTH), .W(NCH*10)) u_l2 (
    .wclk(clk12), .wrst_n(rst_n), .l1a, .l1a_buf(l2_buf), .len(l2_len),
    .bc_count, .din(pipe_word), .busy(l2_busy),
    .rclk(clk22), .rrst_n(rst_n), .rd_start(l2_rd_start), .rd_buf(l2_rd_buf),
    .rd_en(l2_rd_en), .rd_data(l2_data), .rd_bc_count(l2_bc_count)
  );

  logic       ed_clr, ed_load, ed_search, ed48_busy;
  logic [1:0] ed_grp;
  logic [2:0] ed_rd_addr;
  logic [7:0] ed_le    [NCH];
  logic [7:0] ed_width [NCH];
  logic [3:0] ed_count [NCH];

  for (genvar w = 0; w < NCH; w++) begin : g_ed
    edge_detector u_ed (
      .clk(clk22), .rst_n, .clr(ed_clr), .load(ed_load),
      .din(ed_din[w*10 +: 10]), .search(ed_search), .grp(ed_grp),
      .max_hits, .rd_addr(ed_rd_addr), .rd_le(ed_le[w]),
      .rd_width(ed_width[w]), .hit_count(ed_count[w])
    );
  end

  ed48 #(.NSEC(4), .NPER(NCH/4)) u_ed48 (
    .clk(clk22), .rst_n, .l2a(l2a22), .l2a_buf(l2a_buf_q),
    .ed_words, .max_hits, .module_id, .chip_serial(CHIP_SERIAL),
    .l2_rd_start, .l2_rd_buf, .l2_rd_en, .l2_data, .l2_bc_count,
    .ed_clr, .ed_load, .ed_din, .ed_search, .ed_grp, .ed_rd_addr,
    .ed_le, .ed_width, .ed_count, .tdc_done, .busy(ed48_busy),
    .vme_clk(clk12), .hd_raddr, .hd_rdata, .hc_raddr, .hc_rdata
  );

  // ------------------------------------------------------------ XFT
  logic [NTP-1:0] sbin [NCH];

  xft_block #(.NCH(NCH)) u_xft (
    .clk12, .clk22, .rst_n, .data(mm_word), .bc, .b0,
    .start_delay(xft_start), .out_delay(xft_out), .lut,
    .tw_we, .tw_addr, .tw_wdata(vme_wdata[21:0]),
    .spy_freeze, .spy_raddr, .spy_rdata,
    .tp(xft_tp), .word0(xft_word0), .b0_out(xft_b0), .strobe(xft_strobe),
    .sbin
  );

  // ---------------------------------------------------- calibration
  logic [9:0] tx_word;
  logic       tx_playing;

  tx_pulse_ram #(.DEPTH(512)) u_tx (
    .clk(clk12), .rst_n, .vme_we(tx_we), .vme_addr(tx_addr),
    .vme_wdata(vme_wdata[9:0]), .start(tx_start), .playing(tx_playing),
    .word(tx_word)
  );

  serdes_out u_sout (
    .clk12, .clk_fast, .rst_n, .word(tx_word), .local_mode(local_calib),
    .cdf_calib, .calib_out
  );
endmodule
