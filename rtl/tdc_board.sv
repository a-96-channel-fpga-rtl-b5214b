// tdc_board: the 96-channel TDC card.
//
// Two TDC chips of 48 wires each (chip 0 takes wires 0..47, chip 1 wires
// 48..95, after the front-panel receivers) and the VME interface chip. All
// three run from the delayed 132 ns CDF clock; each TDC chip has its own
// PLL, and the VME interface uses chip 0's 12 ns clock. The CDF control
// signals from the P2 backplane go to both chips. The P3 trigger output
// carries 16 bits from each chip every 22 ns, chip 0 in p3_tp[15:0] and
// chip 1 in p3_tp[31:16], with the Word-0, B0 and Data Strobe markers taken
// from chip 0 (both chips produce identical ones). The calibration outputs
// of both chips go to the front panel.
// The partition and the channel split follow the paper; the board's analog
// parts (quasi-LVDS receivers, clock delay lines, drivers, power) are not
// logic and are represented only by the ports where their signals arrive.
module tdc_board (
  input  logic        cdf_clk,
  input  logic        rst_n,
  input  logic [95:0] lvds_in,
  input  logic        bc,
  input  logic        b0,
  input  logic        l1a,
  input  logic        l2a,
  input  logic [1:0]  l2_buf,
  input  logic        cdf_calib,
  // VME
  input  logic [4:0]  ga,
  input  logic [31:0] vme_addr,
  input  logic        vme_we,
  input  logic        vme_re,
  input  logic [31:0] vme_wdata,
  output logic [31:0] vme_rdata,
  output logic        vme_rvalid,
  input  logic        cblt_req,
  input  logic [4:0]  cblt_slot,
  input  logic        cblt_d64,
  input  logic        token_in,
  output logic        token_out,
  output logic        chain_end,
  output logic [63:0] cblt_data,
  output logic        cblt_valid,
  input  logic        cblt_ready,
  // P3 to the XFT
  output logic [31:0] p3_tp,
  output logic        p3_word0,
  output logic        p3_b0,
  output logic        p3_strobe,
  // front panel
  output logic [1:0]  calib_out,
  output logic [1:0]  tdc_done,
  output logic        clk12
);
  logic [17:0] chip_addr;
  logic [1:0]  chip_we, chip_re, chip_rvalid;
  logic [31:0] chip_wdata;
  logic [31:0] chip_rdata [2];
  logic [1:0]  word0, b0x, strobe, clk22;
  logic        clk12_1;

  tdc_chip #(.CHIP_SERIAL(1'b0)) u_chip0 (
    .cdf_clk, .rst_n, .lvds_in(lvds_in[47:0]), .bc, .b0, .l1a, .l2a, .l2_buf,
    .cdf_calib, .vme_addr(chip_addr), .vme_we(chip_we[0]), .vme_re(chip_re[0]),
    .vme_wdata(chip_wdata), .vme_rdata(chip_rdata[0]), .vme_rvalid(chip_rvalid[0]),
    .xft_tp(p3_tp[15:0]), .xft_word0(word0[0]), .xft_b0(b0x[0]),
    .xft_strobe(strobe[0]), .calib_out(calib_out[0]), .tdc_done(tdc_done[0]),
    .clk12(clk12), .clk22(clk22[0])
  );

  tdc_chip #(.CHIP_SERIAL(1'b1)) u_chip1 (
    .cdf_clk, .rst_n, .lvds_in(lvds_in[95:48]), .bc, .b0, .l1a, .l2a, .l2_buf,
    .cdf_calib, .vme_addr(chip_addr), .vme_we(chip_we[1]), .vme_re(chip_re[1]),
    .vme_wdata(chip_wdata), .vme_rdata(chip_rdata[1]), .vme_rvalid(chip_rvalid[1]),
    .xft_tp(p3_tp[31:16]), .xft_word0(word0[1]), .xft_b0(b0x[1]),
    .xft_strobe(strobe[1]), .calib_out(calib_out[1]), .tdc_done(tdc_done[1]),
    .clk12(clk12_1), .clk22(clk22[1])
  );

  assign p3_word0  = word0[0];
  assign p3_b0     = b0x[0];
  assign p3_strobe = strobe[0];

  vme_interface u_vme (
    .clk(clk12), .rst_n, .ga, .addr(vme_addr), .we(vme_we), .re(vme_re),
    .wdata(vme_wdata), .rdata(vme_rdata), .rvalid(vme_rvalid),
    .cblt_req, .cblt_slot, .cblt_d64, .token_in, .token_out, .chain_end,
    .dout(cblt_data), .dvalid(cblt_valid), .dready(cblt_ready),
    .chip_addr, .chip_we, .chip_re, .chip_wdata, .chip_rdata, .chip_rvalid
  );
endmodule
