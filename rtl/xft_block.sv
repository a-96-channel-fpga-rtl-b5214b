// xft_block: the prompt trigger path of one TDC chip (TDC XFT block).
//
// Wires the Trigger Logic Control, 48 Occupancy Detectors and the Output
// Multiplexer together, plus the XFT-DAQ spy RAM. The ODs and the control
// run on the 12 ns clock and see the MUX/MASK output directly (not the
// pipeline); the Output Multiplexer runs on the 22 ns main clock. The start
// of a transmission crosses from the 12 ns to the 22 ns clock through a
// one-stage toggle synchroniser, enough because both clocks come from one
// PLL. The clears from the control reach the window registers
// asynchronously, as in the paper. The time-window RAM, the two delays,
// the truth tables and the spy freeze are VME settings.
module xft_block #(
  parameter int unsigned NCH  = 48,
  parameter int unsigned NWIN = tdc_pkg::NWIN,
  parameter int unsigned NTP  = tdc_pkg::NTP
) (
  input  logic              clk12,
  input  logic              clk22,
  input  logic              rst_n,
  input  logic [NCH*10-1:0] data,
  input  logic              bc,
  input  logic              b0,
  input  logic [5:0]        start_delay,
  input  logic [5:0]        out_delay,
  input  logic [7:0]        lut [NTP-1],
  input  logic              tw_we,
  input  logic [5:0]        tw_addr,
  input  logic [21:0]       tw_wdata,
  input  logic              spy_freeze,
  input  logic [5:0]        spy_raddr,
  output logic [31:0]       spy_rdata,
  output logic [15:0]       tp,
  output logic              word0,
  output logic              b0_out,
  output logic              strobe,
  output logic [NTP-1:0]    sbin [NCH]
);
  logic            xft_enable, bc_delayed, b0_delayed;
  logic [NWIN-1:0] ramp_e, ramp_l, aclr_win;
  logic [NTP-1:0]  tw_clear;

  xft_tlc #(.NWIN(NWIN), .NTP(NTP)) u_tlc (
    .clk(clk12), .rst_n, .bc, .b0, .start_delay, .out_delay,
    .tw_we, .tw_addr, .tw_wdata,
    .xft_enable, .ramp_e, .ramp_l, .bc_delayed, .b0_delayed,
    .tw_clear, .aclr_win
  );

  for (genvar w = 0; w < NCH; w++) begin : g_od
    logic            maj_e, maj_l;
    logic [NWIN-1:0] flag;
    xft_od #(.NWIN(NWIN), .NTP(NTP)) u_od (
      .clk(clk12), .rst_n, .store_in(data[w*10 +: 10]),
      .ramp_e, .ramp_l, .aclr_win, .lut,
      .major_e(maj_e), .major_l(maj_l), .flag, .sbin(sbin[w])
    );
  end

  // BC_delayed and its bunch-zero flag into the 22 ns domain
  logic start22, b0_hold;
  always_ff @(posedge clk12 or negedge rst_n)
    if (!rst_n)          b0_hold <= 1'b0;
    else if (bc_delayed) b0_hold <= b0_delayed;

  pulse_sync #(.STAGES(1)) u_sync (
    .src_clk(clk12), .src_rst_n(rst_n), .src_pulse(bc_delayed),
    .dst_clk(clk22), .dst_rst_n(rst_n), .dst_pulse(start22)
  );

  logic            om_active, tp_valid;
  logic [4:0]      tp_idx;
  logic [NTP-1:0]  bit_sent;
  xft_outmux #(.NCH(NCH), .NTP(NTP)) u_om (
    .clk(clk22), .rst_n, .start(start22), .start_b0(b0_hold), .sbin,
    .tp, .word0, .b0_out, .strobe, .active(om_active), .tp_valid, .tp_idx,
    .bit_sent
  );

  xft_spy u_spy (
    .wclk(clk22), .we(tp_valid), .waddr(tp_idx), .wdata(tp), .freeze(spy_freeze),
    .rclk(clk12), .raddr(spy_raddr), .rdata(spy_rdata)
  );
endmodule
