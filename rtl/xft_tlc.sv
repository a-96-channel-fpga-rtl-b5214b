// xft_tlc: Trigger Logic Control of the XFT block.
//
// Runs on the 12 ns clock. The BC pulse (with B0, which marks bunch zero)
// enters the XFT start delay line, a shift register tapped at start_delay
// (VME); its output is the XFT Enable pulse. XFT Enable zeroes the address
// counter of the Time-Window Enable Bitmap RAM, which then steps once per
// 12 ns for 33 clocks (one 396 ns crossing); the RAM's 22-bit word at that
// address is registered out as ramp_e (bits [10:0], windows open to hits in
// the first 5 cells of a word) and ramp_l (bits [21:11], last 5 cells), the
// same for all 48 Occupancy Detectors. Outside the 33 clocks both are zero.
// XFT Enable also enters the XFT output delay line, tapped at out_delay
// (VME), giving BC_delayed (and B0_delayed when the crossing was bunch
// zero), which starts the Output Multiplexer. Further taps of the same line
// give the six clear pulses, one per primitive bit, each CLR_TAP[k] clocks
// after BC_delayed: the last word of bit k leaves the Output Multiplexer at
// most 100 + 66k ns after BC_delayed (two 22 ns clocks of crossing, then
// 3 words of 22 ns per bit), and the tap is the first 12 ns clock after
// that. With a large out_delay the late clears may reach into the next
// crossing's windows; out_delay is meant to stay small.
// A window is cleared by the pulse of the last primitive bit that reads
// it (windows 0,1 by bit 1; 2,3 by bit 2; 4,5 by 3; 6,7 by 4; 8,9,10 by 5).
// The delay lines, the address counter, the RAM and six clear bits follow
// the paper (its XFT block figure prints aclr[6..0], its text and control
// figure six bits; six are used); tap spacing, the window-to-clear mapping
// and the RAM depth of 64 are this design's choices.
module xft_tlc #(
  parameter int unsigned NWIN   = 11,
  parameter int unsigned NTP    = 6,
  parameter int unsigned NTICK  = 33     // 12 ns clocks per crossing
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            bc,
  input  logic            b0,
  input  logic [5:0]      start_delay,
  input  logic [5:0]      out_delay,
  // VME write port of the Time-Window Enable Bitmap RAM
  input  logic            tw_we,
  input  logic [5:0]      tw_addr,
  input  logic [21:0]     tw_wdata,
  // outputs
  output logic            xft_enable,
  output logic [NWIN-1:0] ramp_e,
  output logic [NWIN-1:0] ramp_l,
  output logic            bc_delayed,
  output logic            b0_delayed,
  output logic [NTP-1:0]  tw_clear,    // one pulse per primitive bit
  output logic [NWIN-1:0] aclr_win     // the same, per window
);
  localparam int unsigned OUTLEN = 128;
  localparam int unsigned CLR_TAP [NTP] = '{10, 15, 21, 26, 32, 37};

  logic [63:0]       start_bc, start_b0;
  logic [OUTLEN-1:0] out_bc, out_b0;
  logic              en_b0;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      start_bc <= '0;
      start_b0 <= '0;
      out_bc   <= '0;
      out_b0   <= '0;
    end else begin
      start_bc <= {start_bc[62:0], bc};
      start_b0 <= {start_b0[62:0], b0 & bc};
      out_bc   <= {out_bc[OUTLEN-2:0], xft_enable};
      out_b0   <= {out_b0[OUTLEN-2:0], en_b0};
    end

  assign xft_enable = start_bc[start_delay];
  assign en_b0      = start_b0[start_delay];
  assign bc_delayed = out_bc[{1'b0, out_delay}];
  assign b0_delayed = out_b0[{1'b0, out_delay}];

  always_comb
    for (int k = 0; k < NTP; k++)
      tw_clear[k] = out_bc[int'(out_delay) + CLR_TAP[k]];

  always_comb
    for (int i = 0; i < NWIN; i++)
      aclr_win[i] = (i < 2) ? tw_clear[1] : tw_clear[(i >= 8) ? 5 : i/2 + 1];

  // Time-Window Enable Bitmap RAM and its address counter
  logic [21:0] tw_ram [64];
  logic [5:0]  addr;
  logic        active;

  always_ff @(posedge clk)
    if (tw_we) tw_ram[tw_addr] <= tw_wdata;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      addr   <= '0;
      active <= 1'b0;
      ramp_e <= '0;
      ramp_l <= '0;
    end else begin
      if (xft_enable) begin
        addr   <= '0;
        active <= 1'b1;
      end else if (active) begin
        addr <= addr + 1'b1;
        if (addr == 6'(NTICK-1)) active <= 1'b0;
      end
      ramp_e <= (active && !xft_enable) ? tw_ram[addr][NWIN-1:0]    : '0;
      ramp_l <= (active && !xft_enable) ? tw_ram[addr][2*NWIN-1:NWIN] : '0;
    end
endmodule
