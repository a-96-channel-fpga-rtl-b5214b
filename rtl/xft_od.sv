// xft_od: one XFT Occupancy Detector (OD), for one wire.
//
// Hit scanners: the incoming 10-bit word is store[9:0] and the word of the
// previous 12 ns clock, kept in a register, is store[19:10]; cell 19 is the
// earliest. major_e is set when four consecutive high cells start at one of
// cells 19..15 (a hit starting in the first 6 ns of the older word) and
// major_l when they start at one of cells 14..10 (the last 6 ns).
// Time-window registers: NWIN flags; flag[i] is set at a 12 ns clock edge
// when (ramp_e[i] and major_e) or (ramp_l[i] and major_l), and then stays
// set until its asynchronous clear aclr_win[i] (or reset).
// Output hit logic: primitive 0 is flag[0]; primitive k (1..5) is a
// programmable Boolean function of the three windows 2k-2, 2k-1 and 2k,
// given as an 8-entry truth table lut[k-1] indexed by
// {flag[2k-2], flag[2k-1], flag[2k]}.
// The scanner cells, the set/hold/clear behaviour and primitive 0 follow
// the paper. The paper combines three windows per primitive in a
// programmable way but does not give the window numbers or the function;
// the windows 2k-2..2k and the truth-table form are this design's choices.
module xft_od #(
  parameter int unsigned NWIN = 11,
  parameter int unsigned NTP  = 6
) (
  input  logic             clk,          // 12 ns
  input  logic             rst_n,
  input  logic [9:0]       store_in,
  input  logic [NWIN-1:0]  ramp_e,
  input  logic [NWIN-1:0]  ramp_l,
  input  logic [NWIN-1:0]  aclr_win,     // asynchronous clear, per window
  input  logic [7:0]       lut [NTP-1],
  output logic             major_e,
  output logic             major_l,
  output logic [NWIN-1:0]  flag,
  output logic [NTP-1:0]   sbin
);
  logic [19:0] store;
  logic [9:0]  prev;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) prev <= '0;
    else        prev <= store_in;

  assign store = {prev, store_in};

  always_comb begin
    major_e = 1'b0;
    major_l = 1'b0;
    for (int s = 19; s >= 15; s--) major_e |= &store[s -: 4];
    for (int s = 14; s >= 10; s--) major_l |= &store[s -: 4];
  end

  for (genvar i = 0; i < NWIN; i++) begin : g_win
    logic f, clr_i;
    assign clr_i = aclr_win[i] | ~rst_n;
    always_ff @(posedge clk or posedge clr_i)
      if (clr_i)
        f <= 1'b0;
      else if ((ramp_e[i] && major_e) || (ramp_l[i] && major_l))
        f <= 1'b1;
    assign flag[i] = f;
  end

  always_comb begin
    sbin[0] = flag[0];
    for (int k = 1; k < NTP; k++)
      sbin[k] = lut[k-1][{flag[2*k-2], flag[2*k-1], flag[2*k]}];
  end
endmodule
