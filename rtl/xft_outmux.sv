// xft_outmux: the XFT Output Multiplexer (OM) of one TDC chip.
//
// Runs on the 22 ns main clock. A start pulse (BC_delayed, carried over
// from the 12 ns domain) begins one crossing's transmission: 18 words of 16
// bits, one per 22 ns, 396 ns in all. Word c carries primitive bit c/3 of
// wires 16*(c%3) .. 16*(c%3)+15, wire 16*(c%3)+j on tp[j]. Alongside go the
// Word-0 marker, high on words 0, 6 and 12; the B0 marker, high on all 18
// words of a bunch-zero crossing; and the Data Strobe, a 44 ns clock that
// is high on even words and low on odd ones, so that both of its edges
// carry data. The primitives are only reordered, never combined. Outputs
// are registered: word c appears c+1 clocks after the start pulse. Between
// crossings tp, Word-0 and B0 are low and the strobe keeps toggling.
// The word order, marker pattern and strobe follow the paper's P3 output
// table; the behaviour between crossings is this design's choice.
module xft_outmux #(
  parameter int unsigned NCH = 48,
  parameter int unsigned NTP = 6
) (
  input  logic           clk,        // 22 ns
  input  logic           rst_n,
  input  logic           start,
  input  logic           start_b0,
  input  logic [NTP-1:0] sbin [NCH],
  output logic [15:0]    tp,
  output logic           word0,
  output logic           b0_out,
  output logic           strobe,
  output logic           active,
  output logic           tp_valid,   // tp carries word tp_idx of a crossing
  output logic [4:0]     tp_idx,
  output logic [NTP-1:0] bit_sent    // pulse when the 3rd word of bit k leaves
);
  localparam int unsigned NWORD = NTP * NCH / 16;   // 18

  logic [4:0] c;
  logic       b0_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      c        <= '0;
      active   <= 1'b0;
      b0_q     <= 1'b0;
      tp       <= '0;
      word0    <= 1'b0;
      b0_out   <= 1'b0;
      strobe   <= 1'b0;
      bit_sent <= '0;
      tp_valid <= 1'b0;
      tp_idx   <= '0;
    end else begin
      bit_sent <= '0;
      if (start || active) begin
        automatic logic [4:0] cc  = start ? 5'd0 : c;
        automatic logic       bb  = start ? start_b0 : b0_q;
        automatic int         grp = int'(cc) % 3;
        automatic int         bt  = int'(cc) / 3;
        for (int j = 0; j < 16; j++) tp[j] <= sbin[16*grp + j][bt];
        word0  <= (int'(cc) % 6 == 0);
        b0_out <= bb;
        strobe <= ~cc[0];
        b0_q   <= bb;
        tp_valid <= 1'b1;
        tp_idx   <= cc;
        if (grp == 2) bit_sent[bt] <= 1'b1;
        if (cc == 5'(NWORD-1)) begin
          active <= 1'b0;
          c      <= '0;
        end else begin
          active <= 1'b1;
          c      <= cc + 1'b1;
        end
      end else begin
        tp     <= '0;
        word0  <= 1'b0;
        b0_out <= 1'b0;
        strobe <= ~strobe;
        tp_valid <= 1'b0;
      end
    end
endmodule
