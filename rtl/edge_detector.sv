// edge_detector: the per-wire Edge Detector (ED) of the TDC chip.
//
// Finds the hits on one wire in the stream of 10-bit words read from a
// Level-2 buffer and stores, for each, the time bin of its leading edge and
// its width. A hit starts at "01111" (a low sample followed by at least four
// high ones) and ends at "10000" (a high sample followed by four low ones);
// the width counts the bins from the first high sample to the first of the
// four low ones. The ED holds two words, first_word (earlier) and next_word
// (later), and looks at 5-bit windows of the 20 bits {first_word,next_word}.
// A window "starting at bit s" is bits s..s-4 of first_word, reaching into
// next_word for s < 4. The ten start positions are split into three groups,
// searched on three successive main-clock cycles (the paper's clock_1,
// clock_2 and clock_0 phases of a 66 ns word period):
//   group A: s = 9,8,7,6   group B: s = 5,4,3,2   group C: s = 1,0
// Within a group the earliest match of the pattern being looked for
// (leading edge while outside a hit, trailing edge inside one) is taken;
// at most one transition can fall in a group, so a word has at most three.
// load shifts a new word in (next_word -> first_word); search and grp ask
// for one group to be searched on the registers as they are at that edge,
// so "search group C" and "load" may share an edge.
//
// Times: bit s of first_word, the word that began at time T, is time
// T + 9 - s. Before the first word the ED holds an all-zero word, so a hit
// already high at time 0 is found ("four ones in a row" at the start of the
// data). The controller appends one all-zero word after the last data word,
// which also closes a hit still open at the end of the window.
//
// Storage: up to max_hits (VME, at most 7) hits in two 8 x 8-bit RAMs,
// le_ram and width_ram, read asynchronously through rd_addr. Values above
// 255 saturate at 255. hit_count is the number of hits stored. clr empties
// the ED (counters, state, words) but leaves the RAM contents.
// Patterns, groups, the two registers, the 8x8 RAMs and the 7-hit limit
// follow the paper; the saturation, the zero word at each end and the
// single-edge search-and-write are this design's choices.
module edge_detector (
  input  logic       clk,        // 22 ns main clock
  input  logic       rst_n,
  input  logic       clr,
  input  logic       load,       // clock_0: shift din in
  input  logic [9:0] din,
  input  logic       search,     // search group grp on this edge
  input  logic [1:0] grp,        // 0 = A, 1 = B, 2 = C
  input  logic [2:0] max_hits,
  input  logic [2:0] rd_addr,
  output logic [7:0] rd_le,
  output logic [7:0] rd_width,
  output logic [3:0] hit_count
);
  logic [9:0] first_word, next_word;
  logic [9:0] tnext;        // time of bit 9 of next_word (mod 1024)
  logic       in_hit;
  logic [9:0] le_time;
  logic [7:0] le_ram    [8];
  logic [7:0] width_ram [8];

  // window starting at bit s of first_word, s = 9..0
  logic [19:0] cat;
  assign cat = {first_word, next_word};

  function automatic logic [4:0] win(input logic [19:0] c, input int s);
    return c[s+10 -: 5];
  endfunction

  function automatic logic [7:0] sat8(input logic [9:0] v);
    return (v > 10'd255) ? 8'd255 : v[7:0];
  endfunction

  // search the requested group for the pattern of the current state
  logic       found;
  logic [3:0] found_s;
  always_comb begin
    int hi, lo;
    found   = 1'b0;
    found_s = '0;
    case (grp)
      2'd0:    begin hi = 9; lo = 6; end
      2'd1:    begin hi = 5; lo = 2; end
      default: begin hi = 1; lo = 0; end
    endcase
    for (int s = 9; s >= 0; s--)
      if (!found && s <= hi && s >= lo &&
          win(cat, s) == (in_hit ? 5'b10000 : 5'b01111)) begin
        found   = 1'b1;
        found_s = 4'(s);
      end
  end

  logic [9:0] edge_time, width_now;
  assign edge_time = tnext - 10'(found_s);
  assign width_now = edge_time - le_time;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      first_word <= '0;
      next_word  <= '0;
      tnext      <= 10'd1014;   // -10: the virtual zero word before the data
      in_hit     <= 1'b0;
      le_time    <= '0;
      hit_count  <= '0;
    end else if (clr) begin
      first_word <= '0;
      next_word  <= '0;
      tnext      <= 10'd1014;
      in_hit     <= 1'b0;
      le_time    <= '0;
      hit_count  <= '0;
    end else begin
      if (search && found) begin
        in_hit <= ~in_hit;
        if (!in_hit) le_time <= edge_time;
        else if (hit_count < 4'(max_hits)) hit_count <= hit_count + 1'b1;
      end
      if (load) begin
        first_word <= next_word;
        next_word  <= din;
        tnext      <= tnext + 10'd10;
      end
    end

  always_ff @(posedge clk)
    if (!clr && search && found && in_hit && hit_count < 4'(max_hits)) begin
      le_ram[hit_count[2:0]]    <= sat8(le_time);
      width_ram[hit_count[2:0]] <= sat8(width_now);
    end

  assign rd_le    = le_ram[rd_addr];
  assign rd_width = width_ram[rd_addr];
endmodule
