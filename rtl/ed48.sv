// ed48: controller and output packer of the Edge Detector block (ED48).
//
// One per chip, on the 22 ns main clock. A Level-2 Accept starts it:
//   1. CLR     clear all 48 EDs; TDC_DONE goes low.
//   2. START   select the accepted Level-2 buffer, zero its read counter.
//   3. FETCH   read the first word.
//   4. FEED    for each of ed_words words (VME, at most 33) plus one
//              appended zero word: load it into every ED on the clock_0
//              phase, then search groups A, B and C on the three following
//              main-clock edges (C shares its edge with the next load).
//              The next word is read on the clock_2 phase. 66 ns per word.
//   5. SAVE_WC the 48 hit counts are registered onto the Hit Count bus
//              (save_wc), one clock after the EDs finish;
//   6. WRITE_WC and written into the Hit Count RAM on the next clock
//              (write_wc): words 0..5 carry 4 bits per wire, wire 8i+j in
//              bits [4j+3:4j] of word i; word 6 is the header (bunch crossing
//              counter, number of hits, buffer number, chip serial, TDC type
//              1, module ID).
//   7. XFER    move the hits into the Hit Data RAM, two 16-bit hits per
//              32-bit word (first hit in [31:16]: leading edge [31:24],
//              width [23:16]; second in [15:0]), wire after wire with no
//              gaps. The 48 EDs are reached through four 12-input
//              multiplexers, one per section of 12 EDs, and a 4-input
//              multiplexer. For each ED, max_hits addresses are read from its
//              small RAMs whatever its hit count; the write enable is the
//              comparison "address < hit count". Changing ED costs one
//              extra clock.
//   8. DONE    clear the EDs and the Hit Count bus (clear_wc), set TDC_DONE.
// With 33 words and 7 hits the whole sequence takes 494 main clocks,
// 10.9 us, inside the paper's 12 us. The two RAMs are read from VME on the
// 12 ns clock through their second port; read data is valid one clock after
// the address. An odd last hit leaves [15:0] of its word zero. Words past
// the event's hits keep older contents: nothing is erased.
// The steps, the formats and the multiplexer structure follow the paper;
// the state encoding, the single-cycle write of all seven Hit Count words
// and the zero padding are this design's choices.
module ed48
  import tdc_pkg::*;
#(
  parameter int unsigned NSEC = 4,     // sections of EDs
  parameter int unsigned NPER = 12     // EDs per section
) (
  input  logic        clk,             // 22 ns main clock
  input  logic        rst_n,
  // start
  input  logic        l2a,
  input  logic [1:0]  l2a_buf,
  // configuration (VME)
  input  logic [5:0]  ed_words,
  input  logic [2:0]  max_hits,
  input  logic [8:0]  module_id,
  input  logic        chip_serial,
  // Level-2 buffer read port
  output logic        l2_rd_start,
  output logic [1:0]  l2_rd_buf,
  output logic        l2_rd_en,
  input  logic [NSEC*NPER*10-1:0] l2_data,
  input  logic [7:0]  l2_bc_count,
  // to the EDs
  output logic        ed_clr,
  output logic        ed_load,
  output logic [NSEC*NPER*10-1:0] ed_din,
  output logic        ed_search,
  output logic [1:0]  ed_grp,
  output logic [2:0]  ed_rd_addr,
  input  logic [7:0]  ed_le    [NSEC*NPER],
  input  logic [7:0]  ed_width [NSEC*NPER],
  input  logic [3:0]  ed_count [NSEC*NPER],
  // status
  output logic        tdc_done,
  output logic        busy,
  // VME read port of the Hit Count and Hit Data RAMs
  input  logic        vme_clk,
  input  logic [7:0]  hd_raddr,
  output logic [31:0] hd_rdata,
  input  logic [2:0]  hc_raddr,
  output logic [31:0] hc_rdata
);
  localparam int unsigned NED   = NSEC*NPER;
  localparam int unsigned HDW   = NED*7/2;   // Hit Data RAM words

  typedef enum logic [3:0] {
    S_IDLE, S_CLR, S_START, S_FETCH, S_FEED, S_SAVE_WC, S_WRITE_WC, S_XFER, S_GAP, S_DONE
  } state_t;

  state_t      state;
  logic [5:0]  k;        // word slot, 0 .. ed_words (last is the zero word)
  logic [1:0]  ph;       // clock_0 / clock_1 / clock_2 phase
  logic [1:0]  sec;      // ED section
  logic [3:0]  idx;      // ED within the section
  logic [2:0]  ra;       // address into the ED RAMs
  logic [8:0]  hp;       // next 16-bit half-word of the Hit Data RAM
  logic [1:0]  buf_q;
  logic        hit_we;   // Hit Data RAM write enable

  logic [3:0]  wc_bus [NED];   // Hit Count bus
  logic [31:0] hc_ram [HC_WORDS];
  logic [31:0] hd_ram [HDW];

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state    <= S_IDLE;
      k        <= '0;
      ph       <= '0;
      sec      <= '0;
      idx      <= '0;
      ra       <= '0;
      hp       <= '0;
      buf_q    <= '0;
      tdc_done <= 1'b1;
    end else begin
      case (state)
        S_IDLE:
          if (l2a) begin
            buf_q    <= l2a_buf;
            tdc_done <= 1'b0;
            state    <= S_CLR;
          end
        S_CLR:   state <= S_START;
        S_START: state <= S_FETCH;
        S_FETCH: begin
          k     <= '0;
          ph    <= '0;
          state <= S_FEED;
        end
        S_FEED: begin
          if (ph == 2'd2) begin
            ph <= '0;
            k  <= k + 1'b1;
          end else begin
            ph <= ph + 1'b1;
          end
          if (k == ed_words + 6'd1) state <= S_SAVE_WC;   // final group-C search
        end
        S_SAVE_WC:  state <= S_WRITE_WC;
        S_WRITE_WC: begin
          sec   <= '0;
          idx   <= '0;
          ra    <= '0;
          hp    <= '0;
          state <= S_XFER;
        end
        S_XFER: begin
          if (hit_we) hp <= hp + 1'b1;
          if (ra == max_hits - 3'd1) begin
            ra    <= '0;
            state <= S_GAP;
          end else begin
            ra <= ra + 1'b1;
          end
        end
        S_GAP: begin                       // one extra clock per ED change
          if (idx == 4'(NPER-1)) begin
            idx <= '0;
            if (sec == 2'(NSEC-1)) state <= S_DONE;
            else begin
              sec   <= sec + 1'b1;
              state <= S_XFER;
            end
          end else begin
            idx   <= idx + 1'b1;
            state <= S_XFER;
          end
        end
        S_DONE: begin
          tdc_done <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end

  assign busy = (state != S_IDLE);

  // ------------------------------------------------------ feeding the EDs
  wire feeding = (state == S_FEED);
  assign ed_clr      = (state == S_CLR) || (state == S_DONE);
  assign l2_rd_start = (state == S_START);
  assign l2_rd_buf   = buf_q;
  assign l2_rd_en    = (state == S_FETCH) ||
                       (feeding && ph == 2'd2 && (k + 6'd1) < ed_words);
  assign ed_load     = feeding && ph == 2'd0 && k <= ed_words;
  assign ed_din      = (k < ed_words) ? l2_data : '0;
  assign ed_search   = feeding && !(ph == 2'd0 && k == 6'd0);
  assign ed_grp      = (ph == 2'd0) ? 2'd2 : ph - 2'd1;

  // ------------------------------------------- section and ED multiplexers
  logic [7:0] sec_le [NSEC];
  logic [7:0] sec_wd [NSEC];
  logic [3:0] sec_wc [NSEC];
  always_comb
    for (int s = 0; s < NSEC; s++) begin    // four 12-input multiplexers each
      sec_le[s] = ed_le   [s*NPER + int'(idx)];
      sec_wd[s] = ed_width[s*NPER + int'(idx)];
      sec_wc[s] = wc_bus  [s*NPER + int'(idx)];
    end

  logic [7:0] mux_le, mux_wd;
  logic [3:0] mux_wc;
  assign mux_le = sec_le[sec];             // 4-input multiplexers
  assign mux_wd = sec_wd[sec];
  assign mux_wc = sec_wc[sec];

  assign ed_rd_addr = ra;
  assign hit_we = (state == S_XFER) && ({1'b0, ra} < mux_wc);   // compare

  // ---------------------------------------------------------- Hit Count
  logic [9:0] nhits;
  always_comb begin
    nhits = '0;
    for (int w = 0; w < NED; w++) nhits += 10'(wc_bus[w]);
  end

  hc_header_t hdr;
  always_comb begin
    hdr.module_id   = module_id;
    hdr.tdc_type    = 1'(TDC_TYPE);
    hdr.chip_serial = chip_serial;
    hdr.unused      = 1'b0;
    hdr.l2_buf      = buf_q;
    hdr.nhits       = nhits;
    hdr.bc_count    = l2_bc_count;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)
      for (int w = 0; w < NED; w++) wc_bus[w] <= '0;
    else if (state == S_SAVE_WC)                  // save_wc
      for (int w = 0; w < NED; w++) wc_bus[w] <= ed_count[w];
    else if (state == S_DONE)                     // clear_wc
      for (int w = 0; w < NED; w++) wc_bus[w] <= '0;

  always_ff @(posedge clk)
    if (state == S_WRITE_WC) begin                // write_wc
      for (int i = 0; i < HC_WORDS-1; i++)
        for (int j = 0; j < 8; j++)
          hc_ram[i][4*j +: 4] <= (8*i+j < NED) ? wc_bus[8*i+j] : 4'd0;
      hc_ram[HC_WORDS-1] <= hdr;
    end

  // ----------------------------------------------------------- Hit Data
  always_ff @(posedge clk)
    if (hit_we) begin
      if (!hp[0]) hd_ram[hp[8:1]] <= {mux_le, mux_wd, 16'h0000};
      else        hd_ram[hp[8:1]][15:0] <= {mux_le, mux_wd};
    end

  // ------------------------------------------------------- VME read port
  always_ff @(posedge vme_clk) begin
    hd_rdata <= (int'(hd_raddr) < HDW)      ? hd_ram[hd_raddr] : 32'd0;
    hc_rdata <= (int'(hc_raddr) < HC_WORDS) ? hc_ram[hc_raddr] : 32'd0;
  end
endmodule
