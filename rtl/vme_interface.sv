// vme_interface: the board's VME interface FPGA, reduced to its logic.
//
// Two jobs. (1) Single accesses: a host access whose address bits [31:27]
// equal the card's geographic slot is passed to one TDC chip (bit 20
// selects chip 1, bits [19:2] are the chip's word address) or, with bit 21
// set, to the interface's own control register (bit 0: CBLT enabled, reset
// 1; bit 1: last card of the chain, reset 0). Reads return rdata with
// rvalid. (2) Chained Block Transfer (CBLT) readout: a cblt_req names the
// virtual slot, 30 for Hit Count words or 31 for Hit Data words, and the
// data width, D32 or D64. When its token_in is high the card sends its
// words as beats on dout/dvalid (the host takes one beat per cycle with
// dready), chip 0 first, then raises token_out for the next card; the last
// card instead pulses chain_end (the end-of-chain bus error of CBLT). A card
// with CBLT disabled passes the token straight through.
//   slot 30: the 7 Hit Count words of each chip; 14 beats in D32, 8 in D64
//   slot 31: ceil(n/2) Hit Data words of each chip, n being that chip's
//            hit total from its header; at most 336 beats in D32, 168 in D64
// In D64 two words of the same chip share a beat, the earlier in [63:32];
// an odd last word is paired with zero. These counts are the paper's; the
// VME bus cycles themselves (address modifiers, strobes, DTACK, the
// daisy-chain wiring) are not described there and are not modelled: this
// block presents a simple synchronous handshake in their place.
module vme_interface (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  ga,             // geographic address (slot)
  // single accesses
  input  logic [31:0] addr,
  input  logic        we,
  input  logic        re,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output logic        rvalid,
  // CBLT
  input  logic        cblt_req,
  input  logic [4:0]  cblt_slot,      // 30 or 31
  input  logic        cblt_d64,
  input  logic        token_in,
  output logic        token_out,
  output logic        chain_end,
  output logic [63:0] dout,
  output logic        dvalid,
  input  logic        dready,
  // to the two TDC chips
  output logic [17:0] chip_addr,
  output logic [1:0]  chip_we,
  output logic [1:0]  chip_re,
  output logic [31:0] chip_wdata,
  input  logic [31:0] chip_rdata [2],
  input  logic [1:0]  chip_rvalid
);
  localparam logic [17:0] HC_BASE = 18'h00010;   // Hit Count words
  localparam logic [17:0] HD_BASE = 18'h00400;   // Hit Data words

  logic cblt_en, is_last;

  typedef enum logic [2:0] {
    C_IDLE, C_WAIT_TOKEN, C_HDR, C_HDR_WAIT, C_RD, C_RD_WAIT, C_SEND, C_NEXT_CHIP
  } cstate_t;

  cstate_t     cs;
  logic        chip;         // chip being read
  logic        slot_hd;      // 1: Hit Data (slot 31)
  logic        d64;
  logic [8:0]  nwords, widx;
  logic        half;         // D64: first word of the pair held
  logic [31:0] hold;

  // single-access decode
  wire mine     = (addr[31:27] == ga);
  wire own_reg  = mine && addr[21];
  wire cblt_bus = (cs == C_HDR) || (cs == C_RD);

  always_comb begin
    chip_we    = '0;
    chip_re    = '0;
    chip_wdata = wdata;
    chip_addr  = addr[19:2];
    if (cblt_bus) begin
      chip_re[chip] = 1'b1;
      chip_addr     = (cs == C_HDR) ? HC_BASE + 18'd6
                    : (slot_hd ? HD_BASE : HC_BASE) + 18'(widx);
    end else if (mine && !own_reg) begin
      chip_we[addr[20]] = we;
      chip_re[addr[20]] = re;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cblt_en <= 1'b1;
      is_last <= 1'b0;
      rdata   <= '0;
      rvalid  <= 1'b0;
    end else begin
      rvalid <= 1'b0;
      if (own_reg && we) {is_last, cblt_en} <= wdata[1:0];
      if (own_reg && re) begin
        rdata  <= {30'd0, is_last, cblt_en};
        rvalid <= 1'b1;
      end else if (cs == C_IDLE && chip_rvalid != 2'b00) begin
        rdata  <= chip_rvalid[1] ? chip_rdata[1] : chip_rdata[0];
        rvalid <= 1'b1;
      end
    end

  // CBLT sequencer
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cs        <= C_IDLE;
      chip      <= 1'b0;
      slot_hd   <= 1'b0;
      d64       <= 1'b0;
      nwords    <= '0;
      widx      <= '0;
      half      <= 1'b0;
      hold      <= '0;
      token_out <= 1'b0;
      chain_end <= 1'b0;
      dout      <= '0;
      dvalid    <= 1'b0;
    end else begin
      chain_end <= 1'b0;
      if (dvalid && dready) dvalid <= 1'b0;
      case (cs)
        C_IDLE:
          if (cblt_req) begin
            slot_hd   <= (cblt_slot == 5'd31);
            d64       <= cblt_d64;
            token_out <= 1'b0;
            cs        <= C_WAIT_TOKEN;
          end
        C_WAIT_TOKEN:
          if (token_in) begin
            if (!cblt_en) begin
              token_out <= 1'b1;          // not in the chain: pass the token
              cs        <= C_IDLE;
            end else begin
              chip <= 1'b0;
              cs   <= C_HDR;
            end
          end
        C_HDR: begin                      // read the header of this chip
          widx <= '0;
          half <= 1'b0;
          cs   <= C_HDR_WAIT;
        end
        C_HDR_WAIT:
          if (chip_rvalid[chip]) begin
            nwords <= slot_hd ? 9'((chip_rdata[chip][17:8] + 10'd1) >> 1) : 9'd7;
            cs     <= C_RD;
          end
        C_RD: begin
          if (widx >= nwords) begin
            if (d64 && half) begin        // pad the odd last word
              dout   <= {hold, 32'd0};
              dvalid <= 1'b1;
              half   <= 1'b0;
              cs     <= C_SEND;
            end else begin
              cs <= C_NEXT_CHIP;
            end
          end else begin
            cs <= C_RD_WAIT;
          end
        end
        C_RD_WAIT:
          if (chip_rvalid[chip]) begin
            widx <= widx + 1'b1;
            if (d64 && !half) begin
              hold <= chip_rdata[chip];
              half <= 1'b1;
              cs   <= C_RD;
            end else begin
              dout   <= d64 ? {hold, chip_rdata[chip]} : {32'd0, chip_rdata[chip]};
              dvalid <= 1'b1;
              half   <= 1'b0;
              cs     <= C_SEND;
            end
          end
        C_SEND:
          if (dvalid && dready) cs <= C_RD;
        C_NEXT_CHIP:
          if (chip == 1'b0) begin
            chip <= 1'b1;
            cs   <= C_HDR;
          end else begin
            if (is_last) chain_end <= 1'b1;
            else         token_out <= 1'b1;
            cs <= C_IDLE;
          end
        default: cs <= C_IDLE;
      endcase
    end
endmodule
