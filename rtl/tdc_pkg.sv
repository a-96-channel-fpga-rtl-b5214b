// tdc_pkg: constants and types shared by the TDC chip blocks.
//
// One TDC chip digitises 48 wires. Each wire is sampled every 1.2 ns and
// deserialised into 10-bit words, one per 12 ns tick; bit 9 of a word is the
// earliest sample (time value 0) and bit 0 the latest (time value 9). The
// 48 words of a tick travel together as one 480-bit word, wire w in bits
// [10*w+9 : 10*w]. The sizes below are the ones the paper gives for the CDF
// COT configuration; the VME register map at the end is this design's own.
package tdc_pkg;

  localparam int unsigned NCH        = 48;   // wires per chip
  localparam int unsigned WBITS      = 10;   // samples per 12 ns word
  localparam int unsigned PIPE_DEPTH = 512;  // L1 pipeline words
  localparam int unsigned L2_NBUF    = 4;    // Level-2 buffers
  localparam int unsigned L2_DEPTH   = 64;   // words per Level-2 buffer
  localparam int unsigned MAX_HITS   = 7;    // hits kept per wire
  localparam int unsigned ED_RAM_W   = 8;    // le_ram / width_ram entries
  localparam int unsigned HC_WORDS   = 7;    // Hit Count RAM words
  localparam int unsigned HD_WORDS   = 168;  // Hit Data RAM words
  localparam int unsigned NWIN       = 11;   // XFT time windows per wire
  localparam int unsigned NTP        = 6;    // XFT trigger primitive bits per wire
  localparam int unsigned TDC_TYPE   = 1;    // header field "TDC Type"

  // One stored hit: leading-edge time bin and width, both in 1.2 ns bins.
  typedef struct packed {
    logic [7:0] le;
    logic [7:0] width;
  } hit_t;

  // Hit Count header word (last word of the Hit Count RAM).
  typedef struct packed {
    logic [8:0] module_id;   // [31:23]
    logic       tdc_type;    // [22]
    logic       chip_serial; // [21]
    logic       unused;      // [20]
    logic [1:0] l2_buf;      // [19:18]
    logic [9:0] nhits;       // [17:8]
    logic [7:0] bc_count;    // [7:0]
  } hc_header_t;

  // Register map of the chip's VME decoder, in 32-bit word addresses
  // (address bits [17:0] of the chip's window). This map is not from the paper.
  localparam logic [17:0] A_CTRL        = 18'h00000; // [0] test-data mode, [1] local calib, [2] xft spy freeze
  localparam logic [17:0] A_MASK_LO     = 18'h00001; // channel mask wires 0..31 (1 = blocked)
  localparam logic [17:0] A_MASK_HI     = 18'h00002; // channel mask wires 32..47
  localparam logic [17:0] A_PIPE_DELAY  = 18'h00003; // pipeline read offset, 12 ns ticks
  localparam logic [17:0] A_L2_LEN      = 18'h00004; // words written per L1A (1..64)
  localparam logic [17:0] A_ED_WORDS    = 18'h00005; // words searched by the EDs (1..33)
  localparam logic [17:0] A_MAX_HITS    = 18'h00006; // hits per wire (1..7)
  localparam logic [17:0] A_MODULE_ID   = 18'h00007; // module ID, 9 bits
  localparam logic [17:0] A_XFT_START   = 18'h00008; // XFT start delay, 12 ns ticks
  localparam logic [17:0] A_XFT_OUT     = 18'h00009; // XFT output delay, 12 ns ticks
  localparam logic [17:0] A_XFT_LUT     = 18'h0000A; // 5 x 8-bit truth tables, primitives 1..5 (low 32 bits)
  localparam logic [17:0] A_XFT_LUT_HI  = 18'h0000B; // truth table of primitive 5 in bits [7:0]
  localparam logic [17:0] A_STATUS      = 18'h0000C; // [0] TDC_DONE (read only)
  localparam logic [17:0] A_TX_START    = 18'h0000D; // write: play the Tx pulse RAM once
  localparam logic [17:0] A_HIT_COUNT   = 18'h00010; // 7 words, read only
  localparam logic [17:0] A_TW_RAM      = 18'h00100; // 64 words of 22 time-window bits
  localparam logic [17:0] A_XFT_SPY     = 18'h00200; // 18 words: [15:0] last words sent to the XFT
  localparam logic [17:0] A_HIT_DATA    = 18'h00400; // 168 words, read only
  localparam logic [17:0] A_TX_RAM      = 18'h00800; // 512 words of 10 bits
  localparam logic [17:0] A_TEST_RAM    = 18'h10000; // 8192 words of 32 bits

endpackage
