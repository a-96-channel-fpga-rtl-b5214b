# COT TDC: a 48-wire time-to-digital converter with an XFT trigger path

This is SystemVerilog for a drift-chamber TDC board: 96 sense wires read by two
identical TDC chips, plus the board's VME interface. Each wire's discriminator
output is sampled every 1.2 ns. The samples are held in a 5.5 us pipeline while
the first-level trigger decides. Accepted events are then turned into lists of
leading-edge times and pulse widths that VME can read. In parallel, each chip
reduces every bunch crossing to six "trigger primitive" bits per wire for a fast
track trigger (the XFT), sent on the P3 connector.

The whole design is digital and synchronous. Clock-domain crossings are
explicit, and there are no analog parts: receivers, delay lines, power and
connectors are left outside the top level as its ports.

## Clocks

Everything comes from the 132 ns accelerator (CDF) clock:

| clock      | period | used for                                                    |
|------------|--------|-------------------------------------------------------------|
| `clk_fast` | 1.2 ns | sampling the wires, serialising calibration pulses          |
| `clk12`    | 12 ns  | word clock: 10 samples per wire per word, pipeline, L2 write, VME |
| `clk22`    | 22 ns  | main clock: edge detection, readout packing, XFT output      |

`pll_clockgen` is a behavioural model of the PLL, not logic. All three clocks
start on a rising CDF clock edge, so every 132 ns they rise together (11, 6 and
110 periods). Modules that use delays declare `timeunit 1ns`.

## Data path of one chip (`tdc_chip`)

1. **Deserialiser** (`serdes_in`). Each wire shifts in one sample per 1.2 ns.
   Every 12 ns the last ten samples become a 10-bit word, with the earliest
   sample in bit 9. Wire *w* is bits `[10w+9:10w]` of the 480-bit chip word.
2. **Input multiplexer and mask** (`mux_mask`). Selects either the wires or the
   **Test Data RAM** (`test_data_ram`: 512 words of 480 bits, written as 16
   32-bit VME words per row and replayed from row 0 after every B0). Masked
   wires read as zero.
3. **Level-1 pipeline** (`pipeline_ram`). 512 × 480 bits written every 12 ns.
   Its output is the word written `delay` clocks earlier. The default is 462
   clocks, 5.544 us. The write address is zeroed on the first BC after reset
   and then runs freely.
4. **Level-2 buffers** (`l2_buffers`). Four buffers of 64 words. A Level-1
   Accept names a buffer, and the next `len` words (default 33, i.e. 396 ns)
   of pipeline output go into it together with the bunch counter. They are
   written on `clk12` and read on `clk22`.
5. **Edge detection** (`edge_detector` × 48, `ed48`). A Level-2 Accept names
   the buffer to process. This is the most involved part of the chip; see the
   next section.
6. **Readout RAMs**. The Hit Count RAM holds 7 words: six of 4-bit hit counts
   (wire 8i+j in bits `[4j+3:4j]` of word i) and a header. The Hit Data RAM
   holds 168 words, two 16-bit hits per word (leading time `[31:24]`, width
   `[23:16]`, then the second hit in `[15:0]`). Hits are packed wire after wire
   with no gaps. `tdc_done` rises when the event is complete.

The header word is `{module_id[8:0], tdc_type(=1), chip_serial, 1'b0, l2_buf[1:0], nhits[9:0], bc_count[7:0]}`.

## How hits are found

A hit is a leading edge followed by a trailing edge. The leading edge is
recognised by the five-sample pattern `01111` and the trailing edge by `10000`.
Each detector holds two consecutive words (the current word and the next one),
so a pattern may cross a word boundary. A pattern starting at bit *s* of the
current word is the 5-sample window `{cur,next}[s+10 -: 5]`.

The ten start positions are split into three groups, searched on three
successive 22 ns edges:

| group | start bits |
|-------|------------|
| A     | 9..6       |
| B     | 5..2       |
| C     | 1, 0       |

A new word is loaded every third edge, so one word takes 66 ns. The load of
the next word shares an edge with group C.

Other details:

- An all-zero word is assumed before the first word of the event. One zero
  word is appended after the last, so a pulse that ends at the end of the
  window is still closed.
- Times are counted in 1.2 ns samples from the start of the event window.
- Each detector stores up to `max_hits` (default and maximum 7) leading times
  and widths, each 8 bits and saturating at 255. It also keeps a count of the
  hits it stored.

`ed48` runs the 48 detectors through a fixed sequence on `clk22`:

1. Clear the detectors.
2. Select the buffer.
3. Feed `ed_words` + 1 words.
4. Register the 48 counts and write the Hit Count RAM.
5. Copy every detector's stored hits into the Hit Data RAM. This goes through
   four 12-input multiplexers and one 4-input multiplexer, one hit per clock,
   with one extra clock per detector.
6. Clear the detectors and raise `tdc_done`.

With 33 words and 7 hits on every wire this takes 494 clocks, 10.87 us. A
simulation of the full board measured 10.91 us from Level-2 Accept to
`tdc_done`. That is inside the 12 us minimum spacing of Level-2 Accepts.

## The XFT trigger path (`xft_block`)

For every bunch crossing, the track trigger wants to know, per wire, in which
of six time bins the wire fired. The chip builds this in four pieces.

- **Trigger Logic Control** (`xft_tlc`). Each BC enters a 64-tap delay line.
  The tap chosen by `start_delay` gives *XFT Enable*. Enable restarts an
  address counter that reads 33 consecutive words of a 64 × 22-bit
  **time-window RAM**, one per 12 ns. Each word is two sets of 11 window
  flags: one for "early" and one for "late" coincidences.

  A second, 128-tap line delays Enable by `out_delay`+1 clocks to give
  BC_delayed and B0_delayed. Six taps after it, at offsets 10, 15, 21, 26, 32
  and 37 clocks, clear the window flags in step with the output multiplexer.
  Windows 0–1 clear with bit 1, 2–3 with bit 2, 4–5 with bit 3, 6–7 with bit 4
  and 8–10 with bit 5.
- **Occupancy detector** (`xft_od`, one per wire). It keeps the previous and
  the current word as 20 cells. "Early" means four high cells starting at
  cells 19..15; "late" means four high cells starting at cells 14..10.

  When a coincidence of the kind the RAM enables occurs in one of the 11
  windows, that window's flag is set. The flag holds until its clear pulse.

  Bit 0 of the six primitive bits is window 0. Bits 1..5 each come from an
  8-entry truth table (`lut`, set over VME) indexed by three neighbouring
  windows `{2k-2, 2k-1, 2k}`. The default tables are `8'hFE`, a logical OR.
- **Output multiplexer** (`xft_outmux`). It sends 18 16-bit words on `clk22`.
  Word *c* carries primitive bit *c*/3 of wires 16·(*c* mod 3)..+15.
  - `word0` marks words 0, 6 and 12.
  - The B0 marker is held for the whole frame.
  - The strobe is high on even words.

  On the board the two chips' words sit side by side as a 32-bit P3 bus.
- **Spy memory** (`xft_spy`). Keeps the last 18 words sent. It can be frozen
  and read over VME.

## Calibration

Each chip has a 512-word Tx pulse RAM (`tx_pulse_ram`). A VME write to
`A_TX_START` plays it out one 10-bit word per 12 ns. `serdes_out` serialises
each word bit 9 first at 1.2 ns. With the local calibration bit set, this
pattern drives the chip's calibration output. Otherwise the output follows the
CDF calibration input.

## Chip registers (`vme_decoder`, word addresses)

| address      | register                                              | reset |
|--------------|-------------------------------------------------------|-------|
| 0x0          | control: bit0 test mode, bit1 local calibration, bit2 freeze spy | 0 |
| 0x1, 0x2     | mask, wires 0–31 and 32–47                            | 0     |
| 0x3          | pipeline delay (clocks of 12 ns)                      | 462   |
| 0x4          | Level-2 buffer length                                 | 33    |
| 0x5          | words processed per event                             | 33    |
| 0x6          | maximum hits per wire                                 | 7     |
| 0x7          | module ID                                             |       |
| 0x8, 0x9     | XFT start and output delay                            |       |
| 0xA, 0xB     | XFT truth tables                                      | FE each |
| 0xC          | status (`tdc_done`, synchronised)                     |       |
| 0xD          | write: start Tx pulse playback                        |       |
| 0x10–0x16    | Hit Count RAM                                         |       |
| 0x100–0x13F  | time-window RAM                                       |       |
| 0x200–0x211  | XFT spy memory                                        |       |
| 0x400–0x4A7  | Hit Data RAM                                          |       |
| 0x800–0x9FF  | Tx pulse RAM                                          |       |
| 0x10000–0x11FFF | Test Data RAM (16 words per 480-bit row)           |       |

A read is answered two clocks later with `rvalid`.

## Board and VME interface (`tdc_board`, `vme_interface`)

The board is two chips (serial numbers 0 and 1) and the interface. The
interface runs on chip 0's 12 ns clock.

**Single accesses.** A single access whose address bits `[31:27]` match the
geographic slot goes to:

- chip `addr[20]`, at word address `addr[19:2]`, or
- the card's own register, when bit 21 is set. This register holds bit 0, CBLT
  enabled, and bit 1, last card.

**Chained block transfer (CBLT).** The host asks for virtual slot 30 (Hit
Count) or 31 (Hit Data), in 32- or 64-bit beats. When the token arrives, the
card reads each chip's header to learn the word count. It then sends chip 0's
words followed by chip 1's, and passes the token on (or signals end of chain
if it is the last card):

| slot | D32 beats                  | D64 beats |
|------|----------------------------|-----------|
| 30   | 14                         | 8         |
| 31   | ceil(n/2) per chip (≤ 336) | ≤ 168     |

In D64 the earlier word is in `[63:32]`, and an odd last word is paired with
zero. A card with CBLT disabled passes the token straight through.

The VME bus cycles themselves are not modelled. The interface exposes a simple
synchronous request/valid/ready handshake in their place.

## Departures from the source description, and choices made here

- **Level-2 buffer depth.** The source's text says 32 words, but its table and
  block diagram say 64. 64 is used, because an event is 33 words.
- **Clear signals.** One figure caption lists seven clear signals for the XFT
  windows; the text and timing diagram describe six. Six are used.
- **Second hit in a Hit Data word.** The source prints the same bit positions
  as for the first hit. `[15:0]` is used.
- **Occupancy logic.** The primitive logic is drawn as fixed gates in a figure.
  Here it is a programmable truth table whose default reproduces an OR. The
  gate network itself was not copied.
- **Clear taps.** The clear offsets (10…37 clocks) are this design's. They are
  chosen so each window is cleared only after the output multiplexer has sent
  the bit that reads it.
- **Timing not measured.** The 80 ns trigger latency and the 47 MB/s CBLT
  rate are not checked. The first depends on the programmable delays; the
  second on VME timing that is not modelled.
- **Registers.** The register map, reset values and synchronisers are this
  design's. The source gives the memories and their sizes but not a bit-level
  register map.
- **Not built.** The LED and logic-analyser header functions are not built.
  Only the spy-memory part of the XFT data-acquisition features is built.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Where a latency or rate is defined, the
testbench checks it:

- 66 ns per word in the edge detector.
- Under 12 us for a full event.
- 12/22/1.2 ns clock periods.
- The pipeline delay in clocks.
- The L2 buffer fill length.
- Tx playback length.
- Serial bit timing.
- The XFT enable, window-RAM and clear-tap timing.

`tdc_board` has an end-to-end testbench, `tb/tb_tdc_board.sv`, at full size. It:

- programs both chips;
- runs chip 0 from the Test Data RAM and chip 1 from its serial inputs, with
  eight masked wires;
- issues Level-1 and Level-2 Accepts;
- reads all four CBLT variants;
- passes a token;
- checks local and CDF calibration and the P3 markers.

It counts each of these and fails on any that never happened. It simulates
about 240 us in under a second.

To run one testbench with plain Verilator, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wall \
  --top-module tb_tdc_board rtl/tdc_pkg.sv $(ls rtl/*.sv | grep -v tdc_pkg) \
  tb/tb_tdc_board.sv
./obj_dir/Vtb_tdc_board
```

(The package `rtl/tdc_pkg.sv` must come first. The edge-detector and ED48 testbenches also
need `tb/tdc_ref_pkg.sv`, a behavioural reference for the hit finder.)
