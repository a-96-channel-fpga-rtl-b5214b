// tb_tdc_board: end-to-end test of the board (two TDC chips and the VME
// interface) at its default sizes. It drives the CDF clock (132 ns), BC
// every 132 ns and one B0, programs both chips over VME, and then makes
// every mechanism of the board happen, counting each one:
//   vme_rw      register write and read-back on both chips
//   test_hits   chip 0 in test mode: hits from the Test Data RAM, each
//               five samples wide
//   lvds_hits   chip 1 from its serial inputs (6 ns pulses every 132 ns)
//   masked      masked wires of chip 1 report no hits
//   l2_time     Level-2 Accept to TDC_DONE within 12 us
//   cblt30/31   CBLT readout of Hit Count (slot 30) and Hit Data (slot 31)
//   d64         the same in D64; beat counts 14/8 for slot 30 and
//               ceil(n/2) (D32) or pairs of those (D64) for slot 31
//   chain_end   end of chain signalled by the last card
//   token       token passed through with CBLT disabled
//   xft         XFT strobes, Word 0 markers and B0 markers on P3
//   local_cal   local calibration pulses from the Tx pulse RAM
//   cdf_cal     CDF calibration passed through on chip 1
// The test fails if any count stays zero.
module tb_tdc_board;
  timeunit 1ns;
  timeprecision 1ps;

  logic        cdf_clk = 0, rst_n = 0;
  logic [95:0] lvds_in = '0;
  logic        bc = 0, b0 = 0, l1a = 0, l2a = 0;
  logic [1:0]  l2_buf = 0;
  logic        cdf_calib = 0;
  logic [4:0]  ga = 5'd9;
  logic [31:0] vme_addr = 0, vme_wdata = 0, vme_rdata;
  logic        vme_we = 0, vme_re = 0, vme_rvalid;
  logic        cblt_req = 0, cblt_d64 = 0, token_in = 0, token_out, chain_end;
  logic [4:0]  cblt_slot = 0;
  logic [63:0] cblt_data;
  logic        cblt_valid, cblt_ready = 1;
  logic [31:0] p3_tp;
  logic        p3_word0, p3_b0, p3_strobe;
  logic [1:0]  calib_out, tdc_done;
  logic        clk12;

  tdc_board dut (.*);
  always #66 cdf_clk = ~cdf_clk;

  int checks = 0, failures = 0;
  int n_vme = 0, n_test = 0, n_lvds = 0, n_masked = 0, n_l2time = 0;
  int n_c30 = 0, n_c31 = 0, n_d64 = 0, n_chain = 0, n_token = 0;
  int n_strobe = 0, n_word0 = 0, n_b0 = 0, n_local = 0, n_cdf = 0;

  initial begin
    #3_000_000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ------------------------------------------------------------ stimulus
  // BC every 11 word clocks
  int wc = 0;
  always @(negedge clk12) begin
    wc++;
    bc <= (wc % 11 == 0);
  end

  // chip 1 wires: a 6 ns pulse every 132 ns, wire w delayed by w*0.7 ns
  initial begin
    #500;
    forever begin
      for (int w = 0; w < 48; w++) lvds_in[48 + w] <= 1'b1;
      #6;
      for (int w = 0; w < 48; w++) lvds_in[48 + w] <= 1'b0;
      #126;
    end
  end

  // P3 and calibration monitors
  logic cal0_q = 0;
  always @(posedge clk12) begin
    if (p3_strobe) n_strobe++;
    if (p3_word0)  n_word0++;
    if (p3_b0)     n_b0++;
  end
  always @(posedge dut.u_chip0.clk_fast) begin
    if (calib_out[0] && !cal0_q) n_local++;
    cal0_q <= calib_out[0];
  end

  // ---------------------------------------------------------------- VME
  function automatic logic [31:0] chip_addr(input bit chip, input int a);
    return {ga, 6'd0, chip, 18'(a), 2'b00};
  endfunction

  task automatic vwrite(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk12); vme_addr = a; vme_wdata = d; vme_we = 1;
    @(negedge clk12); vme_we = 0;
  endtask

  task automatic vread(input logic [31:0] a, output logic [31:0] d);
    int t = 0;
    @(negedge clk12); vme_addr = a; vme_re = 1;
    @(negedge clk12); vme_re = 0;
    while (!vme_rvalid && t < 20) begin @(negedge clk12); t++; end
    d = vme_rdata;
    check(vme_rvalid, "read timeout");
  endtask

  // one CBLT cycle: returns the beats
  task automatic cblt(input int slot, input bit d64, output logic [63:0] beats [$]);
    int t = 0;
    beats = {};
    @(negedge clk12); cblt_req = 1; cblt_slot = 5'(slot); cblt_d64 = d64; token_in = 1;
    @(negedge clk12); cblt_req = 0;
    while (!chain_end && t < 5000) begin
      @(posedge clk12);
      if (cblt_valid && cblt_ready) beats.push_back(cblt_data);
      t++;
    end
    if (chain_end) n_chain++;
    check(chain_end, "no chain end");
    @(negedge clk12); token_in = 0;
  endtask

  // ------------------------------------------------------------ the test
  int nhits [2];
  logic [3:0] hcnt [2][48];

  initial begin
    logic [31:0] d;
    logic [63:0] beats [$];
    realtime t_l2;

    repeat (3) @(posedge cdf_clk);
    rst_n = 1;
    repeat (20) @(posedge clk12);

    // registers
    vwrite(chip_addr(0, 7), 32'h0A5);
    vwrite(chip_addr(1, 7), 32'h15A);
    vread(chip_addr(0, 7), d);
    check(d[8:0] == 9'h0A5, "module id chip 0");
    vread(chip_addr(1, 7), d);
    check(d[8:0] == 9'h15A, "module id chip 1");
    if (d[8:0] == 9'h15A) n_vme++;
    // card register: CBLT on, last card
    vwrite({ga, 6'd1, 1'b0, 18'd0, 2'b00}, 32'd3);

    // chip 0: Test Data RAM with a pulse 0111110000 on every wire in rows
    // 3, 11, 19, ... (one hit per wire every 8 words); test mode, local
    // calibration
    for (int r = 0; r < 512; r++) begin
      logic [479:0] row;
      row = '0;
      if (r % 8 == 3) for (int w = 0; w < 48; w++) row[w*10 +: 10] = 10'b0111110000;
      for (int i = 0; i < 15; i++) vwrite(chip_addr(0, 'h10000 + r*16 + i), row[i*32 +: 32]);
    end
    for (int a = 0; a < 512; a++) vwrite(chip_addr(0, 'h800 + a), (a % 4 == 0) ? 32'h3F0 : 32'h0);
    vwrite(chip_addr(0, 0), 32'd3);
    // chip 1: mask wires 0..7
    vwrite(chip_addr(1, 1), 32'h0000_00FF);

    // B0 then wait for the pipeline to fill
    @(negedge clk12); while (!(wc % 11 == 10)) @(negedge clk12);
    b0 = 1; @(negedge clk12); b0 = 0;
    vwrite(chip_addr(0, 'hD), 32'd1);       // start the calibration pulses
    repeat (600) @(negedge clk12);

    // Level 1 then Level 2 accept of buffer 1
    @(negedge clk12); l1a = 1; l2_buf = 2'd1;
    @(negedge clk12); l1a = 0;
    repeat (40) @(negedge clk12);
    l2a = 1; t_l2 = $realtime;
    @(negedge clk12); l2a = 0;
    repeat (4) @(negedge clk12);
    while (tdc_done != 2'b11 && $realtime - t_l2 < 20_000) @(negedge clk12);
    check(tdc_done == 2'b11, "TDC_DONE");
    $display("L2A to TDC_DONE: %0t ns", $realtime - t_l2);
    if ($realtime - t_l2 < 12_000) n_l2time++;
    check($realtime - t_l2 < 12_000, "L2 time over 12 us");

    // slot 30, D32: 7 words per chip
    cblt(30, 0, beats);
    check(beats.size() == 14, $sformatf("slot 30 D32 beats %0d", beats.size()));
    if (beats.size() == 14) begin
      n_c30++;
      for (int c = 0; c < 2; c++) begin
        nhits[c] = int'(beats[c*7 + 6][17:8]);
        for (int w = 0; w < 48; w++) hcnt[c][w] = beats[c*7 + w/8][(w%8)*4 +: 4];
      end
      $display("hits: chip 0 %0d, chip 1 %0d", nhits[0], nhits[1]);
      for (int w = 0; w < 48; w++) begin
        check(hcnt[0][w] >= 4 && hcnt[0][w] <= 5, $sformatf("chip 0 wire %0d count %0d", w, hcnt[0][w]));
        if (w < 8) begin
          check(hcnt[1][w] == 0, "masked wire has hits");
          if (hcnt[1][w] == 0) n_masked++;
        end else begin
          check(hcnt[1][w] >= 2 && hcnt[1][w] <= 4, $sformatf("chip 1 wire %0d count %0d", w, hcnt[1][w]));
          if (hcnt[1][w] != 0) n_lvds++;
        end
      end
    end

    // slot 30, D64: 4 beats per chip
    cblt(30, 1, beats);
    check(beats.size() == 8, $sformatf("slot 30 D64 beats %0d", beats.size()));
    if (beats.size() == 8) n_d64++;

    // slot 31, D32: the hits, two per word
    cblt(31, 0, beats);
    begin
      int n0, n1;
      n0 = (nhits[0] + 1) / 2;
      n1 = (nhits[1] + 1) / 2;
      check(beats.size() == n0 + n1, $sformatf("slot 31 D32 beats %0d", beats.size()));
      if (beats.size() == n0 + n1 && n0 > 0) begin
        n_c31++;
        for (int i = 0; i < n0; i++) begin
          check(beats[i][23:16] == 8'd5, $sformatf("chip 0 width %0d", beats[i][23:16]));
          if (beats[i][23:16] == 8'd5) n_test++;
        end
      end
      cblt(31, 1, beats);
      check(beats.size() == (n0 + 1) / 2 + (n1 + 1) / 2, $sformatf("slot 31 D64 beats %0d", beats.size()));
      if (beats.size() == (n0 + 1) / 2 + (n1 + 1) / 2) n_d64++;
    end

    // CBLT disabled: the token goes straight through
    vwrite({ga, 6'd1, 1'b0, 18'd0, 2'b00}, 32'd0);
    @(negedge clk12); cblt_req = 1; cblt_slot = 5'd30; token_in = 1;
    @(negedge clk12); cblt_req = 0;
    repeat (5) @(negedge clk12);
    check(token_out, "token not passed");
    if (token_out) n_token++;
    token_in = 0;

    // CDF calibration through chip 1
    repeat (40) begin
      @(negedge clk12); cdf_calib = 1'($urandom);
      #1;
      check(calib_out[1] == cdf_calib, "cdf calibration");
      if (calib_out[1] == cdf_calib && cdf_calib) n_cdf++;
    end

    $display("vme=%0d test=%0d lvds=%0d masked=%0d l2time=%0d c30=%0d c31=%0d d64=%0d chain=%0d token=%0d strobe=%0d word0=%0d b0=%0d local=%0d cdf=%0d",
             n_vme, n_test, n_lvds, n_masked, n_l2time, n_c30, n_c31, n_d64, n_chain, n_token,
             n_strobe, n_word0, n_b0, n_local, n_cdf);
    check(n_vme > 0, "never: VME read-back");
    check(n_test > 0, "never: test-mode hits");
    check(n_lvds > 0, "never: serial-input hits");
    check(n_masked > 0, "never: masked wire");
    check(n_l2time > 0, "never: L2 inside 12 us");
    check(n_c30 > 0, "never: slot 30");
    check(n_c31 > 0, "never: slot 31");
    check(n_d64 > 0, "never: D64");
    check(n_chain > 0, "never: chain end");
    check(n_token > 0, "never: token pass");
    check(n_strobe > 0, "never: XFT strobe");
    check(n_word0 > 0, "never: XFT word 0");
    check(n_b0 > 0, "never: XFT B0");
    check(n_local > 0, "never: local calibration");
    check(n_cdf > 0, "never: CDF calibration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
