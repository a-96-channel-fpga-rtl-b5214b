// tb_ed48: checks the ED48 controller with 48 real Edge Detectors behind
// it. A behavioural Level-2 buffer (same read protocol as l2_buffers)
// holds random events. For each Level-2 Accept the testbench checks
// TDC_DONE low during processing, the 7 Hit Count words (4-bit counts and
// the header fields), every Hit Data word up to the hit total (two hits per
// word, wire after wire) against the reference hit finder, and that the
// processing time stays under the paper's 12 us.
module tb_ed48;
  timeunit 1ns;
  timeprecision 1ps;
  import tdc_ref_pkg::*;

  localparam int NED = 48;
  logic clk = 0, rst_n = 0;
  always #11 clk = ~clk;

  logic        l2a = 0;
  logic [1:0]  l2a_buf = 0;
  logic [5:0]  ed_words;
  logic [2:0]  max_hits;
  logic [8:0]  module_id;
  logic        chip_serial;
  logic        l2_rd_start, l2_rd_en;
  logic [1:0]  l2_rd_buf;
  logic [NED*10-1:0] l2_data, ed_din;
  logic [7:0]  l2_bc_count;
  logic        ed_clr, ed_load, ed_search, tdc_done, busy;
  logic [1:0]  ed_grp;
  logic [2:0]  ed_rd_addr;
  logic [7:0]  ed_le [NED];
  logic [7:0]  ed_width [NED];
  logic [3:0]  ed_count [NED];
  logic [7:0]  hd_raddr = 0;
  logic [31:0] hd_rdata, hc_rdata;
  logic [2:0]  hc_raddr = 0;
  int checks = 0, failures = 0;

  ed48 dut (.clk, .rst_n, .l2a, .l2a_buf, .ed_words, .max_hits, .module_id,
            .chip_serial, .l2_rd_start, .l2_rd_buf, .l2_rd_en, .l2_data,
            .l2_bc_count, .ed_clr, .ed_load, .ed_din, .ed_search, .ed_grp,
            .ed_rd_addr, .ed_le, .ed_width, .ed_count, .tdc_done, .busy,
            .vme_clk(clk), .hd_raddr, .hd_rdata, .hc_raddr, .hc_rdata);

  for (genvar w = 0; w < NED; w++) begin : g_ed
    edge_detector u_ed (.clk, .rst_n, .clr(ed_clr), .load(ed_load),
      .din(ed_din[w*10 +: 10]), .search(ed_search), .grp(ed_grp), .max_hits,
      .rd_addr(ed_rd_addr), .rd_le(ed_le[w]), .rd_width(ed_width[w]),
      .hit_count(ed_count[w]));
  end

  // behavioural Level-2 buffer
  logic [NED*10-1:0] l2mem [4][64];
  logic [5:0] rcnt;
  logic [1:0] rbuf;
  always_ff @(posedge clk) begin
    if (l2_rd_start) begin rcnt <= 0; rbuf <= l2_rd_buf; end
    else if (l2_rd_en) begin l2_data <= l2mem[rbuf][rcnt]; rcnt <= rcnt + 1; end
  end
  assign l2_bc_count = 8'h40 + 8'(rbuf);

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd_hc(input int a, output logic [31:0] d);
    hc_raddr = 3'(a); @(posedge clk); #1 d = hc_rdata;
  endtask
  task automatic rd_hd(input int a, output logic [31:0] d);
    hd_raddr = 8'(a); @(posedge clk); #1 d = hd_rdata;
  endtask

  task automatic event_test(input int b, input int nw, input int mh);
    logic [9:0] words [NED][];
    ref_hit_t   exp [NED][$];
    int total = 0, cyc = 0;
    logic [31:0] d;
    logic [15:0] halves [$];
    // fill buffer b
    for (int w = 0; w < NED; w++) begin
      rand_words(words[w], nw, (w % 4 == 0) ? 30 : 8, 40);
      ref_hits(words[w], nw, mh, exp[w]);
      total += exp[w].size();
      for (int k = 0; k < nw; k++) l2mem[b][k][w*10 +: 10] = words[w][k];
      foreach (exp[w][i]) halves.push_back({8'(exp[w][i].le), 8'(exp[w][i].width)});
    end
    ed_words = 6'(nw); max_hits = 3'(mh);
    @(negedge clk); l2a = 1; l2a_buf = 2'(b);
    @(negedge clk); l2a = 0;
    checks++;
    if (tdc_done) begin failures++; $display("FAIL TDC_DONE not cleared"); end
    while (!tdc_done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc * 22 >= 12000) begin failures++; $display("FAIL processing %0d ns", cyc*22); end
    $display("event buf %0d words %0d hits/wire %0d: %0d hits, %0d ns", b, nw, mh, total, cyc*22);
    // Hit Count RAM
    for (int i = 0; i < 6; i++) begin
      rd_hc(i, d);
      for (int j = 0; j < 8; j++) begin
        checks++;
        if (d[4*j +: 4] != 4'(exp[8*i+j].size())) begin
          failures++; $display("FAIL hit count wire %0d: %0d vs %0d", 8*i+j, d[4*j +: 4], exp[8*i+j].size());
        end
      end
    end
    rd_hc(6, d);
    checks++;
    if (d != {module_id, 1'b1, chip_serial, 1'b0, 2'(b), 10'(total), 8'h40 + 8'(b)}) begin
      failures++; $display("FAIL header %h", d);
    end
    // Hit Data RAM
    for (int i = 0; i < (total + 1) / 2; i++) begin
      automatic logic [15:0] lo;
      rd_hd(i, d);
      lo = (2*i + 1 < total) ? halves[2*i+1] : 16'h0000;
      checks++;
      if (d != {halves[2*i], lo}) begin
        failures++; $display("FAIL hit data word %0d: %h vs %h", i, d, {halves[2*i], lo});
      end
    end
  endtask

  initial begin
    module_id = 9'h1A5; chip_serial = 1; ed_words = 33; max_hits = 7;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    checks++;
    if (!tdc_done) begin failures++; $display("FAIL TDC_DONE after reset"); end
    event_test(2, 33, 7);
    event_test(0, 33, 7);
    event_test(3, 20, 4);
    event_test(1, 5, 1);
    event_test(1, 33, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
