// tb_edge_detector: checks one Edge Detector against the reference hit
// finder: the paper's worked example, then random streams of 1..33 words
// with short and long pulses and with max_hits from 1 to 7. The ED is driven
// the way the ED48 drives it: clear, then per word one load edge and three
// group-search edges (group C sharing its edge with the next load), with a
// zero word appended. Checks the hit count and every stored hit, and that a
// 33-word search takes 3*(33+1)+1 main clocks.
module tb_edge_detector;
  timeunit 1ns;
  timeprecision 1ps;
  import tdc_ref_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       clr, load, search;
  logic [9:0] din;
  logic [1:0] grp;
  logic [2:0] max_hits, rd_addr;
  logic [7:0] rd_le, rd_width;
  logic [3:0] hit_count;
  int checks = 0, failures = 0;

  edge_detector dut (.*);

  always #11 clk = ~clk;

  initial begin
    #200_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [9:0] words [], input int n, input int mh, output int cycles);
    clr = 1; load = 0; search = 0; grp = 0; din = 0; max_hits = 3'(mh);
    @(posedge clk); #1;
    clr = 0;
    cycles = 0;
    for (int k = 0; k <= n + 1; k++)
      for (int ph = 0; ph < 3; ph++) begin
        if (k == n + 1 && ph > 0) break;
        load   = (ph == 0) && (k <= n);
        din    = (k < n) ? words[k] : 10'd0;
        search = !(ph == 0 && k == 0);
        grp    = (ph == 0) ? 2'd2 : 2'(ph - 1);
        @(posedge clk); #1;
        cycles++;
      end
    load = 0; search = 0;
  endtask

  task automatic check(input logic [9:0] words [], input int n, input int mh);
    ref_hit_t exp [$];
    ref_hits(words, n, mh, exp);
    checks++;
    if (hit_count != 4'(exp.size())) begin
      failures++;
      $display("FAIL n=%0d count %0d expected %0d", n, hit_count, exp.size());
    end
    for (int i = 0; i < exp.size() && i < 8; i++) begin
      rd_addr = 3'(i); #1;
      checks++;
      if (rd_le != 8'(exp[i].le) || rd_width != 8'(exp[i].width)) begin
        failures++;
        $display("FAIL n=%0d hit %0d: le %0d w %0d expected le %0d w %0d",
                 n, i, rd_le, rd_width, exp[i].le, exp[i].width);
      end
    end
  endtask

  initial begin
    logic [9:0] words [];
    int cyc;
    clr = 0; load = 0; search = 0; grp = 0; din = 0; max_hits = 7; rd_addr = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // worked example: 0111100001 then 1110000000
    words = new[2];
    words[0] = 10'b0111100001;
    words[1] = 10'b1110000000;
    run(words, 2, 7, cyc);
    checks++;
    if (hit_count != 2) begin failures++; $display("FAIL example count %0d", hit_count); end
    rd_addr = 0; #1;
    checks++;
    if (rd_le != 1 || rd_width != 4) begin failures++; $display("FAIL example hit 0 le %0d w %0d", rd_le, rd_width); end
    rd_addr = 1; #1;
    checks++;
    if (rd_le != 9 || rd_width != 4) begin failures++; $display("FAIL example hit 1 le %0d w %0d", rd_le, rd_width); end
    // the same word as the third word: leading edge 21
    words = new[3];
    words[0] = 0; words[1] = 0; words[2] = 10'b0111100000;
    run(words, 3, 7, cyc);
    rd_addr = 0; #1;
    checks++;
    if (hit_count != 1 || rd_le != 21 || rd_width != 4) begin
      failures++; $display("FAIL third-word example le %0d w %0d n %0d", rd_le, rd_width, hit_count);
    end
    // high from the first sample: "four ones in a row"
    words = new[1];
    words[0] = 10'b1111000000;
    run(words, 1, 7, cyc);
    rd_addr = 0; #1;
    checks++;
    if (hit_count != 1 || rd_le != 0 || rd_width != 4) begin
      failures++; $display("FAIL start-of-data hit le %0d w %0d n %0d", rd_le, rd_width, hit_count);
    end

    // random streams
    for (int it = 0; it < 400; it++) begin
      automatic int n  = $urandom_range(33, 1);
      automatic int mh = $urandom_range(7, 1);
      rand_words(words, n, (it % 3 == 0) ? 40 : 9, 45);
      run(words, n, mh, cyc);
      check(words, n, mh);
    end

    // timing of a full 33-word search
    rand_words(words, 33, 9, 45);
    run(words, 33, 7, cyc);
    check(words, 33, 7);
    checks++;
    if (cyc != 3*34 + 1) begin failures++; $display("FAIL cycles %0d", cyc); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
