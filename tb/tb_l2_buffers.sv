// tb_l2_buffers: checks the four Level 2 buffers. After each Level 1
// accept the chosen buffer must stay busy for exactly 'len' word clocks and
// store the words seen in that time, together with the bunch count. The
// buffers are then read on the 22 ns clock and compared word by word.
module tb_l2_buffers;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NBUF = 4, DEPTH = 64, W = 480, LEN = 33;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic l1a = 0;
  logic [1:0] l1a_buf = 0, rd_buf = 0;
  logic [6:0] len = 7'(LEN);
  logic [7:0] bc_count = 0, rd_bc_count;
  logic [W-1:0] din = '0, rd_data;
  logic [NBUF-1:0] busy;
  logic rd_start = 0, rd_en = 0;
  logic [W-1:0] ref_w [NBUF][DEPTH];
  logic [7:0] ref_bc [NBUF];
  int checks = 0, failures = 0;

  l2_buffers #(.NBUF(NBUF), .DEPTH(DEPTH), .W(W)) dut (.*);
  always #6 wclk = ~wclk;
  always #11 rclk = ~rclk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge wclk) for (int i = 0; i < W; i += 32) din[i +: 32] = $urandom;

  task automatic fill(input int b, input int n);
    int nb = 0;
    len = 7'(n);
    @(negedge wclk);
    l1a = 1; l1a_buf = 2'(b); bc_count = 8'($urandom); ref_bc[b] = bc_count;
    @(posedge wclk); #1 l1a = 0;
    // the words of the next n edges are stored
    for (int i = 0; i < n; i++) begin
      @(posedge wclk);
      ref_w[b][i] = din;
      #1 if (busy[b] || i == n - 1) nb++;
    end
    @(negedge wclk);
    checks += 2;
    if (nb != n) begin failures++; $display("FAIL buffer %0d busy for %0d clocks", b, nb); end
    if (busy[b]) begin failures++; $display("FAIL buffer %0d still busy", b); end
  endtask

  task automatic drain(input int b, input int n);
    @(negedge rclk); rd_start = 1; rd_buf = 2'(b);
    @(negedge rclk); rd_start = 0;
    checks++;
    if (rd_bc_count != ref_bc[b]) begin failures++; $display("FAIL bunch count buffer %0d", b); end
    for (int i = 0; i < n; i++) begin
      rd_en = 1;
      @(posedge rclk); #1;
      checks++;
      if (rd_data != ref_w[b][i]) begin failures++; $display("FAIL buffer %0d word %0d", b, i); end
      @(negedge rclk); rd_en = 0;
    end
  endtask

  initial begin
    repeat (2) @(posedge rclk);
    #1 begin wrst_n = 1; rrst_n = 1; end
    for (int b = 0; b < NBUF; b++) fill(b, LEN);
    for (int b = NBUF - 1; b >= 0; b--) drain(b, LEN);
    fill(2, DEPTH);
    drain(2, DEPTH);
    fill(1, 5);
    drain(1, 5);
    drain(0, LEN);     // untouched buffer keeps its data
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
