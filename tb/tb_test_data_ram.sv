// tb_test_data_ram: checks the test data memory. Random 480-bit rows are
// written 32 bits at a time over the bus; after B0 the memory must play
// row 0, 1, 2, ... on consecutive word clocks, starting two clocks after
// the clock that saw B0, and start again from row 0 on the next B0.
module tb_test_data_ram;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int DEPTH = 512, NCH = 48, NROW = 60;
  logic clk = 0, rst_n = 0;
  logic vme_we = 0;
  logic [12:0] vme_addr = '0;
  logic [31:0] vme_wdata = '0;
  logic b0 = 0;
  logic [NCH*10-1:0] test_word;
  logic [NCH*10-1:0] rows [NROW];
  int checks = 0, failures = 0;

  test_data_ram #(.DEPTH(DEPTH), .NCH(NCH)) dut (.*);
  always #6 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic play(input int n);
    @(negedge clk); b0 = 1;
    @(negedge clk); b0 = 0;
    for (int r = 0; r < n; r++) begin
      @(posedge clk); #1;
      checks++;
      if (test_word != rows[r]) begin failures++; $display("FAIL row %0d", r); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < NROW; r++) begin
      logic [511:0] full;
      for (int i = 0; i < 16; i++) full[i*32 +: 32] = $urandom;
      rows[r] = full[NCH*10-1:0];
      for (int i = 0; i < 16; i++) begin
        @(negedge clk); vme_we = 1; vme_addr = 13'(r*16 + i); vme_wdata = full[i*32 +: 32];
      end
    end
    @(negedge clk); vme_we = 0;
    play(NROW);
    repeat (37) @(posedge clk);
    play(NROW / 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
