// tb_tx_pulse_ram: checks the calibration pulse memory. 512 random 10-bit
// words are written; after 'start' the memory must play them in order, one
// per word clock, starting two clocks after the start clock, then stop
// (output zero, 'playing' low) after exactly 512 words.
module tb_tx_pulse_ram;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int DEPTH = 512;
  logic clk = 0, rst_n = 0;
  logic vme_we = 0, start = 0, playing;
  logic [8:0] vme_addr = 0;
  logic [9:0] vme_wdata = 0, word;
  logic [9:0] ref_m [DEPTH];
  int checks = 0, failures = 0;

  tx_pulse_ram #(.DEPTH(DEPTH)) dut (.*);
  always #6 clk = ~clk;

  initial begin
    #200_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nplay;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); vme_we = 1; vme_addr = 9'(a); vme_wdata = 10'($urandom); ref_m[a] = vme_wdata;
    end
    @(negedge clk); vme_we = 0;
    repeat (2) begin
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      checks++;
      if (word != 0) begin failures++; $display("FAIL word before playback"); end
      nplay = 0;
      for (int a = 0; a < DEPTH + 5; a++) begin
        if (playing) nplay++;
        @(negedge clk);
        checks++;
        if (word != ((a < DEPTH) ? ref_m[a] : 10'd0)) begin failures++; $display("FAIL word %0d", a); end
      end
      checks++;
      if (nplay != DEPTH) begin failures++; $display("FAIL played for %0d clocks", nplay); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
