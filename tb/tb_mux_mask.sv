// tb_mux_mask: checks the input multiplexer and mask. With random data,
// masks and mode changes, the output one clock after each input must be the
// wire data or the test data (test mode), with every masked wire at zero.
module tb_mux_mask;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NCH = 48;
  logic clk = 0, rst_n = 0;
  logic [NCH*10-1:0] serdes_word = '0, test_word = '0, word;
  logic test_mode = 0;
  logic [NCH-1:0] mask = '0;
  int checks = 0, failures = 0;

  mux_mask #(.NCH(NCH)) dut (.*);
  always #6 clk = ~clk;

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NCH*10-1:0] rnd();
    logic [NCH*10-1:0] r;
    for (int i = 0; i < NCH*10; i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    logic [NCH*10-1:0] exp;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      serdes_word = rnd();
      test_word   = rnd();
      test_mode   = 1'($urandom);
      mask        = (t % 5 == 0) ? '0 : {$urandom, $urandom} & {$urandom, $urandom};
      exp = test_mode ? test_word : serdes_word;
      for (int w = 0; w < NCH; w++) if (mask[w]) exp[w*10 +: 10] = '0;
      @(posedge clk);
      #1;
      checks++;
      if (word != exp) begin failures++; $display("FAIL at %0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
