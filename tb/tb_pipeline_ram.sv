// tb_pipeline_ram: checks the Level 1 pipeline. A random word enters on
// every clock; after the first BC the output must be the word that entered
// exactly 'delay' clocks earlier. The default delay (462 clocks, 5.5 us)
// and two other delays are tried.
module tb_pipeline_ram;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int DEPTH = 512, W = 480;
  logic clk = 0, rst_n = 0, bc = 0;
  logic [8:0] delay = 9'd462;
  logic [W-1:0] din = '0, dout;
  logic [W-1:0] hist [$];
  int checks = 0, failures = 0;

  pipeline_ram #(.DEPTH(DEPTH), .W(W)) dut (.*);
  always #6 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // hist[i] = word written at clock edge i
  always @(posedge clk) if (rst_n) hist.push_back(din);
  always @(negedge clk) for (int i = 0; i < W; i += 32) din[i +: 32] = $urandom;

  task automatic run(input int d, input int n);
    delay = 9'(d);
    repeat (DEPTH + 2) @(posedge clk);
    repeat (n) begin
      @(posedge clk); #1;
      // the edge just passed wrote hist[$] and read the word from d edges before it
      checks++;
      if (dout != hist[hist.size() - 1 - d]) begin failures++; $display("FAIL delay %0d", d); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk); bc = 1;
    @(negedge clk); bc = 0;
    run(462, 200);
    run(1, 100);
    run(300, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
