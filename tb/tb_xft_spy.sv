// tb_xft_spy: checks the spy memory of the words sent to the XFT. Words
// are written on the 22 ns clock and read back on the 12 ns clock one clock
// after the address. While frozen, writes must not change the contents;
// addresses 18 and up read as zero.
module tb_xft_spy;
  timeunit 1ns;
  timeprecision 1ps;

  logic wclk = 0, rclk = 0;
  logic we = 0, freeze = 0;
  logic [4:0] waddr = 0;
  logic [15:0] wdata = 0;
  logic [5:0] raddr = 0;
  logic [31:0] rdata;
  logic [15:0] ref_m [18];
  int checks = 0, failures = 0;

  xft_spy #(.NWORD(18)) dut (.*);
  always #11 wclk = ~wclk;
  always #6 rclk = ~rclk;

  initial begin
    #200_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_all(input bit frz);
    freeze = frz;
    for (int a = 0; a < 18; a++) begin
      @(negedge wclk); we = 1; waddr = 5'(a); wdata = 16'($urandom);
      if (!frz) ref_m[a] = wdata;
    end
    @(negedge wclk); we = 0;
  endtask

  task automatic read_all();
    for (int a = 0; a < 40; a++) begin
      @(negedge rclk); raddr = 6'(a);
      @(posedge rclk); #1;
      checks++;
      if (rdata != ((a < 18) ? {16'h0, ref_m[a]} : 32'h0)) begin
        failures++; $display("FAIL address %0d: %h", a, rdata);
      end
    end
  endtask

  initial begin
    write_all(0);
    read_all();
    write_all(1);
    read_all();
    write_all(0);
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
