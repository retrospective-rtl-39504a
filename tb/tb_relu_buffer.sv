// tb_relu_buffer -- self-checking test of the ReLU buffer: y follows
// max(x,0) one clock after an enabled edge and holds while en is low.
`timescale 1ns/1ps
module tb_relu_buffer;
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [15:0] x, y, expv;
  int checks = 0, failures = 0;

  relu_buffer #(.W(16)) dut (.clk, .rst_n, .en, .x, .y);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    expv = 0;
    x = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      x  = 16'($urandom);
      en = ($urandom_range(0, 3) != 0);
      if (i == 0) x = 16'sh8000;
      if (i == 1) x = 16'sh7fff;
      @(negedge clk);
      if (en) expv = (x < 0) ? 16'sd0 : x;
      checks++;
      if (y !== expv) begin failures++; $display("x=%0d en=%0b y=%0d exp %0d", x, en, y, expv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
