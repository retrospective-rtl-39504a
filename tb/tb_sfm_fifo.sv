// tb_sfm_fifo -- self-checking test of the SoftMax FIFO against a queue
// model: random push/pop traffic (never pushing when full or popping when
// empty), checking dout, count, full and empty every cycle.
`timescale 1ns/1ps
module tb_sfm_fifo;
  localparam int D = 16;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [23:0] din, dout;
  logic full, empty;
  logic [$clog2(D+1)-1:0] count;
  logic [23:0] q[$];
  int checks = 0, failures = 0;

  sfm_fifo #(.W(24), .DEPTH(D)) dut (.clk, .rst_n, .push, .pop, .din, .dout, .full, .empty, .count);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int filled = 0;
    din = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      // fill to full once, then drain, then random
      if (i < 20)       begin push = (q.size() < D); pop = 0; end
      else if (i < 40)  begin push = 0; pop = (q.size() > 0); end
      else begin
        push = ($urandom_range(0, 1) == 1) && (q.size() < D);
        pop  = ($urandom_range(0, 1) == 1) && (q.size() > 0);
      end
      din = 24'($urandom);
      @(negedge clk);
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
      if (q.size() == D) filled++;
      checks += 3;
      if (count != q.size()) begin failures++; $display("count %0d exp %0d", count, q.size()); end
      if (full != (q.size() == D) || empty != (q.size() == 0)) begin failures++; $display("flags"); end
      if (q.size() > 0 && dout != q[0]) begin failures++; $display("dout %h exp %h", dout, q[0]); end
    end
    checks++;
    if (filled == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
