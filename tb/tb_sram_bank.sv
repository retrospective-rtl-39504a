// tb_sram_bank -- self-checking test of a 1 KB bank: random writes and
// reads against an array model, checking the one-cycle read latency and that
// rdata holds between reads.
`timescale 1ns/1ps
module tb_sram_bank;
  logic clk = 0, en = 0, we = 0;
  logic [8:0] addr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [15:0] model [512];
  int checks = 0, failures = 0;

  sram_bank #(.WORDS(512), .W(16)) dut (.clk, .en, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] last;
    logic have_last;
    for (int a = 0; a < 512; a++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 9'(a); wdata = 16'($urandom); model[a] = wdata;
    end
    last = '0;
    have_last = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0); we = ($urandom_range(0, 2) == 0);
      addr = 9'($urandom); wdata = 16'($urandom);
      @(posedge clk);
      if (en && we) model[addr] = wdata;
      if (en && !we) begin last = model[addr]; have_last = 1'b1; end
      #1;
      if (en && !we) begin
        checks++;
        if (rdata !== last) begin failures++; $display("rd %0d: %h exp %h", addr, rdata, last); end
      end else if (!en && have_last) begin
        checks++;
        if (rdata !== last) begin failures++; $display("hold: %h exp %h", rdata, last); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
