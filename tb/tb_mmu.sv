// tb_mmu -- self-checking test of the memory management unit (reduced to 4
// banks of 32 words). Host writes fill ifmap and kernel memory; engine reads
// are compared with a model (one-cycle latency, all kernel banks read at one
// address); engine write-back is checked, and host writes while the engine
// owns the memories must be dropped and flagged.
`timescale 1ns/1ps
module tb_mmu;
  localparam int NB = 4, BW = 32, IAW = $clog2(NB * BW), KAW = $clog2(BW), BAW = $clog2(NB);
  logic clk = 0, rst_n = 0, eng_own = 0;
  logic h_if_we = 0, h_k_we = 0, e_if_re = 0, e_if_we = 0, e_k_re = 0;
  logic [IAW-1:0] h_if_addr = '0, e_if_addr = '0;
  logic [BAW-1:0] h_k_bank = '0;
  logic [KAW-1:0] h_k_addr = '0, e_k_addr = '0;
  logic [15:0] h_if_wdata = '0, h_k_wdata = '0, e_if_wdata = '0, e_if_rdata;
  logic [NB-1:0][15:0] e_k_rdata;
  logic host_drop;
  logic [15:0] mif [NB * BW];
  logic [15:0] mk [NB][BW];
  int checks = 0, failures = 0, drops = 0;

  mmu #(.N_BANKS(NB), .BANK_WORDS(BW), .W(16)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && host_drop) drops++;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < NB * BW; a++) begin
      @(negedge clk); h_if_we = 1; h_if_addr = IAW'(a); h_if_wdata = 16'($urandom); mif[a] = h_if_wdata;
    end
    @(negedge clk); h_if_we = 0;
    for (int b = 0; b < NB; b++)
      for (int a = 0; a < BW; a++) begin
        @(negedge clk); h_k_we = 1; h_k_bank = BAW'(b); h_k_addr = KAW'(a);
        h_k_wdata = 16'($urandom); mk[b][a] = h_k_wdata;
      end
    @(negedge clk); h_k_we = 0; eng_own = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      e_if_we = ($urandom_range(0, 3) == 0); e_if_re = !e_if_we;
      e_if_addr = IAW'($urandom); e_if_wdata = 16'($urandom);
      e_k_re = 1; e_k_addr = KAW'($urandom);
      // host write attempts while the engine owns memory
      h_if_we = (i % 50 == 7); h_if_addr = e_if_addr; h_if_wdata = 16'hdead;
      h_k_we = (i % 50 == 23); h_k_bank = BAW'($urandom); h_k_addr = e_k_addr; h_k_wdata = 16'hbeef;
      @(negedge clk);
      if (e_if_we) mif[e_if_addr] = e_if_wdata;
      else begin
        checks++;
        if (e_if_rdata !== mif[e_if_addr]) begin failures++; $display("if rd %0d", e_if_addr); end
      end
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (e_k_rdata[b] !== mk[b][e_k_addr]) begin failures++; $display("k rd %0d/%0d", b, e_k_addr); end
      end
      e_if_we = 0; e_if_re = 0; e_k_re = 0; h_if_we = 0; h_k_we = 0;
    end
    // sweep the kernel banks: no dropped host write may have landed
    for (int a = 0; a < BW; a++) begin
      @(negedge clk); e_k_re = 1; e_k_addr = KAW'(a);
      @(negedge clk); e_k_re = 0;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (e_k_rdata[b] !== mk[b][a]) begin failures++; $display("k sweep %0d/%0d", b, a); end
      end
    end
    checks++;
    if (drops != 12) begin failures++; $display("host_drop count %0d", drops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
