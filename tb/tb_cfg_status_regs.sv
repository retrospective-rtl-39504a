// tb_cfg_status_regs -- self-checking test of the configuration and status
// registers: reset values, write/read-back of every register and layer
// field, read-only status/cycle views, and that writes are ignored while the
// engine is busy.
`timescale 1ns/1ps
module tb_cfg_status_regs;
  import davinci_pkg::*;
  import ve_pkg::*;
  localparam int ML = 4;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [7:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata, cycles = 32'd1234;
  logic prec16;
  logic [3:0] num_layers;
  data_t t, beta, lambda, lalpha;
  layer_desc_t layers [ML];
  status_t status = '0;
  int checks = 0, failures = 0;

  cfg_status_regs #(.MAX_LAYERS(ML)) dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .prec16, .num_layers, .cfg_t(t), .cfg_beta(beta), .cfg_lambda(lambda), .cfg_lambda_alpha(lalpha),
    .layers, .status, .cycles);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic rd_chk(input logic [7:0] a, input logic [31:0] e);
    @(negedge clk); cfg_addr = a; #1;
    checks++;
    if (cfg_rdata !== e) begin failures++; $display("reg %h = %h exp %h", a, cfg_rdata, e); end
  endtask

  initial begin
    logic [15:0] v [ML][6];
    repeat (2) @(negedge clk);
    rst_n = 1;
    rd_chk(REG_CTRL, 1); rd_chk(REG_NUM_LAYERS, 1);
    rd_chk(REG_T, 32'(DEF_T)); rd_chk(REG_BETA, 32'(DEF_BETA));
    rd_chk(REG_LAMBDA, 32'(DEF_LAMBDA)); rd_chk(REG_LAMBDA_ALPHA, 32'(DEF_LAMBDA_ALPHA));
    wr(REG_CTRL, 0); wr(REG_NUM_LAYERS, 3); wr(REG_T, 16'h1111); wr(REG_BETA, 16'h2222);
    wr(REG_LAMBDA, 16'h3333); wr(REG_LAMBDA_ALPHA, 16'h4444);
    for (int l = 0; l < ML; l++)
      for (int f = 0; f < 6; f++) begin
        v[l][f] = (f == 5) ? 16'($urandom_range(0, 7)) : 16'($urandom);
        wr(8'(8'h10 + 8 * l + f), 32'(v[l][f]));
      end
    rd_chk(REG_CTRL, 0); rd_chk(REG_NUM_LAYERS, 3); rd_chk(REG_T, 32'h1111);
    rd_chk(REG_BETA, 32'h2222); rd_chk(REG_LAMBDA, 32'h3333); rd_chk(REG_LAMBDA_ALPHA, 32'h4444);
    for (int l = 0; l < ML; l++) begin
      for (int f = 0; f < 6; f++) rd_chk(8'(8'h10 + 8 * l + f), 32'(v[l][f]));
      checks += 6;
      if (layers[l].n_in != v[l][0]) failures++;
      if (layers[l].n_out != v[l][1]) failures++;
      if (layers[l].in_base != v[l][2]) failures++;
      if (layers[l].out_base != v[l][3]) failures++;
      if (layers[l].k_base != v[l][4]) failures++;
      if (32'(layers[l].sel_af) != 32'(v[l][5])) failures++;
    end
    checks += 2;
    if (prec16 !== 1'b0 || num_layers !== 4'd3) failures++;
    if (t !== 16'h1111 || lalpha !== 16'h4444) failures++;
    // read-only views
    status = '{sfm_len_err: 1'b1, host_drop: 1'b0, busy: 1'b0, done: 1'b1};
    rd_chk(REG_STATUS, 32'b1001); rd_chk(REG_CYCLES, 32'd1234);
    // locked while busy
    status.busy = 1'b1;
    wr(REG_T, 16'h5555); wr(8'h10, 16'h7777);
    rd_chk(REG_T, 32'h1111); rd_chk(8'h10, 32'(v[0][0]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
