// tb_dataflow_ctrl -- self-checking test of the data-flow controller with
// the real MMU and simple integer lane models (2 lanes, 32-word banks,
// FIFO depth 4). A lane model adds in_reg*w_reg to its accumulator on each
// MAC (then stalls 3 cycles) and answers an activation with accumulator + 1
// after a lane-dependent delay; lane 0 answers a SoftMax stream with twice
// each element. This isolates the sequencing: reads, passes over the lanes,
// partial passes, write-back and layer reuse, the SoftMax replay through
// lane 0 and its length limit, exec_finish and the status outputs.
`timescale 1ns/1ps
module tb_dataflow_ctrl;
  import davinci_pkg::*;
  import ve_pkg::*;
  localparam int NN = 2, BW = 32, ML = 2, SD = 4;
  localparam int IAW = $clog2(NN * BW), KAW = $clog2(BW), BAW = $clog2(NN);

  logic clk = 0, rst_n = 0, exec_en = 0;
  logic exec_finish, busy, sfm_len_err;
  logic [31:0] cycles;
  logic [3:0] num_layers = 4'd2;
  layer_desc_t layers [ML];
  logic e_if_re, e_if_we, e_k_re;
  logic [IAW-1:0] e_if_addr;
  logic [KAW-1:0] e_k_addr;
  data_t e_if_wdata, e_if_rdata;
  logic [NN-1:0][15:0] e_k_rdata;
  af_sel_e lane_sel_af;
  logic [NN-1:0] lane_active, lane_out_valid;
  logic lane_clear, lane_load, lane_mac, lane_act, all_mac_ready, all_act_ready;
  data_t lane_out_data [NN], lane_acc [NN];
  logic sfm_phase, sfm_valid, sfm_last, lane0_act_ready, lane0_out_last;
  data_t sfm_data;
  logic of_valid;
  logic [IAW-1:0] of_addr;
  data_t of_data;
  logic [3:0] of_layer;
  // host side of the MMU
  logic h_if_we = 0, h_k_we = 0, host_drop;
  logic [IAW-1:0] h_if_addr = '0;
  logic [BAW-1:0] h_k_bank = '0;
  logic [KAW-1:0] h_k_addr = '0;
  logic [15:0] h_if_wdata = '0, h_k_wdata = '0;

  int checks = 0, failures = 0;

  mmu #(.N_BANKS(NN), .BANK_WORDS(BW), .W(16)) u_mmu (
    .clk, .rst_n, .eng_own(busy), .h_if_we, .h_if_addr, .h_if_wdata,
    .h_k_we, .h_k_bank, .h_k_addr, .h_k_wdata, .host_drop,
    .e_if_re, .e_if_we, .e_if_addr, .e_if_wdata(e_if_wdata), .e_if_rdata(e_if_rdata),
    .e_k_re, .e_k_addr, .e_k_rdata);

  dataflow_ctrl #(.NUM_NEURIC(NN), .BANK_WORDS(BW), .N_BANKS(NN), .MAX_LAYERS(ML), .SFM_DEPTH(SD)) dut (.*);

  always #5 clk = ~clk;

  // ---------------- lane models
  int acc [NN];
  int in_reg [NN], w_reg [NN];
  int mac_busy [NN];
  int act_cnt [NN];
  int sfm_q[$];
  int sfm_out[$];
  int sfm_busy = 0, sfm_gap = 0;
  int lane0_out_last_r = 0;
  logic [NN-1:0] mac_rdy, act_rdy;

  for (genvar j = 0; j < NN; j++) begin : g_m
    assign mac_rdy[j] = (mac_busy[j] == 0);
    assign act_rdy[j] = (act_cnt[j] == 0) && (j != 0 || sfm_busy == 0);
    assign lane_acc[j] = data_t'(acc[j]);
  end
  assign all_mac_ready   = &(mac_rdy | ~lane_active);
  assign all_act_ready   = &(act_rdy | ~lane_active);
  assign lane0_act_ready = act_rdy[0];

  // The model uses nonblocking updates only, so the DUT samples its ready
  // signals and accumulators race-free on the same edge.
  always @(posedge clk) begin
    for (int j = 0; j < NN; j++) begin
      lane_out_valid[j] <= 1'b0;
      if (lane_load) begin
        in_reg[j] <= int'(e_if_rdata);
        w_reg[j]  <= int'($signed(e_k_rdata[j]));
      end
      if (lane_clear) acc[j] <= 0;
      else if (lane_mac && lane_active[j]) acc[j] <= acc[j] + in_reg[j] * w_reg[j];
      if (lane_mac && lane_active[j]) mac_busy[j] <= 3;
      else if (mac_busy[j] > 0) mac_busy[j] <= mac_busy[j] - 1;
      if (lane_act && lane_active[j]) act_cnt[j] <= 2 + 3 * j;
      else if (act_cnt[j] > 0) begin
        act_cnt[j] <= act_cnt[j] - 1;
        if (act_cnt[j] == 1) begin
          lane_out_valid[j] <= 1'b1;
          lane_out_data[j]  <= data_t'(acc[j] + 1);
        end
      end
    end
    lane0_out_last <= 1'b0;
    if (sfm_valid) begin
      sfm_q.push_back(int'(sfm_data));
      sfm_busy <= 2;
      if (sfm_last) begin
        foreach (sfm_q[k]) sfm_out.push_back(2 * sfm_q[k]);
        sfm_q.delete();
      end
    end else if (sfm_busy > 0) sfm_busy <= sfm_busy - 1;
    if (sfm_gap > 0) sfm_gap <= sfm_gap - 1;
    else if (sfm_out.size() > 0) begin
      lane_out_valid[0] <= 1'b1;
      lane_out_data[0]  <= data_t'(sfm_out.pop_front());
      lane0_out_last    <= (sfm_out.size() == 0);
      sfm_gap           <= 3;
    end
  end

  initial for (int j = 0; j < NN; j++) begin
    acc[j] = 0; mac_busy[j] = 0; act_cnt[j] = 0; in_reg[j] = 0; w_reg[j] = 0;
  end

  // ---------------- stream capture
  int ofv [int];
  int of_lay [int];
  always @(posedge clk) if (rst_n && of_valid) begin ofv[int'(of_addr)] = int'(of_data); of_lay[int'(of_addr)] = int'(of_layer); end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int x [8];
  int w [ML][64];

  task automatic run_check(input int n_out0, input int n_out1, input af_sel_e af1);
    int e0 [], e1 [], t, n_sfm;
    layers[0] = '{n_in: 16'd3, n_out: 16'(n_out0), in_base: 16'd0, out_base: 16'd8, k_base: 16'd0, sel_af: AF_SIGMOID};
    layers[1] = '{n_in: 16'(n_out0), n_out: 16'(n_out1), in_base: 16'd8, out_base: 16'd20, k_base: 16'd10, sel_af: af1};
    // kernel: neuron n of layer l, input i -> bank n%NN, addr k_base + (n/NN)*n_in + i
    for (int l = 0; l < ML; l++)
      for (int n = 0; n < int'(layers[l].n_out); n++)
        for (int i = 0; i < int'(layers[l].n_in); i++) begin
          @(negedge clk);
          h_k_we = 1; h_k_bank = BAW'(n % NN);
          h_k_addr = KAW'(int'(layers[l].k_base) + (n / NN) * int'(layers[l].n_in) + i);
          w[l][n * 8 + i] = $urandom_range(0, 6) - 3;
          h_k_wdata = 16'(w[l][n * 8 + i]);
        end
    @(negedge clk); h_k_we = 0;
    ofv.delete();
    @(negedge clk); exec_en = 1;
    @(negedge clk); exec_en = 0;
    t = 0;
    while (!exec_finish && t < 100000) begin @(negedge clk); t++; end
    checks += 3;
    if (!exec_finish) begin failures++; $display("no exec_finish"); end
    if (busy) begin failures++; $display("busy after finish"); end
    if (cycles == 0) begin failures++; $display("cycle counter"); end
    // references
    e0 = new[n_out0];
    for (int n = 0; n < n_out0; n++) begin
      e0[n] = 1;
      for (int i = 0; i < 3; i++) e0[n] += x[i] * w[0][n * 8 + i];
      checks++;
      if (!ofv.exists(8 + n) || ofv[8 + n] != e0[n] || of_lay[8 + n] != 0) begin
        failures++; $display("L0 n=%0d exp %0d got %0d", n, e0[n], ofv.exists(8 + n) ? ofv[8 + n] : -999);
      end
    end
    e1 = new[n_out1];
    n_sfm = (af1 == AF_SOFTMAX && n_out1 > SD) ? SD : n_out1;
    for (int n = 0; n < n_sfm; n++) begin
      e1[n] = (af1 == AF_SOFTMAX) ? 0 : 1;
      for (int i = 0; i < n_out0; i++) e1[n] += e0[i] * w[1][n * 8 + i];
      if (af1 == AF_SOFTMAX) e1[n] = 2 * e1[n];
      checks++;
      if (!ofv.exists(20 + n) || ofv[20 + n] != e1[n] || of_lay[20 + n] != 1) begin
        failures++; $display("L1 n=%0d exp %0d got %0d", n, e1[n], ofv.exists(20 + n) ? ofv[20 + n] : -999);
      end
    end
    checks += 2;
    if (ofv.num() != n_out0 + n_sfm) begin failures++; $display("stream count %0d", ofv.num()); end
    if (sfm_len_err != (af1 == AF_SOFTMAX && n_out1 > SD)) begin failures++; $display("sfm_len_err"); end
  endtask

  initial begin
    for (int l = 0; l < ML; l++) layers[l] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3; i++) begin
      @(negedge clk);
      x[i] = $urandom_range(0, 8) - 4;
      h_if_we = 1; h_if_addr = IAW'(i); h_if_wdata = 16'(x[i]);
    end
    @(negedge clk); h_if_we = 0;
    run_check(5, 3, AF_TANH);      // 3 passes (last partial), 2 passes
    run_check(4, 3, AF_SOFTMAX);   // SoftMax replay through lane 0
    run_check(3, 6, AF_SOFTMAX);   // SoftMax longer than the FIFO
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
