// tb_vector_engine -- end-to-end test of the vector engine at reduced size
// (4 NEURIC lanes, 64-word banks, SoftMax FIFO of 8).
//
// Run A (16 bit): a four-layer network, Sigmoid (10 neurons: three passes,
// the last one partial) -> Tanh -> SoftMax -> GELU, each layer reading the
// previous layer's written-back outputs (layer reuse); a host write is
// attempted during the run and must be dropped and flagged.
// Run B (8 bit): Swish -> SELU -> ReLU.
// Run C (16 bit): a 10-output SoftMax layer, longer than the FIFO: the
// first 8 outputs are normalised over themselves and sfm_len_err is set.
// Every output on the ofmap stream is compared with the dot product of the
// layer's (quantised) inputs and weights passed through the real-valued
// activation; each layer's reference uses the outputs the engine produced
// for the layer before. Each mechanism (multi-pass, partial pass, layer
// reuse, every activation, SoftMax, SoftMax length error, host drop, 8-bit
// mode) is counted and must occur.
`timescale 1ns/1ps
module tb_vector_engine;
  import davinci_pkg::*;
  import ve_pkg::*;

  localparam int NN = 4, BW = 64, ML = 4, SD = 8;
  localparam int IAW = $clog2(NN * BW), KAW = $clog2(BW), BAW = $clog2(NN);

  logic clock = 0, reset_n = 0;
  logic if_we = 0, k_we = 0, cfg_we = 0, exec_en = 0;
  logic [IAW-1:0] if_addr = '0;
  data_t if_wdata = '0, k_wdata = '0;
  logic [BAW-1:0] k_bank = '0;
  logic [KAW-1:0] k_addr = '0;
  logic [7:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;
  logic exec_finish, of_valid;
  logic [IAW-1:0] of_addr;
  data_t of_data;
  logic [3:0] of_layer;

  vector_engine #(.NUM_NEURIC(NN), .BANK_WORDS(BW), .MAX_LAYERS(ML), .SFM_DEPTH(SD)) dut (.*);

  always #5 clock = ~clock;

  int checks = 0, failures = 0;
  int n_multipass = 0, n_partial = 0, n_reuse = 0, n_sfm = 0, n_sfm_err = 0;
  int n_drop = 0, n_prec8 = 0;
  int n_af [8];
  real mem [1 << IAW];        // model of the ifmap memory contents (real values)
  real ker [NN][BW];
  real of_val [int];          // address -> value seen on the ofmap stream
  int  of_cnt = 0;
  logic prec = 1;

  always @(posedge clock)
    if (reset_n && of_valid) begin
      of_val[int'(of_addr)] = prec ? real'(of_data) / 4096.0 : real'($signed(of_data[7:0])) / 16.0;
      of_cnt++;
    end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real qz(input real v);
    return prec ? real'($rtoi(v * 4096.0 + (v < 0 ? -0.5 : 0.5))) / 4096.0
                : real'($rtoi(v * 16.0 + (v < 0 ? -0.5 : 0.5))) / 16.0;
  endfunction
  function automatic data_t fx(input real v);
    return prec ? data_t'($rtoi(v * 4096.0)) : data_t'({8'h00, 8'($rtoi(v * 16.0))});
  endfunction
  function automatic real sigm(input real v); return 1.0 / (1.0 + $exp(-v)); endfunction
  function automatic real ref_af(input af_sel_e s, input real x);
    case (s)
      AF_SIGMOID: return sigm(x);
      AF_TANH:    return $tanh(x);
      AF_SWISH:   return x * sigm(real'(DEF_BETA) / 4096.0 * x);
      AF_GELU:    return 0.5 * x * (1.0 + $tanh(real'(DEF_T) / 4096.0 * x));
      AF_SELU:    return (x >= 0.0) ? real'(DEF_LAMBDA) / 4096.0 * x
                                    : real'(DEF_LAMBDA_ALPHA) / 4096.0 * ($exp(x) - 1.0);
      default:    return (x > 0.0) ? x : 0.0;
    endcase
  endfunction

  task automatic cfg_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clock); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clock); cfg_we = 0;
  endtask
  task automatic if_wr(input int a, input real v);
    @(negedge clock); if_we = 1; if_addr = IAW'(a); if_wdata = fx(v); mem[a] = v;
    @(negedge clock); if_we = 0;
  endtask
  task automatic k_wr(input int b, input int a, input real v);
    @(negedge clock); k_we = 1; k_bank = BAW'(b); k_addr = KAW'(a); k_wdata = fx(v); ker[b][a] = v;
    @(negedge clock); k_we = 0;
  endtask

  typedef struct {
    int n_in, n_out, in_base, out_base, k_base;
    af_sel_e af;
  } lay_t;

  task automatic set_layer(input int l, input lay_t L);
    real wmax;
    cfg_wr(8'(8'h10 + 8 * l + 0), L.n_in);
    cfg_wr(8'(8'h10 + 8 * l + 1), L.n_out);
    cfg_wr(8'(8'h10 + 8 * l + 2), L.in_base);
    cfg_wr(8'(8'h10 + 8 * l + 3), L.out_base);
    cfg_wr(8'(8'h10 + 8 * l + 4), L.k_base);
    cfg_wr(8'(8'h10 + 8 * l + 5), 32'(L.af));
    // random weights for this layer, |w| <= min(0.15, 0.3/sqrt(n_in)) so that
    // the dot products stay inside the hyperbolic CORDIC range
    wmax = 0.3 / $sqrt(real'(L.n_in));
    if (wmax > 0.15) wmax = 0.15;
    for (int n = 0; n < L.n_out; n++)
      for (int i = 0; i < L.n_in; i++)
        k_wr(n % NN, L.k_base + (n / NN) * L.n_in + i,
             qz(wmax * (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0));
  endtask

  task automatic run(input int n_layers, input logic try_drop);
    int t;
    cfg_wr(REG_NUM_LAYERS, n_layers);
    of_val.delete();
    @(negedge clock); exec_en = 1;
    @(negedge clock); exec_en = 0;
    if (try_drop) begin
      repeat (20) @(negedge clock);
      if_we = 1; if_addr = '0; if_wdata = 16'h1234;
      @(negedge clock); if_we = 0;
    end
    t = 0;
    while (!exec_finish && t < 500000) begin @(negedge clock); t++; end
    checks++;
    if (!exec_finish) begin failures++; $display("run did not finish"); end
    cfg_addr = REG_STATUS; #1;
    if (cfg_rdata[2]) n_drop++;
    if (cfg_rdata[3]) n_sfm_err++;
  endtask

  // Check one layer against the reference and update the memory model.
  task automatic check_layer(input lay_t L, input int l_seen);
    real acc [], r, got, tol, sum;
    int n_cmp;
    acc = new[L.n_out];
    tol = prec ? 6e-3 : 0.15;
    for (int n = 0; n < L.n_out; n++) begin
      acc[n] = 0.0;
      for (int i = 0; i < L.n_in; i++)
        acc[n] += mem[L.in_base + i] * ker[n % NN][L.k_base + (n / NN) * L.n_in + i];
      acc[n] = qz(acc[n]);
    end
    n_cmp = (L.af == AF_SOFTMAX && L.n_out > SD) ? SD : L.n_out;
    sum = 0.0;
    for (int n = 0; n < n_cmp; n++) sum += $exp(acc[n]);
    for (int n = 0; n < n_cmp; n++) begin
      r = (L.af == AF_SOFTMAX) ? $exp(acc[n]) / sum : ref_af(L.af, acc[n]);
      checks++;
      if (!of_val.exists(L.out_base + n)) begin
        failures++; $display("layer %0d: output %0d missing", l_seen, n);
        continue;
      end
      got = of_val[L.out_base + n];
      if ((got - r) > tol || (r - got) > tol) begin
        failures++; $display("layer %0d %s n=%0d acc=%f exp %f got %f", l_seen, L.af.name(), n, acc[n], r, got);
      end
      mem[L.out_base + n] = got;
    end
    n_af[L.af]++;
    if (L.n_out > NN) n_multipass++;
    if (L.n_out % NN != 0) n_partial++;
    if (L.af == AF_SOFTMAX) n_sfm++;
    if (!prec) n_prec8++;
  endtask

  initial begin
    lay_t A [4], B [3], C [1];
    for (int k = 0; k < 8; k++) n_af[k] = 0;
    repeat (3) @(negedge clock);
    reset_n = 1;

    // ---------------- run A
    prec = 1;
    cfg_wr(REG_CTRL, 1);
    for (int i = 0; i < 6; i++) if_wr(i, qz((real'($urandom_range(0, 1000)) - 500.0) / 1000.0));
    A[0] = '{6, 10, 0, 64, 0, AF_SIGMOID};
    A[1] = '{10, 5, 64, 128, 18, AF_TANH};
    A[2] = '{5, 6, 128, 192, 38, AF_SOFTMAX};
    A[3] = '{6, 4, 192, 200, 48, AF_GELU};
    foreach (A[l]) set_layer(l, A[l]);
    run(4, 1'b1);
    foreach (A[l]) begin
      check_layer(A[l], l);
      if (l > 0) n_reuse++;
    end

    // ---------------- run B (8-bit)
    prec = 0;
    cfg_wr(REG_CTRL, 0);
    for (int i = 0; i < 4; i++) if_wr(i, qz((real'($urandom_range(0, 1000)) - 500.0) / 1000.0));
    B[0] = '{4, 6, 0, 64, 0, AF_SWISH};
    B[1] = '{6, 5, 64, 128, 8, AF_SELU};
    B[2] = '{5, 3, 128, 192, 20, AF_RELU};
    foreach (B[l]) set_layer(l, B[l]);
    run(3, 1'b0);
    foreach (B[l]) begin
      check_layer(B[l], l);
      if (l > 0) n_reuse++;
    end

    // ---------------- run C (SoftMax longer than the FIFO)
    prec = 1;
    cfg_wr(REG_CTRL, 1);
    for (int i = 0; i < 5; i++) if_wr(i, qz((real'($urandom_range(0, 1000)) - 500.0) / 1000.0));
    C[0] = '{5, 10, 0, 64, 0, AF_SOFTMAX};
    set_layer(0, C[0]);
    run(1, 1'b0);
    check_layer(C[0], 0);
    checks++;
    if (of_val.num() != SD) begin failures++; $display("truncated SoftMax streamed %0d", of_val.num()); end

    // ---------------- mechanisms
    checks += 13;
    if (n_multipass == 0) begin failures++; $display("no multi-pass layer"); end
    if (n_partial == 0)   begin failures++; $display("no partial pass"); end
    if (n_reuse == 0)     begin failures++; $display("no layer reuse"); end
    if (n_sfm == 0)       begin failures++; $display("no SoftMax"); end
    if (n_sfm_err != 1)   begin failures++; $display("sfm_len_err seen %0d", n_sfm_err); end
    if (n_drop != 1)      begin failures++; $display("host drop seen %0d", n_drop); end
    if (n_prec8 == 0)     begin failures++; $display("no 8-bit layer"); end
    foreach (n_af[k]) if (k != int'(AF_RSVD) && n_af[k] == 0) begin
      failures++; $display("activation %0d never used", k);
    end
    $display("mechanisms: multipass=%0d partial=%0d reuse=%0d softmax=%0d sfm_len_err=%0d host_drop=%0d prec8_layers=%0d",
             n_multipass, n_partial, n_reuse, n_sfm, n_sfm_err, n_drop, n_prec8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
