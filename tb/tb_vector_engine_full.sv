// tb_vector_engine_full -- one complete operation of the vector engine at
// its default size (64 NEURIC lanes, 64 + 64 banks of 1 KB, SoftMax FIFO of
// 16), no parameter overrides. A two-layer classifier head in 16-bit mode:
// 16 inputs -> 100 Sigmoid neurons (two passes, the second covering 36 of
// the 64 lanes) -> 10-way SoftMax reading the 100 written-back outputs.
// Every output on the ofmap stream is compared with the real-valued
// reference computed from the quantised inputs and weights.
`timescale 1ns/1ps
module tb_vector_engine_full;
  import davinci_pkg::*;
  import ve_pkg::*;

  localparam int NN = 64, BW = 512, ML = 4, SD = 16;
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

  vector_engine dut (.*);

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
    lay_t A [2];
    for (int k = 0; k < 8; k++) n_af[k] = 0;
    repeat (3) @(negedge clock);
    reset_n = 1;
    prec = 1;
    cfg_wr(REG_CTRL, 1);
    for (int i = 0; i < 16; i++) if_wr(i, qz((real'($urandom_range(0, 1000)) - 500.0) / 1000.0));
    A[0] = '{16, 100, 0, 4096, 0, AF_SIGMOID};
    A[1] = '{100, 10, 4096, 8192, 32, AF_SOFTMAX};
    foreach (A[l]) set_layer(l, A[l]);
    run(2, 1'b0);
    foreach (A[l]) begin
      check_layer(A[l], l);
      if (l > 0) n_reuse++;
    end
    checks += 4;
    if (n_multipass == 0) begin failures++; $display("no multi-pass layer"); end
    if (n_partial == 0)   begin failures++; $display("no partial pass"); end
    if (n_reuse == 0)     begin failures++; $display("no layer reuse"); end
    if (n_sfm == 0)       begin failures++; $display("no SoftMax"); end
    $display("mechanisms: multipass=%0d partial=%0d reuse=%0d softmax=%0d",
             n_multipass, n_partial, n_reuse, n_sfm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
