// tb_neuric -- self-checking test of the NEURIC neuron. Random dot products
// (1..12 terms, inputs and weights in [-0.3, 0.3]) are accumulated through
// the CORDIC MAC and activated with every function at 16 and 8 bit; the
// result is compared with sum(x*w) passed through the real-valued activation.
// The accumulator output and the MAC issue interval (N+2 cycles) are
// checked too, and a SoftMax over four neurons is fed from ext_data.
`timescale 1ns/1ps
module tb_neuric;
  import davinci_pkg::*;
  logic clk = 0, rst_n = 0;
  af_sel_e sel_af = AF_RELU;
  logic prec16 = 1, clear = 0, mac_valid = 0, act_valid = 0, act_last = 0, act_src_ext = 0;
  data_t x_in = '0, w_in = '0, ext_data = '0;
  logic mac_ready, act_ready, out_valid, out_last, sfm_trunc;
  data_t out_data, acc_out;
  int checks = 0, failures = 0;
  longint cyc = 0;
  longint mac_cyc[$];
  data_t oq[$];

  neuric dut (.clk, .rst_n, .prec16, .sel_af,
    .cfg_t(DEF_T), .cfg_beta(DEF_BETA), .cfg_lambda(DEF_LAMBDA), .cfg_lambda_alpha(DEF_LAMBDA_ALPHA),
    .clear, .mac_valid, .mac_ready, .x_in, .w_in, .act_valid, .act_ready, .act_last,
    .act_src_ext, .ext_data, .out_valid, .out_data, .out_last, .sfm_trunc, .acc_out);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (mac_valid && mac_ready) mac_cyc.push_back(cyc);
    if (rst_n && out_valid) oq.push_back(out_data);
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sc(input logic p16); return p16 ? 4096.0 : 16.0; endfunction
  function automatic real to_real(input data_t d, input logic p16);
    return p16 ? real'(d) / 4096.0 : real'($signed(d[7:0])) / 16.0;
  endfunction
  function automatic data_t to_fx(input real v, input logic p16);
    return p16 ? data_t'($rtoi(v * 4096.0)) : data_t'({8'h00, 8'($rtoi(v * 16.0))});
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

  task automatic neuron(input int n, input af_sel_e s, input logic p16);
    real acc, got, r, tol, xv, wv, accq;
    data_t xf, wf;
    acc = 0.0;
    @(negedge clk);
    prec16 = p16; sel_af = s; clear = 1;
    @(negedge clk);
    clear = 0;
    mac_cyc.delete();
    for (int i = 0; i < n; i++) begin
      xf = to_fx((real'($urandom_range(0, 600)) - 300.0) / 1000.0, p16);
      wf = to_fx((real'($urandom_range(0, 600)) - 300.0) / 1000.0, p16);
      xv = to_real(xf, p16); wv = to_real(wf, p16);
      acc += xv * wv;
      while (!mac_ready) @(negedge clk);
      x_in = xf; w_in = wf; mac_valid = 1;
      @(negedge clk);
      mac_valid = 0;
    end
    while (!mac_ready) @(negedge clk);
    accq = to_real(acc_out, p16);
    tol = p16 ? 2e-3 : 0.13;
    checks++;
    if ((accq - acc) > tol || (acc - accq) > tol) begin
      failures++; $display("acc n=%0d exp %f got %f", n, acc, accq);
    end
    while (!act_ready) @(negedge clk);
    act_valid = 1;
    @(negedge clk);
    act_valid = 0;
    while (oq.size() == 0) @(negedge clk);
    got = to_real(oq.pop_front(), p16);
    r = ref_af(s, accq);
    tol = p16 ? 5e-3 : 0.12;
    checks++;
    if ((got - r) > tol || (r - got) > tol) begin
      failures++; $display("%s(acc=%f) p16=%0b exp %f got %f", s.name(), accq, p16, r, got);
    end
  endtask

  // MAC issue interval: back-to-back products.
  task automatic interval(input logic p16);
    @(negedge clk);
    prec16 = p16; clear = 1;
    @(negedge clk);
    clear = 0;
    mac_cyc.delete();
    x_in = to_fx(0.25, p16); w_in = to_fx(0.25, p16);
    mac_valid = 1;
    repeat (60) @(negedge clk);
    mac_valid = 0;
    while (!mac_ready) @(negedge clk);
    checks++;
    if (mac_cyc.size() < 2 || (mac_cyc[1] - mac_cyc[0]) != (p16 ? 17 : 9)) begin
      failures++; $display("MAC interval %0d", mac_cyc[1] - mac_cyc[0]);
    end
  endtask

  initial begin
    af_sel_e fs[6] = '{AF_RELU, AF_SIGMOID, AF_TANH, AF_SWISH, AF_GELU, AF_SELU};
    real xs[4], sum, got;
    repeat (3) @(negedge clk);
    rst_n = 1;
    interval(1'b1);
    interval(1'b0);
    foreach (fs[k])
      for (int i = 0; i < 8; i++) neuron($urandom_range(1, 12), fs[k], i[0]);
    // SoftMax over an external vector
    sum = 0.0;
    prec16 = 1; sel_af = AF_SOFTMAX; act_src_ext = 1;
    for (int i = 0; i < 4; i++) begin
      xs[i] = (real'($urandom_range(0, 4000)) - 2000.0) / 4096.0;
      sum += $exp(xs[i]);
      @(negedge clk);
      while (!act_ready) @(negedge clk);
      ext_data = to_fx(xs[i], 1'b1); act_last = (i == 3); act_valid = 1;
      @(negedge clk);
      act_valid = 0;
    end
    act_valid = 0; act_src_ext = 0;
    while (oq.size() < 4) @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      got = to_real(oq.pop_front(), 1'b1);
      checks++;
      if ((got - $exp(xs[i]) / sum) > 4e-3 || ($exp(xs[i]) / sum - got) > 4e-3) begin
        failures++; $display("softmax[%0d] exp %f got %f", i, $exp(xs[i]) / sum, got);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
