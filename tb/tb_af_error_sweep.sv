// tb_af_error_sweep -- accuracy sweep of the DA-VINCI activation core, the
// kind of error evaluation the design was characterised with: uniformly
// distributed random inputs over the normalised range [-1, 1] for every
// function at 16-bit and 8-bit precision, plus random SoftMax vectors, each
// compared with double-precision references. For each function and
// precision it prints the mean and maximum absolute error and checks them
// against bounds (16-bit: mean 3e-4, max 1e-3; 8-bit: mean 0.03, max 0.05,
// i.e. below one LSB of Q3.4).
// GELU is referenced to its tanh/sigmoid form 0.5x(1+tanh(0.851x)); the
// printout also gives its distance to the exact erf-based GELU. The core is
// used at its default parameters. Results are collected through the normal
// valid/ready handshake, one input at a time.
`timescale 1ns/1ps
module tb_af_error_sweep;
  import davinci_pkg::*;
  localparam int NPTS = 400;
  logic clk = 0, rst_n = 0;
  af_sel_e sel_af = AF_RELU;
  logic prec16 = 1, in_valid = 0, in_last = 0;
  data_t in_data = '0;
  logic in_ready, out_valid, out_last, sfm_trunc;
  data_t out_data;
  int checks = 0, failures = 0;
  data_t oq[$];

  da_vinci_af dut (
    .clk, .rst_n, .sel_af, .prec16,
    .cfg_t(DEF_T), .cfg_beta(DEF_BETA), .cfg_lambda(DEF_LAMBDA), .cfg_lambda_alpha(DEF_LAMBDA_ALPHA),
    .in_valid, .in_ready, .in_data, .in_last, .out_valid, .out_data, .out_last, .sfm_trunc);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && out_valid) oq.push_back(out_data);

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real qz(input real v, input logic p16);
    return p16 ? real'($rtoi(v * 4096.0)) / 4096.0 : real'($rtoi(v * 16.0)) / 16.0;
  endfunction
  function automatic real to_real(input data_t d, input logic p16);
    return p16 ? real'(d) / 4096.0 : real'($signed(d[7:0])) / 16.0;
  endfunction
  function automatic data_t to_fx(input real v, input logic p16);
    return p16 ? data_t'($rtoi(v * 4096.0)) : data_t'({8'h00, 8'($rtoi(v * 16.0))});
  endfunction
  function automatic real sigm(input real v); return 1.0 / (1.0 + $exp(-v)); endfunction
  // erf by Abramowitz-Stegun 7.1.26 (|error| < 1.5e-7)
  function automatic real erf_as(input real v);
    real t, y, a;
    a = (v < 0.0) ? -v : v;
    t = 1.0 / (1.0 + 0.3275911 * a);
    y = 1.0 - (((((1.061405429 * t - 1.453152027) * t) + 1.421413741) * t - 0.284496736) * t + 0.254829592) * t * $exp(-a * a);
    return (v < 0.0) ? -y : y;
  endfunction
  function automatic real ref_af(input af_sel_e s, input real x);
    real t;
    t = real'(DEF_T) / 4096.0;
    case (s)
      AF_SIGMOID: return sigm(x);
      AF_TANH:    return $tanh(x);
      AF_SWISH:   return x * sigm(real'(DEF_BETA) / 4096.0 * x);
      AF_GELU:    return 0.5 * x * (1.0 + $tanh(t * x));
      AF_SELU:    return (x >= 0.0) ? real'(DEF_LAMBDA) / 4096.0 * x
                                    : real'(DEF_LAMBDA_ALPHA) / 4096.0 * ($exp(x) - 1.0);
      default:    return (x > 0.0) ? x : 0.0;
    endcase
  endfunction

  task automatic send(input real x, input af_sel_e s, input logic p16, input logic last);
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    in_data = to_fx(x, p16); sel_af = s; prec16 = p16; in_last = last; in_valid = 1;
    @(negedge clk);
    in_valid = 0; in_last = 0;
  endtask

  task automatic judge(input string name, input logic p16, input real sum, input real mx, input int n);
    real mean, bmean, bmax;
    mean  = sum / real'(n);
    bmean = p16 ? 3e-4 : 0.03;
    bmax  = p16 ? 1e-3 : 0.05;
    $display("%-8s %2s-bit  n=%0d  mean |err| = %8.6f  max |err| = %8.6f", name, p16 ? "16" : " 8", n, mean, mx);
    checks += 2;
    if (mean > bmean) begin failures++; $display("  mean error above %f", bmean); end
    if (mx > bmax)    begin failures++; $display("  max error above %f", bmax); end
  endtask

  initial begin
    static af_sel_e fs[6] = '{AF_RELU, AF_SIGMOID, AF_TANH, AF_SWISH, AF_GELU, AF_SELU};
    real x, got, e, sum, mx, gmx;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 1; p >= 0; p--) begin
      foreach (fs[k]) begin
        sum = 0.0; mx = 0.0; gmx = 0.0;
        for (int i = 0; i < NPTS; i++) begin
          x = qz((real'($urandom_range(0, 20000)) - 10000.0) / 10000.0, p[0]);
          send(x, fs[k], p[0], 1'b0);
          while (oq.size() == 0) @(negedge clk);
          got = to_real(oq.pop_front(), p[0]);
          e = got - ref_af(fs[k], x);
          if (e < 0.0) e = -e;
          sum += e;
          if (e > mx) mx = e;
          if (fs[k] == AF_GELU) begin
            e = got - 0.5 * x * (1.0 + erf_as(x / $sqrt(2.0)));
            if (e < 0.0) e = -e;
            if (e > gmx) gmx = e;
          end
        end
        judge(fs[k].name(), p[0], sum, mx, NPTS);
        if (fs[k] == AF_GELU) $display("         (max distance to the erf-based GELU: %8.6f)", gmx);
      end
      // SoftMax: 40 random vectors of 2..16 elements
      sum = 0.0; mx = 0.0;
      begin
        int cnt;
        real xs[$], den;
        cnt = 0;
        for (int v = 0; v < 40; v++) begin
          int n;
          n = $urandom_range(2, 16);
          xs.delete();
          den = 0.0;
          for (int i = 0; i < n; i++) begin
            x = qz((real'($urandom_range(0, 20000)) - 10000.0) / 10000.0, p[0]);
            xs.push_back(x);
            den += $exp(x);
            send(x, AF_SOFTMAX, p[0], i == n - 1);
          end
          for (int i = 0; i < n; i++) begin
            while (oq.size() == 0) @(negedge clk);
            got = to_real(oq.pop_front(), p[0]);
            e = got - $exp(xs[i]) / den;
            if (e < 0.0) e = -e;
            sum += e;
            if (e > mx) mx = e;
            cnt++;
          end
        end
        judge("SOFTMAX", p[0], sum, mx, cnt);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
