// tb_da_vinci_af -- self-checking test of the DA-VINCI activation core.
// Every sel_af function is driven with random operands in [-1, 1] at 16-bit
// and 8-bit precision and compared with the textbook formula evaluated in
// real arithmetic (tolerance 4e-3 at 16 bit, 0.1 at 8 bit). The cycle count
// from acceptance to out_valid is checked against the documented schedule.
// SoftMax vectors of length 1..16 are checked element by element, and a
// 20-element vector checks the FIFO-full truncation (sfm_trunc).
`timescale 1ns/1ps
module tb_da_vinci_af;
  import davinci_pkg::*;
  logic clk = 0, rst_n = 0;
  af_sel_e sel_af = AF_RELU;
  logic prec16 = 1, in_valid = 0, in_last = 0;
  data_t in_data = '0;
  logic in_ready, out_valid, out_last, sfm_trunc;
  data_t out_data;
  int checks = 0, failures = 0;
  longint cyc = 0, acc_cyc = 0;
  int n_trunc = 0;

  data_t  oq[$];
  longint oc[$];
  logic   ol[$];

  da_vinci_af #(.SFM_DEPTH(16)) dut (
    .clk, .rst_n, .sel_af, .prec16,
    .cfg_t(DEF_T), .cfg_beta(DEF_BETA), .cfg_lambda(DEF_LAMBDA), .cfg_lambda_alpha(DEF_LAMBDA_ALPHA),
    .in_valid, .in_ready, .in_data, .in_last, .out_valid, .out_data, .out_last, .sfm_trunc);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && in_ready) acc_cyc <= cyc;
    if (rst_n && out_valid) begin oq.push_back(out_data); oc.push_back(cyc); ol.push_back(out_last); end
    if (rst_n && sfm_trunc) n_trunc++;
  end

  initial begin
    #5000000;
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

  function automatic real ref_af(input af_sel_e s, input real x);
    real b, t, l, la;
    b = real'(DEF_BETA) / 4096.0; t = real'(DEF_T) / 4096.0;
    l = real'(DEF_LAMBDA) / 4096.0; la = real'(DEF_LAMBDA_ALPHA) / 4096.0;
    case (s)
      AF_SIGMOID: return sigm(x);
      AF_TANH:    return $tanh(x);
      AF_SWISH:   return x * sigm(b * x);
      AF_GELU:    return 0.5 * x * (1.0 + $tanh(t * x));
      AF_SELU:    return (x >= 0.0) ? l * x : la * ($exp(x) - 1.0);
      default:    return (x > 0.0) ? x : 0.0;
    endcase
  endfunction

  function automatic int exp_lat(input af_sel_e s, input real x, input logic p16);
    int nh, nl;
    nh = p16 ? 16 : 7; nl = p16 ? 15 : 7;
    case (s)
      AF_RELU, AF_RSVD: return 1;
      AF_SELU:          return (x >= 0.0) ? 2 : nh + 2;
      default:          return nh + nl + 3;
    endcase
  endfunction

  task automatic send(input real x, input af_sel_e s, input logic p16, input logic last);
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    in_data = to_fx(x, p16); sel_af = s; prec16 = p16; in_last = last; in_valid = 1;
    @(negedge clk);
    in_valid = 0; in_last = 0;
  endtask

  task automatic one(input af_sel_e s, input real xr, input logic p16);
    real x, got, r, tol;
    int lat;
    x = qz(xr, p16);
    send(x, s, p16, 1'b0);
    while (oq.size() == 0) @(negedge clk);
    got = to_real(oq.pop_front(), p16);
    lat = int'(oc.pop_front() - acc_cyc);
    void'(ol.pop_front());
    r = ref_af(s, x);
    tol = p16 ? 4e-3 : 0.1;
    checks += 2;
    if ((got - r) > tol || (r - got) > tol) begin
      failures++; $display("%s(%f) p16=%0b exp %f got %f", s.name(), x, p16, r, got);
    end
    if (lat != exp_lat(s, x, p16)) begin
      failures++; $display("%s latency %0d exp %0d", s.name(), lat, exp_lat(s, x, p16));
    end
  endtask

  task automatic softmax(input int n, input logic p16);
    real xs[$], sum, r, got, tol;
    int nout, exp_n;
    longint last_acc;
    exp_n = (n > 16) ? 16 : n;
    sum = 0.0;
    for (int i = 0; i < n; i++) begin
      xs.push_back(qz((real'($urandom_range(0, 2000)) - 1000.0) / 1000.0, p16));
      if (i < exp_n) sum += $exp(xs[i]);
    end
    for (int i = 0; i < exp_n; i++) begin
      send(xs[i], AF_SOFTMAX, p16, i == n - 1);
      last_acc = acc_cyc;
    end
    while (oq.size() < exp_n) @(negedge clk);
    tol = p16 ? 4e-3 : 0.1;
    checks++;
    if (int'(oc[0] - last_acc) != (p16 ? 16 + 15 + 4 : 7 + 7 + 4)) begin
      failures++; $display("softmax first-output latency %0d", oc[0] - last_acc);
    end
    for (int i = 0; i < exp_n; i++) begin
      got = to_real(oq.pop_front(), p16);
      void'(oc.pop_front());
      r = $exp(xs[i]) / sum;
      checks += 2;
      if ((got - r) > tol || (r - got) > tol) begin
        failures++; $display("softmax[%0d/%0d] exp %f got %f", i, n, r, got);
      end
      if (ol.pop_front() != (i == exp_n - 1)) begin failures++; $display("softmax last flag"); end
    end
    // remainder of a truncated vector is a vector of its own
    if (n > 16) begin
      sum = 0.0;
      for (int i = 16; i < n; i++) sum += $exp(xs[i]);
      for (int i = 16; i < n; i++) send(xs[i], AF_SOFTMAX, p16, i == n - 1);
      while (oq.size() < n - 16) @(negedge clk);
      for (int i = 16; i < n; i++) begin
        got = to_real(oq.pop_front(), p16);
        void'(oc.pop_front()); void'(ol.pop_front());
        r = $exp(xs[i]) / sum;
        checks++;
        if ((got - r) > tol || (r - got) > tol) begin
          failures++; $display("softmax tail[%0d] exp %f got %f", i, r, got);
        end
      end
    end
  endtask

  initial begin
    static af_sel_e fs[7] = '{AF_RELU, AF_SIGMOID, AF_TANH, AF_SWISH, AF_GELU, AF_SELU, AF_RSVD};
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (fs[k]) begin
      one(fs[k], 1.0, 1); one(fs[k], -1.0, 1); one(fs[k], 0.0, 1);
      for (int i = 0; i < 20; i++)
        one(fs[k], (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0, i[0]);
    end
    // back-to-back function switching
    for (int i = 0; i < 40; i++)
      one(fs[$urandom_range(0, 6)], (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0, 1'b1);
    for (int n = 1; n <= 16; n++) softmax(n, n[0]);
    softmax(20, 1'b1);
    checks++;
    if (n_trunc != 1) begin failures++; $display("sfm_trunc count %0d", n_trunc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
