// tb_hyp_cordic -- self-checking test of the hyperbolic CORDIC.
// Random arguments over the convergence range in both precisions; cosh and
// sinh are compared with $cosh/$sinh (tolerance 2e-3 at 16 bit, 4e-2 at
// 8 bit) and done must rise in cycle N+1 after start (N = 16 or 7 steps).
`timescale 1ns/1ps
module tb_hyp_cordic;
  import davinci_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, prec16 = 1;
  cword_t z_in, cosh_o, sinh_o;
  logic busy, done;
  int checks = 0, failures = 0;

  hyp_cordic dut (.clk, .rst_n, .start, .prec16, .z_in, .busy, .done,
                  .cosh_out(cosh_o), .sinh_out(sinh_o));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input real z, input logic p16);
    int cyc;
    real tol, c, s;
    @(negedge clk);
    z_in = cword_t'($rtoi(z * 65536.0));
    prec16 = p16;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    tol = p16 ? 2e-3 : 4e-2;
    c = real'(cosh_o) / 65536.0;
    s = real'(sinh_o) / 65536.0;
    checks += 3;
    if (cyc != (p16 ? 17 : 8)) begin failures++; $display("latency %0d", cyc); end
    if ((c - $cosh(z)) > tol || ($cosh(z) - c) > tol) begin
      failures++; $display("cosh(%f)=%f got %f", z, $cosh(z), c);
    end
    if ((s - $sinh(z)) > tol || ($sinh(z) - s) > tol) begin
      failures++; $display("sinh(%f)=%f got %f", z, $sinh(z), s);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0.0, 1); run(1.0, 1); run(-1.0, 1); run(1.1, 1); run(-0.5, 0);
    for (int i = 0; i < 40; i++)
      run((real'($urandom_range(0, 2200)) - 1100.0) / 1000.0, i[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
