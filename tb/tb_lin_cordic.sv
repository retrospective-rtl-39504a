// tb_lin_cordic -- self-checking test of the linear CORDIC.
// LV: random p/q with |p/q| < 2, compared with real division. LR: random
// y + x*z with |z| < 7.9, compared with the exact product; the tolerance is
// |x|*2^-12 (16-bit) or |x|*2^-4 (8-bit), the residual of the last step.
// done must rise in the 16th (16-bit) or 8th (8-bit) cycle after start.
`timescale 1ns/1ps
module tb_lin_cordic;
  import davinci_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, prec16 = 1;
  lin_mode_e mode = LIN_LV;
  cword_t x_in, y_in, z_in, y_out, z_out;
  logic busy, done;
  int checks = 0, failures = 0;

  lin_cordic dut (.clk, .rst_n, .start, .mode, .prec16, .x_in, .y_in, .z_in,
                  .busy, .done, .y_out, .z_out);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic go(output int cyc);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  task automatic div(input real p, input real q, input logic p16);
    int cyc; real got, tol;
    mode = LIN_LV; prec16 = p16;
    x_in = cword_t'($rtoi(q * 65536.0));
    y_in = cword_t'($rtoi(p * 65536.0));
    z_in = '0;
    go(cyc);
    got = real'(z_out) / 65536.0;
    tol = p16 ? 1e-3 : 3e-2;
    checks += 2;
    if (cyc != (p16 ? 16 : 8)) begin failures++; $display("LV latency %0d", cyc); end
    if ((got - p/q) > tol || (p/q - got) > tol) begin
      failures++; $display("LV %f/%f=%f got %f", p, q, p/q, got);
    end
  endtask

  task automatic mac(input real x, input real y, input real z, input logic p16);
    int cyc; real got, ref_v, tol;
    mode = LIN_LR; prec16 = p16;
    x_in = cword_t'($rtoi(x * 65536.0));
    y_in = cword_t'($rtoi(y * 65536.0));
    z_in = p16 ? cword_t'($rtoi(z * 4096.0)) <<< 4 : cword_t'($rtoi(z * 16.0)) <<< 12;
    ref_v = y + x * (real'(z_in) / 65536.0);
    go(cyc);
    got = real'(y_out) / 65536.0;
    tol = (x < 0 ? -x : x) * (p16 ? 1.0/4096.0 : 1.0/16.0) + 1e-3;
    checks += 2;
    if (cyc != (p16 ? 16 : 8)) begin failures++; $display("LR latency %0d", cyc); end
    if ((got - ref_v) > tol || (ref_v - got) > tol) begin
      failures++; $display("LR %f+%f*%f=%f got %f", y, x, z, ref_v, got);
    end
  endtask

  initial begin
    real q;
    repeat (3) @(negedge clk);
    rst_n = 1;
    div(1.0, 2.0, 1); div(-0.75, 1.0, 1); div(1.9, 1.0, 1); div(0.3, 3.0, 0);
    for (int i = 0; i < 30; i++) begin
      q = real'($urandom_range(100, 4000)) / 1000.0;
      div(q * (real'($urandom_range(0, 3800)) - 1900.0) / 1000.0, q, i[0]);
    end
    mac(0.5, 0.25, 3.0, 1); mac(-1.25, 0.0, 7.9, 1); mac(0.75, -1.0, -7.5, 0);
    for (int i = 0; i < 30; i++)
      mac((real'($urandom_range(0, 4000)) - 2000.0) / 1000.0,
          (real'($urandom_range(0, 4000)) - 2000.0) / 1000.0,
          (real'($urandom_range(0, 15000)) - 7500.0) / 1000.0, i[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
