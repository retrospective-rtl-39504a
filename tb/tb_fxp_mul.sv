// tb_fxp_mul -- self-checking test of the fixed-point multiplier: random and
// corner operands against round(a*b/2^16) computed in 64-bit integers,
// including saturation at both ends.
`timescale 1ns/1ps
module tb_fxp_mul;
  import davinci_pkg::*;
  cword_t a, b, y;
  int checks = 0, failures = 0;

  fxp_mul dut (.a, .b, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input cword_t ta, input cword_t tb_v);
    longint p, r;
    a = ta; b = tb_v;
    #1;
    p = longint'(ta) * longint'(tb_v);
    r = (p + 32768) >>> 16;
    if (r > 64'sd8388607) r = 8388607;
    if (r < -64'sd8388608) r = -8388608;
    checks++;
    if (longint'(y) != r) begin
      failures++; $display("%0d*%0d: exp %0d got %0d", ta, tb_v, r, y);
    end
  endtask

  initial begin
    chk(24'sd65536, 24'sd65536);
    chk(-24'sd65536, 24'sd98304);
    chk(24'sd8388607, 24'sd8388607);
    chk(-24'sd8388608, 24'sd8388607);
    chk(24'sd3, 24'sd21845);
    for (int i = 0; i < 500; i++) chk(cword_t'($urandom), cword_t'($urandom));
    for (int i = 0; i < 500; i++) chk(cword_t'($urandom_range(0, 600000)) - 300000,
                                      cword_t'($urandom_range(0, 600000)) - 300000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
