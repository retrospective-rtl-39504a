// tb_hoaa_adder -- self-checking test of the HOAA-position adder: random and
// overflow operands against a saturating sum worked out in 64-bit integers.
`timescale 1ns/1ps
module tb_hoaa_adder;
  import davinci_pkg::*;
  cword_t a, b, s;
  int checks = 0, failures = 0;

  hoaa_adder dut (.a, .b, .sum(s));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input cword_t ta, input cword_t tb_v);
    longint r;
    a = ta; b = tb_v;
    #1;
    r = longint'(ta) + longint'(tb_v);
    if (r > 64'sd8388607) r = 8388607;
    if (r < -64'sd8388608) r = -8388608;
    checks++;
    if (longint'(s) != r) begin
      failures++; $display("%0d+%0d: exp %0d got %0d", ta, tb_v, r, s);
    end
  endtask

  initial begin
    chk(24'sd131072, -24'sd65536);
    chk(24'sd8388607, 24'sd1);
    chk(-24'sd8388608, -24'sd1);
    for (int i = 0; i < 1000; i++) chk(cword_t'($urandom), cword_t'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
