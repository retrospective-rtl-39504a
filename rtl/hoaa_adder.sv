// hoaa_adder -- the "HOAA" adder of Fig. 1, placed between the divider and
// the second multiplier.
//
// In this core it forms e^x - 1 for the negative branch of SELU (b = -1).
// The paper cites an approximate adder under this name but does not describe
// its insides, so this block is an exact W-bit adder with saturation, which
// gives the same function. Combinational.
module hoaa_adder
  import davinci_pkg::*;
#(
  parameter int unsigned W = CW
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] sum
);

  logic signed [W:0] s;

  always_comb begin
    s = $signed({a[W-1], a}) + $signed({b[W-1], b});
    if (s[W] != s[W-1]) sum = s[W] ? {1'b1, {(W-1){1'b0}}} : {1'b0, {(W-1){1'b1}}};
    else                sum = s[W-1:0];
  end

endmodule
