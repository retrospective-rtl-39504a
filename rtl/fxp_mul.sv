// fxp_mul -- signed fixed-point multiplier, one of the two "Multiply" blocks
// of the DA-VINCI core (Fig. 1).
//
// y = round(a*b / 2^FRAC), saturated to W bits. Purely combinational; the
// activation core registers the product. The first instance scales the input
// by t (GELU) or beta (Swish) before the hyperbolic CORDIC; the second forms
// the final products of Swish, GELU and SELU. The paper only names the
// multipliers; the rounding and saturation are this design's choice.
module fxp_mul
  import davinci_pkg::*;
#(
  parameter int unsigned W    = CW,
  parameter int unsigned FRAC = CFRAC
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] y
);

  localparam logic signed [2*W-1:0] MAXV = (2*W)'((1 << (W-1)) - 1);
  localparam logic signed [2*W-1:0] MINV = -(2*W)'(1 << (W-1));

  logic signed [2*W-1:0] p, r;

  always_comb begin
    p = a * b;
    r = (p + (2*W)'(1 << (FRAC-1))) >>> FRAC;
    if (r > MAXV)      y = MAXV[W-1:0];
    else if (r < MINV) y = MINV[W-1:0];
    else               y = r[W-1:0];
  end

endmodule
