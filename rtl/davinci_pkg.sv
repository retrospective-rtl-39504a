// davinci_pkg -- shared types and constants of the DA-VINCI activation core,
// the NEURIC neuron and the vector engine.
//
// Number formats (this design's choice; the paper only says "FxP 8/16"):
//   * external 16-bit mode : Q3.12 signed (DATA_W = 16, DATA_FRAC = 12)
//   * external  8-bit mode : Q3.4 signed, carried in bits [7:0] of a 16-bit
//                            port (sign-extended on outputs)
//   * internal CORDIC word : Q7.16 signed (CW = 24, CFRAC = 16); the four
//                            extra integer bits hold SoftMax sums.
//
// CORDIC schedules (Eq. (1) of the source paper, iteration counts are ours):
//   * hyperbolic rotation  : shift sequence 1,2,3,4,4,5,...,13,13,14 (16 steps)
//                            in 16-bit mode, the first 7 steps in 8-bit mode.
//                            Convergence range +-1.1182.
//   * linear vectoring (LV, division)      : i = 0 .. N-1
//   * linear rotation  (LR, multiply-acc.) : i = -2 .. N-3, range +-7.968
//     with N = 15 (16-bit) or 7 (8-bit).
package davinci_pkg;

  localparam int unsigned DATA_W    = 16;
  localparam int unsigned DATA_FRAC = 12;
  localparam int unsigned CW        = 24;
  localparam int unsigned CFRAC     = 16;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [CW-1:0]     cword_t;

  // sel_af[2:0] encoding (Fig. 1 prints only the 3-bit width).
  typedef enum logic [2:0] {
    AF_RELU    = 3'd0,
    AF_SIGMOID = 3'd1,
    AF_TANH    = 3'd2,
    AF_SWISH   = 3'd3,
    AF_GELU    = 3'd4,
    AF_SELU    = 3'd5,
    AF_SOFTMAX = 3'd6,
    AF_RSVD    = 3'd7   // behaves as ReLU
  } af_sel_e;

  // Linear CORDIC modes.
  typedef enum logic {
    LIN_LV = 1'b0,      // z <- y / x
    LIN_LR = 1'b1       // y <- y + x * z
  } lin_mode_e;

  // Iteration counts per precision.
  localparam int unsigned HYP_ITER_16 = 16;
  localparam int unsigned HYP_ITER_8  = 7;
  localparam int unsigned LIN_ITER_16 = 15;
  localparam int unsigned LIN_ITER_8  = 7;

  // 1/K_h in Q7.16 for the two hyperbolic schedules: the start value of x so
  // that x and y end as cosh z and sinh z without post-scaling.
  localparam cword_t HYP_INV_K_16 = 24'sd79135;  // 1.2074971
  localparam cword_t HYP_INV_K_8  = 24'sd79131;  // 1.2074479

  // Default activation constants, Q3.12.
  localparam data_t DEF_T            = 16'sd3486;  // 0.851 : GELU 0.5x(1+tanh(0.851x)) = x*sigmoid(1.702x)
  localparam data_t DEF_BETA         = 16'sd4096;  // 1.0   : Swish x*sigmoid(beta*x)
  localparam data_t DEF_LAMBDA       = 16'sd4304;  // 1.0507 : SELU lambda
  localparam data_t DEF_LAMBDA_ALPHA = 16'sd7201;  // 1.7581 : SELU lambda*alpha

  // Shift amount of hyperbolic step k (repeats at 4 and 13).
  function automatic logic [4:0] hyp_shift(input logic [4:0] k);
    if (k < 5'd4)       return k + 5'd1;
    else if (k < 5'd14) return k;
    else                return k - 5'd1;
  endfunction

  // atanh(2^-i) in Q7.16, i = 1..16.
  function automatic cword_t atanh_q16(input logic [4:0] i);
    case (i)
      5'd1:    return 24'sd35999;
      5'd2:    return 24'sd16739;
      5'd3:    return 24'sd8235;
      5'd4:    return 24'sd4101;
      5'd5:    return 24'sd2049;
      5'd6:    return 24'sd1024;
      5'd7:    return 24'sd512;
      5'd8:    return 24'sd256;
      5'd9:    return 24'sd128;
      5'd10:   return 24'sd64;
      5'd11:   return 24'sd32;
      5'd12:   return 24'sd16;
      5'd13:   return 24'sd8;
      5'd14:   return 24'sd4;
      5'd15:   return 24'sd2;
      5'd16:   return 24'sd1;
      default: return 24'sd0;
    endcase
  endfunction

  // External (Q3.12 or Q3.4 in the low byte) -> internal Q7.16.
  function automatic cword_t ext_to_int(input data_t d, input logic prec16);
    if (prec16) return cword_t'(d) <<< (CFRAC - DATA_FRAC);
    else        return cword_t'($signed(d[7:0])) <<< (CFRAC - 4);
  endfunction

  // Internal Q7.16 -> external, rounded to nearest and saturated.
  function automatic data_t int_to_ext(input cword_t v, input logic prec16);
    logic signed [CW:0] r;
    if (prec16) begin
      r = ($signed({v[CW-1], v}) + (CW+1)'(1 <<< (CFRAC-DATA_FRAC-1))) >>> (CFRAC - DATA_FRAC);
      if (r > (CW+1)'(32767))       return 16'sh7fff;
      else if (r < -(CW+1)'(32768)) return 16'sh8000;
      else                          return data_t'(r);
    end else begin
      r = ($signed({v[CW-1], v}) + (CW+1)'(1 <<< (CFRAC-4-1))) >>> (CFRAC - 4);
      if (r > (CW+1)'(127))         return 16'sh007f;
      else if (r < -(CW+1)'(128))   return 16'shff80;
      else                          return data_t'(r);
    end
  endfunction

endpackage
