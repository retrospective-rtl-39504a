// hyp_cordic -- iterative hyperbolic-rotation (HR) CORDIC: sinh z and cosh z.
//
// Implements Eq. (1) with m = -1 (hyperbolic) in rotation mode, one
// pseudo-rotation per clock:
//   d = sign(z);  x += d*y*2^-i;  y += d*x*2^-i;  z -= d*atanh(2^-i)
// x starts at 1/K_h and y at 0, so x and y end as cosh(z0) and sinh(z0); their
// sum is e^z0, which the activation core forms outside this block. Shift
// sequence 1,2,3,4,4,5,...,13,13,14 (the repeats at 4 and 13 are required for
// hyperbolic convergence) gives the range |z0| <= 1.1182 quoted in the paper.
// 16 steps in 16-bit mode, the first 7 in 8-bit mode (the step counts are this
// design's choice; the paper says they come from a Pareto analysis).
//
// Interface / timing: pulse start with z_in (Q7.16); z_in and prec16 are
// sampled on that edge. The N steps (N = 16 or 7) take the following N
// edges, so done is high for one cycle, the (N+1)th after the start cycle, and cosh_out/sinh_out hold their value until the next start.
// start while busy is ignored.
module hyp_cordic
  import davinci_pkg::*;
#(
  parameter int unsigned W    = CW,
  parameter int unsigned FRAC = CFRAC
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                prec16,
  input  logic signed [W-1:0] z_in,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] cosh_out,
  output logic signed [W-1:0] sinh_out
);

  logic signed [W-1:0] x_q, y_q, z_q;
  logic [4:0]          k_q;      // step index
  logic [4:0]          last_q;   // index of the final step
  logic [4:0]          sh;
  logic signed [W-1:0] x_nxt, y_nxt, z_nxt, e_i;

  always_comb begin
    sh  = hyp_shift(k_q);
    e_i = W'(atanh_q16(sh) >>> (CFRAC - FRAC));
    if (!z_q[W-1]) begin
      x_nxt = x_q + (y_q >>> sh);
      y_nxt = y_q + (x_q >>> sh);
      z_nxt = z_q - e_i;
    end else begin
      x_nxt = x_q - (y_q >>> sh);
      y_nxt = y_q - (x_q >>> sh);
      z_nxt = z_q + e_i;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q    <= '0;
      y_q    <= '0;
      z_q    <= '0;
      k_q    <= '0;
      last_q <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          x_q    <= W'((prec16 ? HYP_INV_K_16 : HYP_INV_K_8) >>> (CFRAC - FRAC));
          y_q    <= '0;
          z_q    <= z_in;
          k_q    <= '0;
          last_q <= prec16 ? 5'(HYP_ITER_16 - 1) : 5'(HYP_ITER_8 - 1);
          busy   <= 1'b1;
        end
      end else begin
        x_q <= x_nxt;
        y_q <= y_nxt;
        z_q <= z_nxt;
        k_q <= k_q + 5'd1;
        if (k_q == last_q) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign cosh_out = x_q;
  assign sinh_out = y_q;

endmodule
