// lin_cordic -- iterative linear CORDIC (m = 0 in Eq. (1)), two modes.
//
//   LV (linear vectoring, the "Division" unit of Fig. 1):
//       start x = q, y = p, z = 0; d = +1 when y and x have the same sign,
//       y -= d*x*2^-i, z += d*2^-i, i = 0..N-1  ->  z_out = p/q, |p/q| < 2.
//   LR (linear rotation, used for the NEURIC multiply-accumulate):
//       start x, y = accumulator, z = multiplier; d = sign(z),
//       y += d*x*2^-i, z -= d*2^-i, i = -2..N-3  ->  y_out = y + x*z,
//       |z| <= 7.968 as quoted in the paper for LR mode.
// N = 15 in 16-bit mode and 7 in 8-bit mode; the last step leaves a residual
// below 2^-12 (16-bit) or 2^-4 (8-bit) in z, i.e. an error below |x| times that. The step counts and the LV start index (0, so that
// the GELU quotient 1+tanh can reach 2) are this design's choices; the paper
// quotes an LV range of [-1, 1].
//
// Interface / timing: pulse start with the operands (sampled at the next
// edge); the N steps take the N following edges, so done is high in the
// (N+1)th cycle after the start cycle, and y_out/z_out hold until the next start. start while busy is
// ignored.
module lin_cordic
  import davinci_pkg::*;
#(
  parameter int unsigned W    = CW,
  parameter int unsigned FRAC = CFRAC
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  lin_mode_e           mode,
  input  logic                prec16,
  input  logic signed [W-1:0] x_in,
  input  logic signed [W-1:0] y_in,
  input  logic signed [W-1:0] z_in,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] y_out,
  output logic signed [W-1:0] z_out
);

  logic signed [W-1:0] x_q, y_q, z_q;
  lin_mode_e           mode_q;
  logic [4:0]          k_q, last_q;
  logic signed [W-1:0] xs, e_i, y_nxt, z_nxt;
  logic                d_pos;

  // Step k: LV uses i = k, LR uses i = k-2 (x shifted left for i < 0).
  always_comb begin
    if (mode_q == LIN_LR) begin
      if (k_q < 5'd2) begin
        xs  = x_q <<< (5'd2 - k_q);
        e_i = W'(1) <<< (FRAC + 2 - int'(k_q));
      end else begin
        xs  = x_q >>> (k_q - 5'd2);
        e_i = W'(1) <<< (FRAC + 2 - int'(k_q));
      end
      d_pos = !z_q[W-1];
      y_nxt = d_pos ? y_q + xs  : y_q - xs;
      z_nxt = d_pos ? z_q - e_i : z_q + e_i;
    end else begin
      xs    = x_q >>> k_q;
      e_i   = W'(1) <<< (FRAC - int'(k_q));
      d_pos = (y_q[W-1] == x_q[W-1]);
      y_nxt = d_pos ? y_q - xs  : y_q + xs;
      z_nxt = d_pos ? z_q + e_i : z_q - e_i;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q    <= '0;
      y_q    <= '0;
      z_q    <= '0;
      mode_q <= LIN_LV;
      k_q    <= '0;
      last_q <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          x_q    <= x_in;
          y_q    <= y_in;
          z_q    <= (mode == LIN_LV) ? '0 : z_in;
          mode_q <= mode;
          k_q    <= '0;
          last_q <= prec16 ? 5'(LIN_ITER_16 - 1) : 5'(LIN_ITER_8 - 1);
          busy   <= 1'b1;
        end
      end else begin
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

  assign y_out = y_q;
  assign z_out = z_q;

endmodule
