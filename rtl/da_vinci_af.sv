// da_vinci_af -- DA-VINCI runtime-configurable activation-function core.
//
// One hyperbolic CORDIC (sinh/cosh, hence e^x = sinh + cosh) and one linear
// CORDIC divider are shared by seven activation functions, chosen per
// operand by sel_af (Fig. 1 of the source paper):
//   ReLU    : max(x,0) through the sign mux and buffer, no CORDIC
//   Sigmoid : e^x / (1 + e^x)                       p = e^x,  q = 1 + e^x
//   Tanh    : sinh x / cosh x                       p = sinh, q = cosh
//   Swish   : x * sigmoid(beta*x)                   multiplier 1 forms beta*x
//   GELU    : (x/2) * e^u / cosh u = (x/2)(1+tanh u), u = t*x (multiplier 1)
//   SELU    : x >= 0 : lambda*x ; x < 0 : lambda*alpha*(e^x - 1), the HOAA
//             adder forming e^x - 1
//   SoftMax : e^xi are pushed into the FIFO and summed (adder with feedback);
//             after the last element each FIFO entry is divided by the sum.
// The datapath and the mux sources follow Fig. 1. This design's choices:
// the sel_af encoding (davinci_pkg), the number formats, the GELU form
// (the figure prints no x^3 term, so the cubic of the tanh formula is
// dropped), that the constant "alpha" operand of multiplier 2 is lambda for
// x >= 0 and lambda*alpha for x < 0, and the stream handshake below.
// Arguments of the hyperbolic CORDIC must lie in [-1.118, 1.118] (inputs are
// expected normalised to [-1, 1] as in the paper).
//
// Interface: in_valid/in_ready handshake, in_data in Q3.12 (prec16 = 1) or
// Q3.4 in bits [7:0] (prec16 = 0); sel_af and prec16 are sampled with each
// accepted operand. in_last closes a SoftMax vector. out_valid pulses for one
// cycle with out_data in the same format (sign-extended in 8-bit mode) and,
// for SoftMax, out_last on the final element. There is no output
// back-pressure. sfm_trunc pulses when a SoftMax vector filled the FIFO
// before in_last; that vector is closed early.
// Timing: out_valid is high in cycle L after the cycle that accepted the
// operand, with Nh/Nl the hyperbolic/linear step counts (16/15 at 16 bit,
// 7/7 at 8 bit): ReLU L = 1; SELU x >= 0 L = 2; SELU x < 0 L = Nh+2;
// Sigmoid, Tanh, Swish, GELU L = Nh+Nl+3. SoftMax: an element can be
// accepted every Nh+2 cycles; the first output comes Nh+Nl+4 cycles after
// the last element was accepted, the others every Nl+2 cycles.
module da_vinci_af
  import davinci_pkg::*;
#(
  parameter int unsigned SFM_DEPTH = 16
) (
  input  logic    clk,
  input  logic    rst_n,
  input  af_sel_e sel_af,
  input  logic    prec16,
  input  data_t   cfg_t,
  input  data_t   cfg_beta,
  input  data_t   cfg_lambda,
  input  data_t   cfg_lambda_alpha,
  input  logic    in_valid,
  output logic    in_ready,
  input  data_t   in_data,
  input  logic    in_last,
  output logic    out_valid,
  output data_t   out_data,
  output logic    out_last,
  output logic    sfm_trunc
);

  typedef enum logic [2:0] {S_IDLE, S_HYP, S_LIN, S_MUL2, S_SFM, S_SFM_WAIT} state_e;

  state_e  state;
  af_sel_e sel_q;
  logic    prec_q, last_q, neg_q;
  cword_t  x_q;      // operand, Q7.16
  cword_t  acc_q;    // SoftMax running sum
  data_t   res_q;
  logic    res_relu_q;

  // Accepted operand, both formats.
  cword_t  x_in_int;
  data_t   x_in_sx;
  logic    accept;

  // Multiplier 1 (t / beta scaling) and the hyperbolic argument mux (sel_rs).
  cword_t  mul1_b, mul1_y, hyp_arg;
  logic    hyp_start, hyp_busy, hyp_done;
  cword_t  cosh_v, sinh_v, exp_v, one_p_exp;

  // Linear CORDIC operands (sel_sfm / sel_tan / sel_slg_sfm muxes).
  logic    lin_start, lin_busy, lin_done;
  cword_t  lin_p, lin_q, lin_unused_y, quot;

  // HOAA adder and multiplier 2 (sel_sw / sel_gs muxes).
  cword_t  hoaa_sum, mul2_a, mul2_b, mul2_y, alpha_v;

  // FIFO.
  logic    fifo_push, fifo_pop, fifo_full, fifo_empty;
  cword_t  fifo_dout;
  logic [$clog2(SFM_DEPTH+1)-1:0] fifo_count;

  logic    relu_en;
  data_t   relu_y;

  localparam cword_t ONE     = cword_t'(1) <<< CFRAC;
  localparam cword_t NEG_ONE = -(cword_t'(1) <<< CFRAC);

  assign in_ready = (state == S_IDLE);
  assign accept   = in_valid && in_ready;
  assign x_in_int = ext_to_int(in_data, prec16);
  assign x_in_sx  = prec16 ? in_data : data_t'($signed(in_data[7:0]));

  // ---------------------------------------------------------------- stage 1
  always_comb begin
    mul1_b = (sel_af == AF_GELU) ? ext_to_int(cfg_t, 1'b1) : ext_to_int(cfg_beta, 1'b1);
  end

  fxp_mul #(.W(CW), .FRAC(CFRAC)) u_mul1 (.a(x_in_int), .b(mul1_b), .y(mul1_y));

  assign hyp_arg   = (sel_af == AF_SWISH || sel_af == AF_GELU) ? mul1_y : x_in_int;
  assign hyp_start = accept && (sel_af == AF_SIGMOID || sel_af == AF_TANH ||
                                sel_af == AF_SWISH   || sel_af == AF_GELU ||
                                sel_af == AF_SOFTMAX ||
                                (sel_af == AF_SELU && x_in_int[CW-1]));

  hyp_cordic #(.W(CW), .FRAC(CFRAC)) u_hyp (
    .clk, .rst_n, .start(hyp_start), .prec16,
    .z_in(hyp_arg), .busy(hyp_busy), .done(hyp_done),
    .cosh_out(cosh_v), .sinh_out(sinh_v)
  );

  // e^x adder, and the second adder: 1 + e^x (Sigmoid/Swish) or sum + e^x.
  assign exp_v     = cosh_v + sinh_v;
  assign one_p_exp = ONE + exp_v;

  // ---------------------------------------------------------------- stage 2
  always_comb begin
    if (state == S_SFM) begin
      lin_p = fifo_dout;
      lin_q = acc_q;
    end else begin
      unique case (sel_q)
        AF_TANH: begin lin_p = sinh_v; lin_q = cosh_v;    end
        AF_GELU: begin lin_p = exp_v;  lin_q = cosh_v;    end
        default: begin lin_p = exp_v;  lin_q = one_p_exp; end
      endcase
    end
  end

  assign lin_start = (state == S_HYP && hyp_done &&
                      (sel_q == AF_SIGMOID || sel_q == AF_TANH ||
                       sel_q == AF_SWISH || sel_q == AF_GELU)) ||
                     (state == S_SFM && !fifo_empty);

  lin_cordic #(.W(CW), .FRAC(CFRAC)) u_lin (
    .clk, .rst_n, .start(lin_start), .mode(LIN_LV), .prec16(prec_q),
    .x_in(lin_q), .y_in(lin_p), .z_in('0),
    .busy(lin_busy), .done(lin_done), .y_out(lin_unused_y), .z_out(quot)
  );

  // ---------------------------------------------------------------- stage 3
  hoaa_adder #(.W(CW)) u_hoaa (.a(exp_v), .b(NEG_ONE), .sum(hoaa_sum));

  assign alpha_v = neg_q ? ext_to_int(cfg_lambda_alpha, 1'b1) : ext_to_int(cfg_lambda, 1'b1);

  always_comb begin
    if (sel_q == AF_SELU) begin
      mul2_a = neg_q ? hoaa_sum : x_q;
      mul2_b = alpha_v;
    end else begin
      mul2_a = (sel_q == AF_GELU) ? (x_q >>> 1) : x_q;
      mul2_b = quot;
    end
  end

  fxp_mul #(.W(CW), .FRAC(CFRAC)) u_mul2 (.a(mul2_a), .b(mul2_b), .y(mul2_y));

  // ReLU path.
  assign relu_en = accept && (sel_af == AF_RELU || sel_af == AF_RSVD);
  relu_buffer #(.W(DATA_W)) u_relu (.clk, .rst_n, .en(relu_en), .x(x_in_sx), .y(relu_y));

  // SoftMax FIFO.
  assign fifo_push = (state == S_HYP) && hyp_done && (sel_q == AF_SOFTMAX);
  assign fifo_pop  = (state == S_SFM) && !fifo_empty;

  sfm_fifo #(.W(CW), .DEPTH(SFM_DEPTH)) u_fifo (
    .clk, .rst_n, .push(fifo_push), .pop(fifo_pop), .din(exp_v),
    .dout(fifo_dout), .full(fifo_full), .empty(fifo_empty), .count(fifo_count)
  );

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      sel_q      <= AF_RELU;
      prec_q     <= 1'b1;
      last_q     <= 1'b0;
      neg_q      <= 1'b0;
      x_q        <= '0;
      acc_q      <= '0;
      res_q      <= '0;
      res_relu_q <= 1'b0;
      out_valid  <= 1'b0;
      out_last   <= 1'b0;
      sfm_trunc  <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      sfm_trunc <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (accept) begin
            sel_q  <= sel_af;
            prec_q <= prec16;
            last_q <= in_last;
            neg_q  <= x_in_int[CW-1];
            x_q    <= x_in_int;
            if (relu_en) begin
              out_valid  <= 1'b1;
              res_relu_q <= 1'b1;
            end else if (sel_af == AF_SELU && !x_in_int[CW-1]) begin
              // lambda * x needs no CORDIC, only multiplier 2.
              state <= S_MUL2;
            end else begin
              state <= S_HYP;
            end
          end
        end
        S_HYP: begin
          if (hyp_done) begin
            unique case (sel_q)
              AF_SELU: begin
                out_valid  <= 1'b1;
                res_relu_q <= 1'b0;
                res_q      <= int_to_ext(mul2_y, prec_q);
                state      <= S_IDLE;
              end
              AF_SOFTMAX: begin
                acc_q <= acc_q + exp_v;
                if (last_q) begin
                  state <= S_SFM;
                end else if (fifo_count == ($clog2(SFM_DEPTH+1))'(SFM_DEPTH-1)) begin
                  sfm_trunc <= 1'b1;
                  state     <= S_SFM;
                end else begin
                  state <= S_IDLE;
                end
              end
              default: state <= S_LIN;
            endcase
          end
        end
        S_LIN: begin
          if (lin_done) begin
            out_valid  <= 1'b1;
            res_relu_q <= 1'b0;
            res_q      <= int_to_ext((sel_q == AF_SWISH || sel_q == AF_GELU) ? mul2_y : quot, prec_q);
            state      <= S_IDLE;
          end
        end
        S_MUL2: begin
          out_valid  <= 1'b1;
          res_relu_q <= 1'b0;
          res_q      <= int_to_ext(mul2_y, prec_q);
          state      <= S_IDLE;
        end
        S_SFM: begin
          if (!fifo_empty) state <= S_SFM_WAIT;
        end
        S_SFM_WAIT: begin
          if (lin_done) begin
            out_valid  <= 1'b1;
            res_relu_q <= 1'b0;
            res_q      <= int_to_ext(quot, prec_q);
            if (fifo_empty) begin
              out_last <= 1'b1;
              acc_q    <= '0;
              state    <= S_IDLE;
            end else begin
              state <= S_SFM;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign out_data = res_relu_q ? relu_y : res_q;

  // Protocol rules.
  a_out_last_with_valid: assert property (@(posedge clk) disable iff (!rst_n) out_last |-> out_valid);
  a_hyp_start_idle:      assert property (@(posedge clk) disable iff (!rst_n) hyp_start |-> !hyp_busy);
  a_lin_start_idle:      assert property (@(posedge clk) disable iff (!rst_n) lin_start |-> !lin_busy);

  // A SoftMax vector is cut at the element that fills the FIFO, so a push
  // never meets a full FIFO.
  a_fifo_no_push_full: assert property (@(posedge clk) disable iff (!rst_n) !(fifo_push && fifo_full));

endmodule
