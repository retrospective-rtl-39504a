// neuric -- NEURIC neuron engine: CORDIC multiply-accumulate followed by the
// DA-VINCI activation core.
//
// The multiply-accumulate runs on a linear CORDIC in rotation (LR) mode:
// starting from y = accumulator, x = input and z = weight, the CORDIC ends
// with y = accumulator + input*weight (Eq. (1) with m = 0), so no hardware
// multiplier is needed for the MAC. When the dot product is complete the
// accumulator, saturated to the external format, is handed to da_vinci_af
// together with the selected activation. The activation input can instead
// come from ext_data (act_src_ext = 1), which lets an outside controller
// stream a SoftMax vector through this neuron's activation core.
// The paper describes NEURIC as "reconfigurable 8/16-bit precision MAC + AF"
// built on an iterative CORDIC; the handshake, the accumulator width (Q7.16)
// and the external SoftMax input are this design's choices. The 8/16-bit
// precision changes the number format and the iteration counts; operands are
// not packed two per word.
//
// Interface / timing:
//   clear       : zero the accumulator (ignored while a MAC is in flight).
//   mac_valid/mac_ready, x_in, w_in : one product per handshake; a MAC is
//                 accepted every N+2 cycles (N = 15 at 16 bit, 7 at 8 bit).
//   act_valid/act_ready, act_last, act_src_ext, ext_data : start the
//                 activation of the accumulator (or of ext_data);
//                 act_ready is low while a MAC is in flight or the
//                 activation core is busy.
//   out_valid/out_data/out_last/sfm_trunc : from da_vinci_af.
//   acc_out     : the accumulator in the external format (saturated).
module neuric
  import davinci_pkg::*;
#(
  parameter int unsigned SFM_DEPTH = 16
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    prec16,
  input  af_sel_e sel_af,
  input  data_t   cfg_t,
  input  data_t   cfg_beta,
  input  data_t   cfg_lambda,
  input  data_t   cfg_lambda_alpha,
  input  logic    clear,
  input  logic    mac_valid,
  output logic    mac_ready,
  input  data_t   x_in,
  input  data_t   w_in,
  input  logic    act_valid,
  output logic    act_ready,
  input  logic    act_last,
  input  logic    act_src_ext,
  input  data_t   ext_data,
  output logic    out_valid,
  output data_t   out_data,
  output logic    out_last,
  output logic    sfm_trunc,
  output data_t   acc_out
);

  cword_t acc_q, mac_y, mac_z_unused;
  logic   mac_busy_q, mac_start, lin_busy_unused, lin_done;
  logic   af_in_ready;

  assign mac_ready = !mac_busy_q;
  assign mac_start = mac_valid && mac_ready;

  lin_cordic #(.W(CW), .FRAC(CFRAC)) u_mac (
    .clk, .rst_n, .start(mac_start), .mode(LIN_LR), .prec16,
    .x_in(ext_to_int(x_in, prec16)), .y_in(acc_q), .z_in(ext_to_int(w_in, prec16)),
    .busy(lin_busy_unused), .done(lin_done), .y_out(mac_y), .z_out(mac_z_unused)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q      <= '0;
      mac_busy_q <= 1'b0;
    end else begin
      if (mac_start) mac_busy_q <= 1'b1;
      if (lin_done) begin
        acc_q      <= mac_y;
        mac_busy_q <= 1'b0;
      end else if (clear && !mac_busy_q) begin
        acc_q <= '0;
      end
    end
  end

  assign acc_out   = int_to_ext(acc_q, prec16);
  assign act_ready = af_in_ready && !mac_busy_q;

  da_vinci_af #(.SFM_DEPTH(SFM_DEPTH)) u_af (
    .clk, .rst_n, .sel_af, .prec16,
    .cfg_t, .cfg_beta, .cfg_lambda, .cfg_lambda_alpha,
    .in_valid(act_valid && !mac_busy_q), .in_ready(af_in_ready),
    .in_data(act_src_ext ? ext_data : acc_out), .in_last(act_last),
    .out_valid, .out_data, .out_last, .sfm_trunc
  );

  a_no_mac_during_act: assert property (@(posedge clk) disable iff (!rst_n) mac_start |-> !(act_valid && act_ready));

endmodule
