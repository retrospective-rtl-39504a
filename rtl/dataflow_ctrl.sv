// dataflow_ctrl -- data-flow controller and layer-reuse control of the
// vector engine (Fig. 4).
//
// One exec_en rising edge runs num_layers fully connected layers back to
// back on the same NEURIC lanes (layer multiplexing). For each layer the
// neurons are taken NUM_NEURIC at a time ("passes"). In a pass every input i
// is read once from the ifmap memory (broadcast) and, in parallel, word
// k_base + pass*n_in + i of every kernel bank; the words are latched into the
// lanes' input and weight registers and one CORDIC MAC is issued to all
// active lanes. After the last input the lanes' activations are started
// together and their results are written back to the ifmap memory at
// out_base + pass*NUM_NEURIC + lane, and streamed out on the ofmap port, one
// per cycle. Written-back outputs are the next layer's inputs when its
// in_base points at them (layer reuse).
// A SoftMax layer needs the whole output vector, which is spread over the
// lanes, so its passes write the raw accumulators back instead; the
// controller then reads them again and streams them through lane 0's
// activation core (its FIFO holds the exponentials), writing the
// normalised values over them and streaming them out. Only the first
// SFM_DEPTH outputs fit the FIFO: a longer SoftMax layer is normalised over
// its first SFM_DEPTH outputs and flagged in status (sfm_len_err).
// The paper names the controller and layer-reuse control only; this whole
// sequence is this design's reading of Fig. 4.
//
// Timing: a MAC step costs N+4 cycles (read, latch, issue, N+1 CORDIC
// cycles; N = 15 at 16 bit, 7 at 8 bit). exec_finish rises after the last
// write of the last layer and stays high until the next exec_en edge.
module dataflow_ctrl
  import davinci_pkg::*;
  import ve_pkg::*;
#(
  parameter int unsigned NUM_NEURIC = 64,
  parameter int unsigned BANK_WORDS = 512,
  parameter int unsigned N_BANKS    = 64,
  parameter int unsigned MAX_LAYERS = 4,
  parameter int unsigned SFM_DEPTH  = 16,
  localparam int unsigned KAW = $clog2(BANK_WORDS),
  localparam int unsigned IAW = $clog2(N_BANKS * BANK_WORDS)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        exec_en,
  output logic        exec_finish,
  output logic        busy,
  output logic        sfm_len_err,
  output logic [31:0] cycles,
  // configuration
  input  logic [3:0]  num_layers,
  input  layer_desc_t layers [MAX_LAYERS],
  // memory (engine side of the MMU)
  output logic            e_if_re,
  output logic            e_if_we,
  output logic [IAW-1:0]  e_if_addr,
  output data_t           e_if_wdata,
  input  data_t           e_if_rdata,
  output logic            e_k_re,
  output logic [KAW-1:0]  e_k_addr,
  // lanes
  output af_sel_e                   lane_sel_af,
  output logic [NUM_NEURIC-1:0]     lane_active,
  output logic                      lane_clear,
  output logic                      lane_load,
  output logic                      lane_mac,
  output logic                      lane_act,
  input  logic                      all_mac_ready,
  input  logic                      all_act_ready,
  input  logic [NUM_NEURIC-1:0]     lane_out_valid,
  input  data_t                     lane_out_data [NUM_NEURIC],
  input  data_t                     lane_acc [NUM_NEURIC],
  // SoftMax stream into lane 0
  output logic                      sfm_phase,
  output logic                      sfm_valid,
  output logic                      sfm_last,
  output data_t                     sfm_data,
  input  logic                      lane0_act_ready,
  input  logic                      lane0_out_last,
  // ofmap stream
  output logic            of_valid,
  output logic [IAW-1:0]  of_addr,
  output data_t           of_data,
  output logic [3:0]      of_layer
);

  typedef enum logic [3:0] {
    S_IDLE, S_LAYER, S_PASS, S_RD, S_LD, S_MAC, S_MAC_WAIT, S_ACT, S_ACT_WAIT,
    S_WB, S_SFM_RD, S_SFM_LD, S_SFM_FEED, S_SFM_COLLECT, S_NEXT_LAYER, S_DONE
  } state_e;

  localparam int unsigned LW = (NUM_NEURIC > 1) ? $clog2(NUM_NEURIC) : 1;

  state_e      state;
  logic        exec_q;
  localparam int unsigned LIW = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1;
  logic [3:0]  layer_q;
  layer_desc_t desc_q;
  logic [15:0] pass_q, i_q, k_q;
  logic [LW-1:0] j_q;
  logic [NUM_NEURIC-1:0] got_q;
  data_t       res_q [NUM_NEURIC];
  logic [16:0] pass_base;     // pass * NUM_NEURIC
  logic [16:0] remaining;     // neurons left from this pass on
  logic [15:0] n_sfm;
  logic        is_sfm;

  assign is_sfm    = (desc_q.sel_af == AF_SOFTMAX);
  assign pass_base = 17'(pass_q) * 17'(NUM_NEURIC);
  assign remaining = 17'(desc_q.n_out) - pass_base;
  assign n_sfm     = (desc_q.n_out > 16'(SFM_DEPTH)) ? 16'(SFM_DEPTH) : desc_q.n_out;

  for (genvar j = 0; j < NUM_NEURIC; j++) begin : g_act
    assign lane_active[j] = (remaining > 17'(j));
  end

  assign lane_sel_af = desc_q.sel_af;
  assign sfm_phase   = (state == S_SFM_RD) || (state == S_SFM_LD) ||
                       (state == S_SFM_FEED) || (state == S_SFM_COLLECT);

  // Memory and lane strobes.
  always_comb begin
    e_if_re    = 1'b0;
    e_if_we    = 1'b0;
    e_if_addr  = '0;
    e_if_wdata = '0;
    e_k_re     = 1'b0;
    e_k_addr   = '0;
    lane_clear = (state == S_PASS);
    lane_load  = (state == S_LD);
    lane_mac   = (state == S_MAC);
    lane_act   = (state == S_ACT) && !is_sfm && all_act_ready;
    sfm_valid  = (state == S_SFM_FEED) && lane0_act_ready;
    sfm_last   = (k_q == n_sfm - 16'd1);
    of_valid   = 1'b0;
    of_addr    = '0;
    of_data    = '0;
    unique case (state)
      S_RD: begin
        e_if_re   = 1'b1;
        e_if_addr = IAW'(desc_q.in_base + i_q);
        e_k_re    = 1'b1;
        e_k_addr  = KAW'(desc_q.k_base + pass_q * desc_q.n_in + i_q);
      end
      S_WB: begin
        e_if_we    = 1'b1;
        e_if_addr  = IAW'(17'(desc_q.out_base) + pass_base + 17'(j_q));
        e_if_wdata = res_q[j_q];
        of_valid   = !is_sfm;
        of_addr    = e_if_addr;
        of_data    = res_q[j_q];
      end
      S_SFM_RD: begin
        e_if_re   = 1'b1;
        e_if_addr = IAW'(desc_q.out_base + k_q);
      end
      S_SFM_COLLECT: begin
        e_if_we    = lane_out_valid[0];
        e_if_addr  = IAW'(desc_q.out_base + k_q);
        e_if_wdata = lane_out_data[0];
        of_valid   = lane_out_valid[0];
        of_addr    = e_if_addr;
        of_data    = lane_out_data[0];
      end
      default: ;
    endcase
  end

  assign of_layer = layer_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      exec_q      <= 1'b0;
      exec_finish <= 1'b0;
      busy        <= 1'b0;
      sfm_len_err <= 1'b0;
      cycles      <= '0;
      layer_q     <= '0;
      desc_q      <= '0;
      pass_q      <= '0;
      i_q         <= '0;
      k_q         <= '0;
      j_q         <= '0;
      got_q       <= '0;
      sfm_data    <= '0;
      for (int j = 0; j < NUM_NEURIC; j++) res_q[j] <= '0;
    end else begin
      exec_q <= exec_en;
      if (busy) cycles <= cycles + 32'd1;
      unique case (state)
        S_IDLE: begin
          if (exec_en && !exec_q) begin
            exec_finish <= 1'b0;
            busy        <= 1'b1;
            sfm_len_err <= 1'b0;
            cycles      <= '0;
            layer_q     <= '0;
            state       <= S_LAYER;
          end
        end
        S_LAYER: begin
          desc_q <= layers[LIW'(layer_q)];
          pass_q <= '0;
          state  <= S_PASS;
        end
        S_PASS: begin
          i_q   <= '0;
          state <= (desc_q.n_in == 16'd0) ? S_ACT : S_RD;
        end
        S_RD:  state <= S_LD;
        S_LD:  state <= S_MAC;
        S_MAC: state <= S_MAC_WAIT;
        S_MAC_WAIT: begin
          if (all_mac_ready) begin
            i_q   <= i_q + 16'd1;
            state <= (i_q + 16'd1 < desc_q.n_in) ? S_RD : S_ACT;
          end
        end
        S_ACT: begin
          j_q <= '0;
          if (is_sfm) begin
            for (int j = 0; j < NUM_NEURIC; j++) res_q[j] <= lane_acc[j];
            state <= S_WB;
          end else if (all_act_ready) begin
            got_q <= '0;
            state <= S_ACT_WAIT;
          end
        end
        S_ACT_WAIT: begin
          for (int j = 0; j < NUM_NEURIC; j++)
            if (lane_out_valid[j]) begin
              res_q[j] <= lane_out_data[j];
              got_q[j] <= 1'b1;
            end
          if (&(got_q | ~lane_active)) state <= S_WB;
        end
        S_WB: begin
          j_q <= j_q + LW'(1);
          if (32'(j_q) == NUM_NEURIC - 1 || !lane_active[j_q + LW'(1)]) begin
            pass_q <= pass_q + 16'd1;
            k_q    <= '0;
            if (remaining > 17'(NUM_NEURIC)) state <= S_PASS;
            else if (is_sfm) begin
              if (desc_q.n_out > 16'(SFM_DEPTH)) sfm_len_err <= 1'b1;
              state <= (desc_q.n_out == 16'd0) ? S_NEXT_LAYER : S_SFM_RD;
            end
            else state <= S_NEXT_LAYER;
          end
        end
        S_SFM_RD: state <= S_SFM_LD;
        S_SFM_LD: begin
          sfm_data <= e_if_rdata;
          state    <= S_SFM_FEED;
        end
        S_SFM_FEED: begin
          if (lane0_act_ready) begin
            if (k_q == n_sfm - 16'd1) begin
              k_q   <= '0;
              state <= S_SFM_COLLECT;
            end else begin
              k_q   <= k_q + 16'd1;
              state <= S_SFM_RD;
            end
          end
        end
        S_SFM_COLLECT: begin
          if (lane_out_valid[0]) begin
            k_q <= k_q + 16'd1;
            if (lane0_out_last) state <= S_NEXT_LAYER;
          end
        end
        S_NEXT_LAYER: begin
          layer_q <= layer_q + 4'd1;
          state   <= (layer_q + 4'd1 < num_layers && 32'(layer_q) + 1 < MAX_LAYERS) ? S_LAYER : S_DONE;
        end
        S_DONE: begin
          busy        <= 1'b0;
          exec_finish <= 1'b1;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_mem_op: assert property (@(posedge clk) disable iff (!rst_n) !(e_if_re && e_if_we));

endmodule
