// vector_engine -- layer-multiplexed vector engine built from NEURIC lanes
// (Fig. 4 of the source paper).
//
// NUM_NEURIC identical lanes, each a NEURIC (CORDIC multiply-accumulate plus
// the DA-VINCI activation core) with its own input and weight register, run
// fully connected layers in lockstep. The ifmap memory (N_BANKS x 1 KB)
// holds the input vector, broadcast one word per step to every lane, and the
// layer outputs written back for the next layer; the kernel memory (N_BANKS
// x 1 KB, bank j for lane j) holds the weights. The data-flow controller
// sequences layers, passes of NUM_NEURIC neurons, MAC steps, activation,
// SoftMax and write-back; the configuration and status registers hold the
// layer descriptors. Batch-norm and max-pooling are off chip (Fig. 4): the
// outputs leave on the ofmap stream for them.
// 64 lanes and 1 KB banks follow the paper; N_BANKS = NUM_NEURIC, the host
// ports, the register map and all timing are this design's choices.
//
// Host interface (all synchronous to clock, active-low reset):
//   ifmaps : if_we, if_addr, if_wdata  -- write one ifmap word (flat address)
//   kernel : k_we, k_bank, k_addr, k_wdata -- write one weight word
//   config : cfg_we, cfg_addr, cfg_wdata, cfg_rdata (map in ve_pkg)
//   exec_en (rising edge starts a run), exec_finish (high when done)
//   ofmaps : of_valid, of_addr, of_data, of_layer -- one output per cycle
// Memory writes from the host are dropped while a run is in progress.
// Numbers are Q3.12 (16-bit mode) or Q3.4 in the low byte (8-bit mode).
// Lint note: reset_n is an asynchronous reset everywhere in the logic; the
// lint report of it as also "synchronous" comes only from the assertions'
// disable iff clauses, which are not hardware.
module vector_engine
  import davinci_pkg::*;
  import ve_pkg::*;
#(
  parameter int unsigned NUM_NEURIC = 64,
  parameter int unsigned BANK_WORDS = 512,
  parameter int unsigned MAX_LAYERS = 4,
  parameter int unsigned SFM_DEPTH  = 16,
  localparam int unsigned N_BANKS = NUM_NEURIC,
  localparam int unsigned KAW = $clog2(BANK_WORDS),
  localparam int unsigned BAW = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  localparam int unsigned IAW = $clog2(N_BANKS * BANK_WORDS)
) (
  input  logic            clock,
  input  logic            reset_n,
  // ifmaps
  input  logic            if_we,
  input  logic [IAW-1:0]  if_addr,
  input  data_t           if_wdata,
  // kernel
  input  logic            k_we,
  input  logic [BAW-1:0]  k_bank,
  input  logic [KAW-1:0]  k_addr,
  input  data_t           k_wdata,
  // configuration and status
  input  logic            cfg_we,
  input  logic [7:0]      cfg_addr,
  input  logic [31:0]     cfg_wdata,
  output logic [31:0]     cfg_rdata,
  // execution
  input  logic            exec_en,
  output logic            exec_finish,
  // ofmaps
  output logic            of_valid,
  output logic [IAW-1:0]  of_addr,
  output data_t           of_data,
  output logic [3:0]      of_layer
);

  logic        clk, rst_n;
  assign clk   = clock;
  assign rst_n = reset_n;

  // Configuration.
  logic        prec16;
  logic [3:0]  num_layers;
  data_t       cfg_t, cfg_beta, cfg_lambda, cfg_lambda_alpha;
  layer_desc_t layers [MAX_LAYERS];
  status_t     status;
  logic [31:0] cycles;
  logic        busy, sfm_len_err, host_drop, host_drop_seen;

  // Memory.
  logic            e_if_re, e_if_we, e_k_re;
  logic [IAW-1:0]  e_if_addr;
  logic [KAW-1:0]  e_k_addr;
  data_t           e_if_wdata, e_if_rdata;
  logic [N_BANKS-1:0][DATA_W-1:0] e_k_rdata;

  // Lanes.
  af_sel_e               lane_sel_af;
  logic [NUM_NEURIC-1:0] lane_active, lane_mac_ready, lane_act_ready;
  // Only lane 0 runs SoftMax, so only its out_last is used; the controller
  // never sends it more than SFM_DEPTH elements, so sfm_trunc stays low.
  logic [NUM_NEURIC-1:0] lane_out_valid, lane_out_last, lane_trunc_unused;
  logic                  lane_clear, lane_load, lane_mac, lane_act;
  data_t                 lane_out_data [NUM_NEURIC];
  data_t                 lane_acc [NUM_NEURIC];
  logic                  sfm_phase, sfm_valid, sfm_last;
  data_t                 sfm_data;

  cfg_status_regs #(.MAX_LAYERS(MAX_LAYERS)) u_cfg (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .prec16, .num_layers, .cfg_t, .cfg_beta, .cfg_lambda, .cfg_lambda_alpha,
    .layers, .status, .cycles
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         host_drop_seen <= 1'b0;
    else if (host_drop) host_drop_seen <= 1'b1;
    else if (exec_en && !busy) host_drop_seen <= 1'b0;
  end

  assign status = '{sfm_len_err: sfm_len_err, host_drop: host_drop_seen,
                    busy: busy, done: exec_finish};

  mmu #(.N_BANKS(N_BANKS), .BANK_WORDS(BANK_WORDS), .W(DATA_W)) u_mmu (
    .clk, .rst_n, .eng_own(busy),
    .h_if_we(if_we), .h_if_addr(if_addr), .h_if_wdata(if_wdata),
    .h_k_we(k_we), .h_k_bank(k_bank), .h_k_addr(k_addr), .h_k_wdata(k_wdata),
    .host_drop,
    .e_if_re, .e_if_we, .e_if_addr, .e_if_wdata(e_if_wdata), .e_if_rdata(e_if_rdata),
    .e_k_re, .e_k_addr, .e_k_rdata
  );

  dataflow_ctrl #(
    .NUM_NEURIC(NUM_NEURIC), .BANK_WORDS(BANK_WORDS), .N_BANKS(N_BANKS),
    .MAX_LAYERS(MAX_LAYERS), .SFM_DEPTH(SFM_DEPTH)
  ) u_dfc (
    .clk, .rst_n, .exec_en, .exec_finish, .busy, .sfm_len_err, .cycles,
    .num_layers, .layers,
    .e_if_re, .e_if_we, .e_if_addr, .e_if_wdata, .e_if_rdata, .e_k_re, .e_k_addr,
    .lane_sel_af, .lane_active, .lane_clear, .lane_load, .lane_mac, .lane_act,
    .all_mac_ready(&(lane_mac_ready | ~lane_active)),
    .all_act_ready(&(lane_act_ready | ~lane_active)),
    .lane_out_valid, .lane_out_data, .lane_acc,
    .sfm_phase, .sfm_valid, .sfm_last, .sfm_data,
    .lane0_act_ready(lane_act_ready[0]), .lane0_out_last(lane_out_last[0]),
    .of_valid, .of_addr, .of_data, .of_layer
  );

  for (genvar j = 0; j < NUM_NEURIC; j++) begin : g_lane
    data_t in_reg, w_reg;

    // Input register j and weight register j of Fig. 4.
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        in_reg <= '0;
        w_reg  <= '0;
      end else if (lane_load) begin
        in_reg <= e_if_rdata;
        w_reg  <= e_k_rdata[j];
      end
    end

    neuric #(.SFM_DEPTH(SFM_DEPTH)) u_neuric (
      .clk, .rst_n, .prec16, .sel_af(lane_sel_af),
      .cfg_t, .cfg_beta, .cfg_lambda, .cfg_lambda_alpha,
      .clear(lane_clear),
      .mac_valid(lane_mac && lane_active[j]), .mac_ready(lane_mac_ready[j]),
      .x_in(in_reg), .w_in(w_reg),
      .act_valid((lane_act && lane_active[j]) || (j == 0 && sfm_valid)),
      .act_ready(lane_act_ready[j]),
      .act_last(j == 0 && sfm_last),
      .act_src_ext(j == 0 && sfm_phase),
      .ext_data(sfm_data),
      .out_valid(lane_out_valid[j]), .out_data(lane_out_data[j]),
      .out_last(lane_out_last[j]), .sfm_trunc(lane_trunc_unused[j]),
      .acc_out(lane_acc[j])
    );
  end

endmodule
