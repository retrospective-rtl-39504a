// cfg_status_regs -- configuration and status registers of the vector engine
// (Fig. 4 "Config. & Status Reg." and "Design Parameters").
//
// A word-addressed register file written by the host (cfg_we, cfg_addr,
// cfg_wdata) and read combinationally (cfg_rdata). It holds the precision,
// the activation constants t, beta, lambda and lambda*alpha, the number of
// layers and up to MAX_LAYERS layer descriptors (map in ve_pkg). Writes are
// ignored while the engine is busy, so a run always sees one configuration.
// STATUS and CYCLES are read-only views of the controller's state. Reset
// values: 16-bit precision, one layer, the default constants of davinci_pkg,
// all descriptors zero. No register is wider than 16 bits, so cfg_wdata[31:16]
// is ignored. The register map is this design's own.
module cfg_status_regs
  import davinci_pkg::*;
  import ve_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [7:0]  cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic [31:0] cfg_rdata,
  // to the engine
  output logic        prec16,
  output logic [3:0]  num_layers,
  output data_t       cfg_t,
  output data_t       cfg_beta,
  output data_t       cfg_lambda,
  output data_t       cfg_lambda_alpha,
  output layer_desc_t layers [MAX_LAYERS],
  // from the engine
  input  status_t     status,
  input  logic [31:0] cycles
);

  localparam int unsigned LIW = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1;
  logic [4:0] lidx;
  logic [LIW-1:0] li;     // descriptor index, valid when is_layer
  logic [2:0] fld;
  logic       is_layer;

  assign lidx     = 5'(cfg_addr[7:3] - 5'd2);
  assign li       = LIW'(lidx);
  assign fld      = cfg_addr[2:0];
  assign is_layer = (cfg_addr >= REG_LAYER0) && (32'(lidx) < MAX_LAYERS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prec16           <= 1'b1;
      num_layers       <= 4'd1;
      cfg_t            <= DEF_T;
      cfg_beta         <= DEF_BETA;
      cfg_lambda       <= DEF_LAMBDA;
      cfg_lambda_alpha <= DEF_LAMBDA_ALPHA;
      for (int l = 0; l < MAX_LAYERS; l++) layers[l] <= '0;
    end else if (cfg_we && !status.busy) begin
      if (is_layer) begin
        unique case (fld)
          FLD_N_IN:     layers[li].n_in     <= cfg_wdata[15:0];
          FLD_N_OUT:    layers[li].n_out    <= cfg_wdata[15:0];
          FLD_IN_BASE:  layers[li].in_base  <= cfg_wdata[15:0];
          FLD_OUT_BASE: layers[li].out_base <= cfg_wdata[15:0];
          FLD_K_BASE:   layers[li].k_base   <= cfg_wdata[15:0];
          FLD_SEL_AF:   layers[li].sel_af   <= af_sel_e'(cfg_wdata[2:0]);
          default: ;
        endcase
      end else begin
        unique case (cfg_addr)
          REG_CTRL:         prec16           <= cfg_wdata[0];
          REG_NUM_LAYERS:   num_layers       <= cfg_wdata[3:0];
          REG_T:            cfg_t            <= cfg_wdata[15:0];
          REG_BETA:         cfg_beta         <= cfg_wdata[15:0];
          REG_LAMBDA:       cfg_lambda       <= cfg_wdata[15:0];
          REG_LAMBDA_ALPHA: cfg_lambda_alpha <= cfg_wdata[15:0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    cfg_rdata = '0;
    if (is_layer) begin
      unique case (fld)
        FLD_N_IN:     cfg_rdata = 32'(layers[li].n_in);
        FLD_N_OUT:    cfg_rdata = 32'(layers[li].n_out);
        FLD_IN_BASE:  cfg_rdata = 32'(layers[li].in_base);
        FLD_OUT_BASE: cfg_rdata = 32'(layers[li].out_base);
        FLD_K_BASE:   cfg_rdata = 32'(layers[li].k_base);
        FLD_SEL_AF:   cfg_rdata = 32'(layers[li].sel_af);
        default:      cfg_rdata = '0;
      endcase
    end else begin
      unique case (cfg_addr)
        REG_CTRL:         cfg_rdata = 32'(prec16);
        REG_NUM_LAYERS:   cfg_rdata = 32'(num_layers);
        REG_T:            cfg_rdata = 32'($unsigned(cfg_t));
        REG_BETA:         cfg_rdata = 32'($unsigned(cfg_beta));
        REG_LAMBDA:       cfg_rdata = 32'($unsigned(cfg_lambda));
        REG_LAMBDA_ALPHA: cfg_rdata = 32'($unsigned(cfg_lambda_alpha));
        REG_STATUS:       cfg_rdata = 32'(status);
        REG_CYCLES:       cfg_rdata = cycles;
        default:          cfg_rdata = '0;
      endcase
    end
  end

endmodule
