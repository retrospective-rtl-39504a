// ve_pkg -- types and register map of the layer-multiplexed vector engine.
//
// A layer descriptor tells the data-flow controller how to run one fully
// connected layer on the NEURIC array: n_in inputs read from the ifmap
// memory at in_base, n_out neurons whose weights sit in the kernel banks
// from k_base on (lane j of pass p reads k_base + p*n_in + i of bank j), and
// outputs written back to the ifmap memory at out_base so that a following
// layer can read them (layer reuse). The paper shows the blocks of Fig. 4
// but not their registers; this map is this design's own.
package ve_pkg;

  import davinci_pkg::*;

  typedef struct packed {
    logic [15:0] n_in;
    logic [15:0] n_out;
    logic [15:0] in_base;
    logic [15:0] out_base;
    logic [15:0] k_base;
    af_sel_e     sel_af;
  } layer_desc_t;

  // Register word addresses.
  localparam logic [7:0] REG_CTRL         = 8'h00;  // [0] prec16
  localparam logic [7:0] REG_NUM_LAYERS   = 8'h01;
  localparam logic [7:0] REG_T            = 8'h02;
  localparam logic [7:0] REG_BETA         = 8'h03;
  localparam logic [7:0] REG_LAMBDA       = 8'h04;
  localparam logic [7:0] REG_LAMBDA_ALPHA = 8'h05;
  localparam logic [7:0] REG_STATUS       = 8'h08;  // RO
  localparam logic [7:0] REG_CYCLES       = 8'h09;  // RO
  localparam logic [7:0] REG_LAYER0       = 8'h10;  // + 8*layer + field
  localparam logic [2:0] FLD_N_IN     = 3'd0;
  localparam logic [2:0] FLD_N_OUT    = 3'd1;
  localparam logic [2:0] FLD_IN_BASE  = 3'd2;
  localparam logic [2:0] FLD_OUT_BASE = 3'd3;
  localparam logic [2:0] FLD_K_BASE   = 3'd4;
  localparam logic [2:0] FLD_SEL_AF   = 3'd5;

  // STATUS bits.
  typedef struct packed {
    logic sfm_len_err;   // a SoftMax layer longer than the FIFO was cut
    logic host_drop;     // a host memory write arrived while running
    logic busy;
    logic done;
  } status_t;

endpackage
