// snn_pkg: types and constants shared by the layer engine.
//
// Number formats used throughout the datapath:
//   weights      signed integers of W_BITS bits, symmetric range +/-(2^(W_BITS-1)-1)
//   traces Q,P,R unsigned fixed point, TR_W bits with TR_FRAC fractional bits
//   decays       unsigned fractions alpha/beta/gamma = value / 2^DECAY_FRAC
//   accumulators signed ACC_W bits, unit = weight LSB x trace LSB
// The widths other than the weight width are choices of this design; the paper
// sweeps the weight width from 2 to 12 bits and uses 8 bits as its reference.
package snn_pkg;

  localparam int unsigned W_BITS     = 8;   // weight precision (paper reference value)
  localparam int unsigned TR_W       = 16;  // trace width
  localparam int unsigned TR_FRAC    = 8;   // trace fractional bits (1.0 = 256)
  localparam int unsigned DECAY_FRAC = 8;   // decay constant fractional bits
  localparam int unsigned ACC_W      = 32;  // accumulator width
  localparam int unsigned M_W        = 16;  // stored (quantized) membrane width
  localparam int unsigned E_W        = 16;  // raw error width from the loss
  localparam int unsigned EQ_W       = 8;   // quantized error width
  localparam int unsigned SG_W       = 8;   // surrogate-gradient value width (255 = 1.0)
  localparam int unsigned DL_W       = EQ_W + SG_W + 1; // delta = eq * sg, signed
  localparam int unsigned G_W        = 16;  // quantized gradient width
  localparam int unsigned DIM_W      = 16;  // width of a feature-map dimension / index field

  // Connectivity encoding selected for the layer held in the engine
  typedef enum logic [0:0] {
    CONN_FUNC = 1'b0,   // functional encoding (convolution, computed connectivity)
    CONN_BMP  = 1'b1    // pointer-based bitmap (PB-BMP, fully connected / sparse)
  } conn_mode_e;

  // Access direction through the connectivity
  typedef enum logic [0:0] {
    DIR_FWD = 1'b0,     // presynaptic anchor -> postsynaptic targets (fan-out)
    DIR_BWD = 1'b1      // postsynaptic anchor -> presynaptic sources (fan-in, transposed)
  } dir_e;

  // Geometry of a convolutional layer for the functional generator
  typedef struct packed {
    logic [DIM_W-1:0] in_ch;
    logic [DIM_W-1:0] in_h;
    logic [DIM_W-1:0] in_w;
    logic [DIM_W-1:0] out_ch;
    logic [DIM_W-1:0] out_h;
    logic [DIM_W-1:0] out_w;
    logic [7:0]       k;       // kernel is k x k
  } conv_cfg_t;

  // Targets of the engine's configuration write bus
  typedef enum logic [1:0] {
    CFG_REG  = 2'd0,    // layer registers (see snn_layer)
    CFG_WMEM = 2'd1,    // synapse (weight) memory
    CFG_BMP  = 2'd2,    // PB-BMP bitmap row
    CFG_PTR  = 2'd3     // PB-BMP row pointer
  } cfg_target_e;

endpackage
