// nn_pkg: types and network dimensions shared by the CNN3 / BCNN3 decision-scheme
// accelerators for a 60 GHz radio-over-fibre receiver.
//
// The network sizes are the ones printed with the network drawings: CNN with two
// 1-D convolutional layers (8 kernels of 1x3, then 16 kernels of 1x3, each followed
// by a pool of 2) and a fully-connected output layer; BCNN with a floating-point
// first layer (48 kernels of 1x5) and two binary layers (64 and 72 kernels of 1x5).
// The input window length (16 samples) and the number of output neurons (2, one
// on-off-keyed bit per decision) are this design's own choices, derived from the
// printed feature-map lengths and the modulation respectively.
package nn_pkg;

  // IEEE-754 single precision word
  typedef logic [31:0] fp32_t;

  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [22:0] frac;
  } fp32_fields_t;

  localparam fp32_t FP32_INF  = 32'h7f80_0000;

  // Input window and output layer
  localparam int unsigned WIN_LEN = 16;
  localparam int unsigned N_CLASS = 2;

  // CNN (two convolutional layers)
  localparam int unsigned CNN_L1_OUT = 8;
  localparam int unsigned CNN_L2_OUT = 16;
  localparam int unsigned CNN_KS     = 3;

  // BCNN (three convolutional layers)
  localparam int unsigned BCNN_L1_OUT = 48;
  localparam int unsigned BCNN_L2_OUT = 64;
  localparam int unsigned BCNN_L3_OUT = 72;
  localparam int unsigned BCNN_KS     = 5;

  // Leaky-ReLU negative slope 0.25 = 2^-LEAKY_SHIFT
  localparam int unsigned LEAKY_SHIFT = 2;

  // Accumulator width of the binary layers (signed)
  localparam int unsigned BIN_ACC_W = 10;

  // Network selector of the top level
  typedef enum logic {NET_CNN = 1'b0, NET_BCNN = 1'b1} net_sel_e;

  // Words needed to hold NBITS one-bit weights, 32 per word
  function automatic int unsigned bit_words(int unsigned nbits);
    return (nbits + 31) / 32;
  endfunction

endpackage
