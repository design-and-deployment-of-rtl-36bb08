// dnn_pkg: sizes, number formats and coefficient types shared by the
// displaced-muon regression network.
//
// The network takes 29 features per muon track, normalises them, and feeds
// two identical three-layer perceptrons (10, 8 and 1 nodes) that estimate
// the transverse momentum (pT) and the transverse impact parameter (d0).
// The layer sizes follow the published model. The number formats below are
// this design's choice, since the published bit widths are not known:
//   data / activations  signed 16 bits, 8 fractional bits  (ap_fixed<16,8>)
//   weights / BN scale  signed 16 bits, 10 fractional bits (ap_fixed<16,6>)
//   accumulators        signed 32 bits, 18 fractional bits, wrapping
//   raw track features  signed 13 bits, 4 of them below the binary point
// The coefficient structs hold every trained constant of the stitched model.
package dnn_pkg;

  // Network shape (published model)
  localparam int N_IN  = 29;  // input features per track
  localparam int N_H1  = 10;  // first hidden layer, per branch
  localparam int N_H2  = 8;   // second hidden layer, per branch
  localparam int N_OUT = 1;   // output nodes, per branch

  // Number formats (design choice)
  localparam int DATA_W = 16;
  localparam int FRAC   = 8;
  localparam int W_W    = 16;
  localparam int W_FRAC = 10;
  localparam int ACC_W  = 32;
  localparam int RAW_W  = 13;
  localparam int RAW_FRAC = 4;   // raw feature LSB = 1/16 network unit

  // Output words
  localparam int OUT_W       = 8;
  localparam int PT_OUT_FRAC = 1;  // 0.5 GeV per LSB
  localparam int D0_OUT_FRAC = 1;  // 0.5 cm per LSB

  // Fixed latency of the whole wrapper, in clocks (83 ns at 120 MHz)
  localparam int NN_LATENCY = 10;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [W_W-1:0]    weight_t;
  typedef logic signed [RAW_W-1:0]  raw_t;

  // Coefficients of one branch (pT or d0)
  typedef struct packed {
    weight_t [N_H1-1:0][N_IN-1:0]  w1;
    data_t   [N_H1-1:0]            b1;
    weight_t [N_H2-1:0][N_H1-1:0]  w2;
    data_t   [N_H2-1:0]            b2;
    weight_t [N_OUT-1:0][N_H2-1:0] w3;
    data_t   [N_OUT-1:0]           b3;
  } branch_coef_t;

  // Coefficients of the stitched model
  typedef struct packed {
    weight_t [N_IN-1:0] bn_scale;  // gamma / sqrt(var + eps)
    data_t   [N_IN-1:0] bn_bias;   // beta - mean * scale
    branch_coef_t       pt;
    branch_coef_t       d0;
  } nn_coef_t;

  // Status flags reported next to each result
  typedef struct packed {
    logic in_sat;    // a raw feature did not fit the data format
    logic pt_lo;     // pT estimate was negative, reported as 0
    logic pt_hi;     // pT estimate saturated the output word
    logic d0_lo;     // d0 estimate was negative, reported as 0
    logic d0_hi;     // d0 estimate saturated the output word
  } nn_flags_t;

endpackage
