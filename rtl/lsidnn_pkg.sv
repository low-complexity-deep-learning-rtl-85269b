// lsidnn_pkg: shared constants and types of the LSiDNN channel-estimation core.
//
// The frame geometry (72 sub-carriers, 14 OFDM symbols, 24 pilot sub-carriers
// on 2 pilot symbols) and the hidden-layer size of 48 are the values of the
// published LSiDNN-48 configuration. The fixed-point format (26,8) -- 26 bits,
// 8 integer bits including sign, 18 fraction bits -- is the word length that
// was found to match single-precision accuracy for this network. The encoding
// of the parameter-load selector and the controller state type are choices of
// this implementation.
package lsidnn_pkg;

  // Fixed-point word: (W, I) = (26, 8)
  localparam int unsigned DW_DEF   = 26;
  localparam int unsigned FRAC_DEF = 18;

  // Frame geometry
  localparam int unsigned N_F_DEF   = 72;           // sub-carriers per OFDM symbol
  localparam int unsigned N_S_DEF   = 14;           // OFDM symbols per frame
  localparam int unsigned N_FP_DEF  = 24;           // pilot sub-carriers per pilot symbol
  localparam int unsigned N_SP_DEF  = 2;            // pilot symbols per frame
  localparam int unsigned N_HID_DEF = 48;           // hidden neurons (LSiDNN 48)

  // Frame sequencer states; S0..S3 follow the four-state chain of the design.
  typedef enum logic [1:0] {
    ST_S0 = 2'd0,   // idle, waiting for the first received pilot
    ST_S1 = 2'd1,   // receiving pilots, LS estimation and C->R concatenation
    ST_S2 = 2'd2,   // DNN: hidden layer, then output layer
    ST_S3 = 2'd3    // R->C recombination and streaming of the estimates
  } state_e;

  // Target memory of a parameter-port write
  typedef enum logic [2:0] {
    PRM_W1  = 3'd0, // hidden-layer weight: row = neuron, col = input
    PRM_B1  = 3'd1, // hidden-layer bias:   row = neuron
    PRM_W2  = 3'd2, // output-layer weight: row = neuron, col = input
    PRM_B2  = 3'd3, // output-layer bias:   row = neuron
    PRM_REF = 3'd4  // reference pilot:     row = pilot index, data = {im, re}
  } prm_sel_e;

endpackage
