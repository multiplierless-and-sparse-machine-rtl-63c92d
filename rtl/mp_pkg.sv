// mp_pkg: shared constants and types of the margin-propagation (MP) classifier.
//
// All values live in the log-likelihood domain as signed fixed-point numbers.
// The word width DW = 9 follows the 9-bit fixed-point MP MLP whose decision
// boundary the design is meant to reproduce; the split into 4 fractional bits
// (LSB = 1/16, range -16 .. +15.9375) is this design's choice. The constant ONE
// is the value 1.0 used as the gamma of every output MP node, which forces the
// two differential outputs of a neuron to sum to one.
package mp_pkg;

  localparam int DW    = 9;   // datapath word width (9-bit fixed point)
  localparam int FRAC  = 4;   // fractional bits of a word (design choice)
  localparam int GUARD = 6;   // extra fractional bits of trainable perceptron weights
  localparam int MGUARD = 10; // extra fractional bits of trainable MLP weights

  typedef logic signed [DW-1:0] val_t;

  // Operation requested from the top level.
  typedef enum logic [2:0] {
    OP_PERC_INFER = 3'd0,   // perceptron inference
    OP_PERC_TRAIN = 3'd1,   // perceptron inference followed by a weight update
    OP_MLP        = 3'd2,   // MLP inference
    OP_MLP_TRAIN  = 3'd3,   // MLP inference followed by a weight update
    OP_SVM        = 3'd4    // SVM decision from supplied kernel values
  } op_e;

  // Parameter-store regions addressed by the configuration write port.
  typedef enum logic [3:0] {
    SEL_WIJ_P  = 4'd0,  // hidden weights w_ij+, index {j[7:0], i[7:0]}
    SEL_WIJ_N  = 4'd1,  // hidden weights w_ij-, index {j[7:0], i[7:0]}
    SEL_BJ_P   = 4'd2,  // hidden biases b_j+, index j
    SEL_BJ_N   = 4'd3,  // hidden biases b_j-, index j
    SEL_WJK_P  = 4'd4,  // output weights w_jk+, index j
    SEL_WJK_N  = 4'd5,  // output weights w_jk-, index j
    SEL_BK     = 4'd6,  // output biases: index 0 = b_k+, 1 = b_k-
    SEL_WS_P   = 4'd7,  // SVM weights w_s+, index s
    SEL_WS_N   = 4'd8,  // SVM weights w_s-, index s
    SEL_CTRL   = 4'd9,  // 0 gamma_perc, 1 gamma_j, 2 gamma_k, 3 gamma_svm, 4 eps_shift
    SEL_PW_P   = 4'd10, // perceptron w_i+, index i
    SEL_PW_N   = 4'd11, // perceptron w_i-, index i
    SEL_PB     = 4'd12  // perceptron biases: index 0 = b+, 1 = b-
  } cfg_sel_e;

  // Perceptron parameter classes for its own write port.
  typedef enum logic [1:0] {
    PSEL_W_P = 2'd0,
    PSEL_W_N = 2'd1,
    PSEL_B_P = 2'd2,
    PSEL_B_N = 2'd3
  } psel_e;

  // MLP parameter classes for the write port of mp_mlp_learn.
  typedef enum logic [2:0] {
    MSEL_WIJ_P = 3'd0,
    MSEL_WIJ_N = 3'd1,
    MSEL_BJ_P  = 3'd2,
    MSEL_BJ_N  = 3'd3,
    MSEL_WJK_P = 3'd4,
    MSEL_WJK_N = 3'd5,
    MSEL_BK_P  = 3'd6,
    MSEL_BK_N  = 3'd7
  } msel_e;

  // Three-valued sign of an error term, sign(p - y).
  typedef enum logic [1:0] {
    SGN_ZERO = 2'd0,
    SGN_POS  = 2'd1,
    SGN_NEG  = 2'd2
  } sgn_e;

  // Smallest r with 2**r >= v (v >= 1); the shift that stands in for 1/v.
  function automatic int unsigned ceil_log2(input int unsigned v);
    int unsigned r;
    r = 0;
    for (int k = 0; k < 16; k++)
      if ((32'd1 << k) < v) r = k + 1;
    return r;
  endfunction

endpackage
