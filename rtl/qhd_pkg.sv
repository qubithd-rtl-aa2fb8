// qhd_pkg: sizes, encodings and operation codes shared by the QubitHD accelerator.
//
// The hypervector length D = 10,000 and the largest data-set dimensions (n = 784 features,
// k = 26 classes) are the evaluation sizes of the QubitHD work. The lane count (dimensions
// handled per clock), the feature width, the number of discretization levels and the
// width of a non-binary model element are choices of this design.
//
// Bipolar values are held as one bit: 0 means +1 and 1 means -1, the sign-bit convention,
// so binding two bipolar vectors is an XOR and the Hamming distance is a popcount of XOR.
package qhd_pkg;

  localparam int unsigned D_DEF          = 10000; // hypervector length
  localparam int unsigned LANES_DEF      = 100;   // dimensions processed per clock
  localparam int unsigned N_MAX_DEF      = 784;   // most features per sample
  localparam int unsigned K_MAX_DEF      = 26;    // most classes
  localparam int unsigned FEAT_W_DEF     = 8;     // unsigned feature width
  localparam int unsigned LEVEL_BITS_DEF = 4;     // 16 discretization levels
  localparam int unsigned CW_DEF         = 32;    // signed width of a model element
  localparam int unsigned ALPHA_W        = 8;     // learning-rate width
  localparam int unsigned BFRAC_W        = 8;     // b / sigma in units of 2^-8

  // Operation carried by a sample.
  typedef enum logic [1:0] {
    OP_TRAIN   = 2'd0,  // one-shot training: C[label] += H
    OP_RETRAIN = 2'd1,  // retraining against the binary model
    OP_INFER   = 2'd2   // inference only
  } op_e;

  // Commands that act on the whole model.
  typedef enum logic [1:0] {
    CMD_CLEAR    = 2'd0, // zero the non-binary model
    CMD_BINARIZE = 2'd1, // stochastic binarization of the model
    CMD_END_PASS = 2'd2  // close a retraining round: convergence test, then binarize
  } cmd_e;

  // Operations of the model-update unit.
  typedef enum logic [1:0] {
    UPD_CLEAR   = 2'd0,
    UPD_ADD     = 2'd1,
    UPD_RETRAIN = 2'd2
  } upd_op_e;

endpackage
