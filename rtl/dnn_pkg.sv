// dnn_pkg: constants and helpers shared by the low-precision, CGS-compressed
// MLP accelerator (784-512-512-10).
//
// The default configuration is the main design point: 8-bit activations,
// 3-bit weights, coarse-grain sparsity (CGS) with 16x16 blocks and 8X
// compression on the two hidden layers, SRAM rows of 512 weights. The number
// formats of the batch-norm constants and the output scores are this
// design's own choice (the paper gives none).
package dnn_pkg;

  // Network shape: two hidden layers of 512 neurons, 10 outputs, 784 pixels.
  parameter int unsigned N_IN        = 784;
  parameter int unsigned N_HID       = 512;
  parameter int unsigned N_OUT       = 10;

  // Precision of the main design (A:8b, W:3b).
  parameter int unsigned ABITS       = 8;
  parameter int unsigned WBITS       = 3;

  // Coarse-grain sparsity of the fully-connected layers.
  parameter int unsigned CGS_BLK     = 16;
  parameter int unsigned CGS_RATIO   = 8;

  // Weights per physical SRAM row.
  parameter int unsigned ROW_WEIGHTS = 512;

  // Folded batch-norm constants: gamma' signed with BN_FRAC fraction bits,
  // beta' signed in the scale of x' * gamma'.
  parameter int unsigned GAMMA_W     = 16;
  parameter int unsigned BETA_W      = 32;
  parameter int unsigned BN_FRAC     = 12;

  // Output-layer score width and output-layer input neurons per SRAM row.
  parameter int unsigned SCORE_W     = 16;
  parameter int unsigned OUT_NPR     = 1;

  // Target of a parameter-load write.
  typedef enum logic [1:0] {
    CFG_WEIGHT = 2'd0,   // one weight-memory row
    CFG_INDEX  = 2'd1,   // one index-memory row (CGS layers only)
    CFG_BN     = 2'd2    // gamma'/beta' of one neuron
  } cfg_sel_e;

  // Width of a signed product of an unsigned ABITS activation and a WBITS
  // weight code (covers the x4 scaling of the shift codes, see lp_mult).
  function automatic int unsigned prod_w(int unsigned abits, int unsigned wbits);
    return abits + wbits + 1;
  endfunction

  // Accumulator width that cannot overflow over nin products.
  function automatic int unsigned acc_w(int unsigned abits, int unsigned wbits,
                                        int unsigned nin);
    return prod_w(abits, wbits) + $clog2(nin);
  endfunction

  // CGS blocks kept per 16-input block-row.
  function automatic int unsigned cgs_kept(int unsigned nout, int unsigned blk,
                                           int unsigned ratio);
    return nout / blk / ratio;
  endfunction

endpackage
