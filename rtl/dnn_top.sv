// dnn_top: low-precision, coarse-grain-sparse MLP accelerator for 28x28
// images, network 784-512-512-10.
//
// Three fc_layer instances form a layer pipeline. Layer 1 takes the 784
// pixels of an image as a stream (pix_valid/pix_ready, index order) into its
// input buffer; each hidden layer hands its 512 activations to the next
// layer's input buffer in one valid/ready transfer; the output layer offers
// the 10 linear scores on res_valid/res_ready. Every layer spends one cycle
// per non-zero input (zero skipping) plus 3 cycles, and releases its input
// buffer when its last non-zero input is issued, so up to three images (plus
// one being streamed in) are in flight at once. The hidden layers store their
// weights with CGS compression (16x16 blocks, CGS_RATIO) and decompress them
// with the stored block indices; the output layer is dense. Weights, indices
// and the folded batch-norm constants are written through cfg_* while the
// accelerator is idle: cfg_layer selects the layer (0..2), cfg_sel the
// memory (see dnn_pkg::cfg_sel_e), cfg_addr the row or neuron.
// The layer structure, sizes, precisions and CGS parameters are those of the
// paper's main design (A:8b, W:3b, CGS 8X); the interfaces and formats are
// this design's own.
module dnn_top
  import dnn_pkg::cfg_sel_e;
#(
  parameter int unsigned N_IN        = dnn_pkg::N_IN,
  parameter int unsigned N_HID       = dnn_pkg::N_HID,
  parameter int unsigned N_OUT       = dnn_pkg::N_OUT,
  parameter int unsigned ABITS       = dnn_pkg::ABITS,
  parameter int unsigned WBITS       = dnn_pkg::WBITS,
  parameter int unsigned CGS_BLK     = dnn_pkg::CGS_BLK,
  parameter int unsigned CGS_RATIO   = dnn_pkg::CGS_RATIO,
  parameter int unsigned ROW_WEIGHTS = dnn_pkg::ROW_WEIGHTS,
  parameter int unsigned OUT_NPR     = dnn_pkg::OUT_NPR,
  parameter int unsigned SCORE_W     = dnn_pkg::SCORE_W,
  parameter int unsigned GAMMA_W     = dnn_pkg::GAMMA_W,
  parameter int unsigned BETA_W      = dnn_pkg::BETA_W,
  parameter int unsigned BN_FRAC     = dnn_pkg::BN_FRAC,
  localparam int unsigned CFG_W      = ROW_WEIGHTS * WBITS,
  localparam int unsigned CFG_AW     = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // image input
  input  logic                     pix_valid,
  output logic                     pix_ready,
  input  logic [ABITS-1:0]         pix_data,
  // classification scores
  output logic                     res_valid,
  input  logic                     res_ready,
  output logic [N_OUT*SCORE_W-1:0] res_score,
  // parameter load
  input  logic                     cfg_we,
  input  logic [1:0]               cfg_layer,
  input  cfg_sel_e                 cfg_sel,
  input  logic [CFG_AW-1:0]        cfg_addr,
  input  logic [CFG_W-1:0]         cfg_wdata,
  input  logic [GAMMA_W-1:0]       cfg_gamma,
  input  logic [BETA_W-1:0]        cfg_beta
);

  logic                   h1_valid, h1_ready, h2_valid, h2_ready;
  logic [N_HID*ABITS-1:0] h1_data, h2_data;
  logic                   unused_ready;

  fc_layer #(
    .NIN(N_IN), .NOUT(N_HID), .ABITS(ABITS), .WBITS(WBITS), .USE_CGS(1'b1),
    .BLK(CGS_BLK), .CGS_RATIO(CGS_RATIO), .ROW_WEIGHTS(ROW_WEIGHTS),
    .RELU(1'b1), .OW(ABITS), .GAMMA_W(GAMMA_W), .BETA_W(BETA_W),
    .BN_FRAC(BN_FRAC), .SERIAL_IN(1'b1), .CFG_W(CFG_W), .CFG_AW(CFG_AW)
  ) u_layer1 (
    .clk       (clk),
    .rst_n     (rst_n),
    .s_valid   (pix_valid),
    .s_ready   (pix_ready),
    .s_data    (pix_data),
    .p_valid   (1'b0),
    .p_ready   (unused_ready),
    .p_data    ('0),
    .out_valid (h1_valid),
    .out_ready (h1_ready),
    .out_data  (h1_data),
    .cfg_we    (cfg_we && cfg_layer == 2'd0),
    .cfg_sel   (cfg_sel),
    .cfg_addr  (cfg_addr),
    .cfg_wdata (cfg_wdata),
    .cfg_gamma (cfg_gamma),
    .cfg_beta  (cfg_beta)
  );

  logic l2_s_ready, l3_s_ready;

  fc_layer #(
    .NIN(N_HID), .NOUT(N_HID), .ABITS(ABITS), .WBITS(WBITS), .USE_CGS(1'b1),
    .BLK(CGS_BLK), .CGS_RATIO(CGS_RATIO), .ROW_WEIGHTS(ROW_WEIGHTS),
    .RELU(1'b1), .OW(ABITS), .GAMMA_W(GAMMA_W), .BETA_W(BETA_W),
    .BN_FRAC(BN_FRAC), .SERIAL_IN(1'b0), .CFG_W(CFG_W), .CFG_AW(CFG_AW)
  ) u_layer2 (
    .clk       (clk),
    .rst_n     (rst_n),
    .s_valid   (1'b0),
    .s_ready   (l2_s_ready),
    .s_data    ('0),
    .p_valid   (h1_valid),
    .p_ready   (h1_ready),
    .p_data    (h1_data),
    .out_valid (h2_valid),
    .out_ready (h2_ready),
    .out_data  (h2_data),
    .cfg_we    (cfg_we && cfg_layer == 2'd1),
    .cfg_sel   (cfg_sel),
    .cfg_addr  (cfg_addr),
    .cfg_wdata (cfg_wdata),
    .cfg_gamma (cfg_gamma),
    .cfg_beta  (cfg_beta)
  );

  fc_layer #(
    .NIN(N_HID), .NOUT(N_OUT), .ABITS(ABITS), .WBITS(WBITS), .USE_CGS(1'b0),
    .BLK(CGS_BLK), .CGS_RATIO(1), .ROW_WEIGHTS(ROW_WEIGHTS), .NPR_NOCGS(OUT_NPR),
    .RELU(1'b0), .OW(SCORE_W), .GAMMA_W(GAMMA_W), .BETA_W(BETA_W),
    .BN_FRAC(BN_FRAC), .SERIAL_IN(1'b0), .CFG_W(CFG_W), .CFG_AW(CFG_AW)
  ) u_layer3 (
    .clk       (clk),
    .rst_n     (rst_n),
    .s_valid   (1'b0),
    .s_ready   (l3_s_ready),
    .s_data    ('0),
    .p_valid   (h2_valid),
    .p_ready   (h2_ready),
    .p_data    (h2_data),
    .out_valid (res_valid),
    .out_ready (res_ready),
    .out_data  (res_score),
    .cfg_we    (cfg_we && cfg_layer == 2'd2),
    .cfg_sel   (cfg_sel),
    .cfg_addr  (cfg_addr),
    .cfg_wdata (cfg_wdata),
    .cfg_gamma (cfg_gamma),
    .cfg_beta  (cfg_beta)
  );

endmodule
