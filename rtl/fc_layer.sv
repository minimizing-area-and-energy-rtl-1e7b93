// fc_layer: one fully-connected layer of the accelerator.
//
// Datapath, in the order a non-zero input travels through it:
//   input_buffer -> layer_controller (zero skipping, read issue)
//   -> weight memory (+ index memory for a CGS layer)
//   -> weight buffer (the NPR-th slice of the SRAM row that belongs to the
//      input) and index buffer
//   -> cgs_decompress (demultiplex KEPT stored blocks onto NOUT lanes)
//   -> neuron_accum (NOUT parallel MAC lanes)
//   and, once all inputs are in, per neuron batch_norm -> activation, which
//   is the layer output offered to the next layer with out_valid/out_ready.
// A CGS layer stores, per input neuron, KEPT = NOUT/BLK/CGS_RATIO blocks of
// BLK weights (VEC = KEPT*BLK weights); ROW_WEIGHTS weights form one SRAM row,
// so a row holds NPR = ROW_WEIGHTS/VEC input neurons, neuron i in row i/NPR,
// slice i%NPR, weight m of the slice at bits [m*WBITS +: WBITS] of the slice.
// The index memory holds, per block-row of BLK inputs, KEPT indices of
// $clog2(NOUT/BLK) bits, index k at bits [k*XW +: XW]. Without CGS (output
// layer) a row holds NPR_NOCGS input neurons of NOUT weights each.
// Parameters are loaded through cfg_*: a CFG_WEIGHT/CFG_INDEX write stores
// cfg_wdata (low bits) in row cfg_addr; a CFG_BN write sets gamma'/beta' of
// neuron cfg_addr. Loading is meant for an idle layer.
// The structure follows the paper's layer column (input buffer, weight and
// index memory and buffers, layer controller, neuron accumulation, batch
// normalisation, activation); memory layout details, the register storage
// of gamma'/beta' and all number formats are this design's choice.
module fc_layer
  import dnn_pkg::cfg_sel_e, dnn_pkg::CFG_WEIGHT, dnn_pkg::CFG_INDEX, dnn_pkg::CFG_BN,
         dnn_pkg::acc_w;
#(
  parameter int unsigned NIN         = 784,
  parameter int unsigned NOUT        = 512,
  parameter int unsigned ABITS       = 8,
  parameter int unsigned WBITS       = 3,
  parameter bit          USE_CGS     = 1'b1,
  parameter int unsigned BLK         = 16,
  parameter int unsigned CGS_RATIO   = 8,
  parameter int unsigned ROW_WEIGHTS = 512,
  parameter int unsigned NPR_NOCGS   = 1,
  parameter bit          RELU        = 1'b1,
  parameter int unsigned OW          = 8,
  parameter int unsigned GAMMA_W     = 16,
  parameter int unsigned BETA_W      = 32,
  parameter int unsigned BN_FRAC     = 12,
  parameter bit          SERIAL_IN   = 1'b1,
  parameter int unsigned CFG_W       = 1536,
  parameter int unsigned CFG_AW      = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input vector: serial (SERIAL_IN = 1) or parallel
  input  logic                     s_valid,
  output logic                     s_ready,
  input  logic [ABITS-1:0]         s_data,
  input  logic                     p_valid,
  output logic                     p_ready,
  input  logic [NIN*ABITS-1:0]     p_data,
  // output vector
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [NOUT*OW-1:0]       out_data,
  // parameter load
  input  logic                     cfg_we,
  input  cfg_sel_e                 cfg_sel,
  input  logic [CFG_AW-1:0]        cfg_addr,
  input  logic [CFG_W-1:0]         cfg_wdata,
  input  logic [GAMMA_W-1:0]       cfg_gamma,
  input  logic [BETA_W-1:0]        cfg_beta
);

  localparam int unsigned NB     = NOUT / BLK;
  localparam int unsigned XW     = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned KEPT   = USE_CGS ? NOUT / BLK / CGS_RATIO : 1;
  localparam int unsigned VEC    = USE_CGS ? KEPT * BLK : NOUT;
  localparam int unsigned NPR    = USE_CGS ? ROW_WEIGHTS / VEC : NPR_NOCGS;
  localparam int unsigned W_ROWS = (NIN + NPR - 1) / NPR;
  localparam int unsigned ROW_W  = NPR * VEC * WBITS;
  localparam int unsigned I_ROWS = (NIN + BLK - 1) / BLK;
  localparam int unsigned I_W    = KEPT * XW;
  localparam int unsigned AIW    = (NIN > 1) ? $clog2(NIN) : 1;
  localparam int unsigned WAW    = (W_ROWS > 1) ? $clog2(W_ROWS) : 1;
  localparam int unsigned IAW    = (I_ROWS > 1) ? $clog2(I_ROWS) : 1;
  localparam int unsigned SLW    = (NPR > 1) ? $clog2(NPR) : 1;
  localparam int unsigned NAW    = (NOUT > 1) ? $clog2(NOUT) : 1;
  localparam int unsigned ACC_W  = acc_w(ABITS, WBITS, NIN);
  localparam int unsigned BN_YW  = ((ACC_W + GAMMA_W > BETA_W) ? ACC_W + GAMMA_W : BETA_W)
                                   + 1 - BN_FRAC;

  // ---------------------------------------------------------------- input
  logic             in_full, in_release;
  logic [AIW-1:0]   buf_rd_idx;
  logic [ABITS-1:0] buf_rd_data;
  logic [NIN-1:0]   nz_mask;

  input_buffer #(.N(NIN), .ABITS(ABITS), .SERIAL(SERIAL_IN)) u_in_buf (
    .clk         (clk),
    .rst_n       (rst_n),
    .s_valid     (s_valid),
    .s_ready     (s_ready),
    .s_data      (s_data),
    .p_valid     (p_valid),
    .p_ready     (p_ready),
    .p_data      (p_data),
    .full        (in_full),
    .release_buf (in_release),
    .rd_idx      (buf_rd_idx),
    .rd_data     (buf_rd_data),
    .nz_mask     (nz_mask)
  );

  // ----------------------------------------------------------- controller
  logic             w_re, i_re, s1_valid, acc_clr, acc_en;
  logic [WAW-1:0]   w_addr;
  logic [IAW-1:0]   i_addr;
  logic [SLW-1:0]   s1_slice;
  logic [ABITS-1:0] acc_act;

  layer_controller #(
    .NIN(NIN), .ABITS(ABITS), .BLK(BLK), .NPR(NPR), .USE_CGS(USE_CGS),
    .W_ROWS(W_ROWS), .I_ROWS(I_ROWS)
  ) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_full     (in_full),
    .nz_mask     (nz_mask),
    .in_release  (in_release),
    .buf_rd_idx  (buf_rd_idx),
    .buf_rd_data (buf_rd_data),
    .w_re        (w_re),
    .w_addr      (w_addr),
    .i_re        (i_re),
    .i_addr      (i_addr),
    .s1_valid    (s1_valid),
    .s1_slice    (s1_slice),
    .acc_clr     (acc_clr),
    .acc_en      (acc_en),
    .acc_act     (acc_act),
    .out_valid   (out_valid),
    .out_ready   (out_ready)
  );

  // --------------------------------------------- weight memory and buffer
  logic             w_cfg;
  logic [ROW_W-1:0] w_rdata;
  logic [VEC*WBITS-1:0] wbuf;

  assign w_cfg = cfg_we && (cfg_sel == CFG_WEIGHT);

  sram_sp #(.DEPTH(W_ROWS), .WIDTH(ROW_W)) u_wmem (
    .clk   (clk),
    .cs    (w_cfg || w_re),
    .we    (w_cfg),
    .addr  (w_cfg ? WAW'(cfg_addr) : w_addr),
    .wdata (cfg_wdata[ROW_W-1:0]),
    .rdata (w_rdata)
  );

  always_ff @(posedge clk) begin
    if (s1_valid) wbuf <= w_rdata[s1_slice*VEC*WBITS +: VEC*WBITS];
  end

  // ---------------------------------- index memory, buffer, decompression
  logic [NOUT*WBITS-1:0] w_lanes;
  logic [NOUT-1:0]       w_mask;

  if (USE_CGS) begin : g_cgs
    logic           i_cfg;
    logic [I_W-1:0] i_rdata, ibuf;

    assign i_cfg = cfg_we && (cfg_sel == CFG_INDEX);

    sram_sp #(.DEPTH(I_ROWS), .WIDTH(I_W)) u_imem (
      .clk   (clk),
      .cs    (i_cfg || i_re),
      .we    (i_cfg),
      .addr  (i_cfg ? IAW'(cfg_addr) : i_addr),
      .wdata (cfg_wdata[I_W-1:0]),
      .rdata (i_rdata)
    );

    always_ff @(posedge clk) begin
      if (s1_valid) ibuf <= i_rdata;
    end

    cgs_decompress #(.NOUT(NOUT), .BLK(BLK), .KEPT(KEPT), .WBITS(WBITS)) u_decomp (
      .cw    (wbuf),
      .idx   (ibuf),
      .w     (w_lanes),
      .wmask (w_mask)
    );

    // The blocks kept in one block-row go to distinct output blocks.
    function automatic bit idx_distinct(logic [I_W-1:0] v);
      for (int a = 0; a < KEPT; a++)
        for (int b = a + 1; b < KEPT; b++)
          if (v[a*XW +: XW] == v[b*XW +: XW]) return 1'b0;
      return 1'b1;
    endfunction

    a_idx_distinct: assert property (@(posedge clk) disable iff (!rst_n)
                                     acc_en |-> idx_distinct(ibuf));
  end else begin : g_dense
    assign w_lanes = wbuf;
    assign w_mask  = '1;
  end

  // ------------------------------------------------------- accumulation
  logic signed [ACC_W-1:0] acc [NOUT];

  neuron_accum #(.NOUT(NOUT), .ABITS(ABITS), .WBITS(WBITS), .ACC_W(ACC_W)) u_accum (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (acc_clr),
    .en    (acc_en),
    .act   (acc_act),
    .w     (w_lanes),
    .wmask (w_mask),
    .acc   (acc)
  );

  // ------------------------------------- batch norm constants and lanes
  logic signed [GAMMA_W-1:0] gamma [NOUT];
  logic signed [BETA_W-1:0]  beta  [NOUT];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == CFG_BN) begin
      gamma[NAW'(cfg_addr)] <= cfg_gamma;
      beta[NAW'(cfg_addr)]  <= cfg_beta;
    end
  end

  for (genvar n = 0; n < NOUT; n++) begin : g_post
    logic signed [BN_YW-1:0] y;

    batch_norm #(.XW(ACC_W), .GAMMA_W(GAMMA_W), .BETA_W(BETA_W), .FRAC(BN_FRAC)) u_bn (
      .x     (acc[n]),
      .gamma (gamma[n]),
      .beta  (beta[n]),
      .y     (y)
    );

    activation #(.IW(BN_YW), .OW(OW), .RELU(RELU)) u_act (
      .y (y),
      .a (out_data[n*OW +: OW])
    );
  end

endmodule
