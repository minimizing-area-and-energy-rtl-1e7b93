// layer_controller: sequencer of one fully-connected layer.
//
// It performs input-zero skipping, the (CGS) weight reads and the handshake
// with the next layer. Operation per input vector:
//   IDLE  : wait until the input buffer is full; then load the non-zero mask
//           into the zero-skipping unit and clear the accumulators.
//   RUN   : every cycle take the next non-zero input i (zero_skip) and issue
//           the read of weight-memory row i / NPR (slice i % NPR) and, for a
//           CGS layer, of index-memory row i / BLK - only when the block-row
//           differs from the one whose indices are already in the index
//           buffer. The activation value travels with the request. When no
//           non-zero input is left the input buffer is released, so the
//           previous layer can refill it while this layer drains.
//   DRAIN : wait for the last request to leave the memory stage.
//   DONE  : out_valid is high until out_ready; the accumulators (and the
//           batch-norm/activation values derived from them) hold meanwhile.
// Pipeline of one request: cycle 0 issue (memory read), cycle 1 memory data
// captured into the weight/index buffers (s1_valid), cycle 2 decompression
// and accumulate (acc_en). Timing: out_valid rises nnz + 3 cycles after the
// first cycle in which the layer is idle and in_full is high, nnz being the
// number of non-zero inputs. The three tasks of the controller follow the
// paper; states, pipeline and the valid/ready handshake are this design's.
module layer_controller #(
  parameter int unsigned NIN     = 784,
  parameter int unsigned ABITS   = 8,
  parameter int unsigned BLK     = 16,
  parameter int unsigned NPR     = 8,
  parameter bit          USE_CGS = 1'b1,
  parameter int unsigned W_ROWS  = 98,
  parameter int unsigned I_ROWS  = 49,
  localparam int unsigned XW     = (NIN > 1) ? $clog2(NIN) : 1,
  localparam int unsigned WAW    = (W_ROWS > 1) ? $clog2(W_ROWS) : 1,
  localparam int unsigned IAW    = (I_ROWS > 1) ? $clog2(I_ROWS) : 1,
  localparam int unsigned SLW    = (NPR > 1) ? $clog2(NPR) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // input buffer
  input  logic             in_full,
  input  logic [NIN-1:0]   nz_mask,
  output logic             in_release,
  output logic [XW-1:0]    buf_rd_idx,
  input  logic [ABITS-1:0] buf_rd_data,
  // weight and index memory reads
  output logic             w_re,
  output logic [WAW-1:0]   w_addr,
  output logic             i_re,
  output logic [IAW-1:0]   i_addr,
  // memory data in the output registers, to be captured into the buffers
  output logic             s1_valid,
  output logic [SLW-1:0]   s1_slice,
  // accumulators
  output logic             acc_clr,
  output logic             acc_en,
  output logic [ABITS-1:0] acc_act,
  // handshake with the next layer
  output logic             out_valid,
  input  logic             out_ready
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_e;
  state_e state;

  logic          zs_load, zs_valid, issue;
  logic [XW-1:0] zs_idx;

  zero_skip #(.N(NIN)) u_zero_skip (
    .clk     (clk),
    .rst_n   (rst_n),
    .load    (zs_load),
    .mask    (nz_mask),
    .advance (issue),
    .valid   (zs_valid),
    .idx     (zs_idx)
  );

  logic [IAW-1:0] irow, irow_buf;
  logic           irow_vld;
  logic [ABITS-1:0] s1_act;

  assign zs_load    = (state == S_IDLE) && in_full;
  assign acc_clr    = zs_load;
  assign issue      = (state == S_RUN) && zs_valid;
  assign in_release = (state == S_RUN) && !zs_valid;
  assign out_valid  = (state == S_DONE);

  assign buf_rd_idx = zs_idx;
  assign irow       = IAW'(zs_idx / BLK);
  assign w_re       = issue;
  assign w_addr     = WAW'(zs_idx / NPR);
  assign i_re       = USE_CGS && issue && (!irow_vld || irow != irow_buf);
  assign i_addr     = irow;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      irow_vld <= 1'b0;
      irow_buf <= '0;
      s1_valid <= 1'b0;
      s1_slice <= '0;
      s1_act   <= '0;
      acc_en   <= 1'b0;
      acc_act  <= '0;
    end else begin
      // request pipeline
      s1_valid <= issue;
      if (issue) begin
        s1_slice <= SLW'(zs_idx % NPR);
        s1_act   <= buf_rd_data;
      end
      acc_en  <= s1_valid;
      acc_act <= s1_act;
      if (i_re) begin
        irow_vld <= 1'b1;
        irow_buf <= irow;
      end

      unique case (state)
        S_IDLE:  if (in_full) begin
                   state    <= S_RUN;
                   irow_vld <= 1'b0;
                 end
        S_RUN:   if (!zs_valid) state <= S_DRAIN;
        S_DRAIN: if (!s1_valid) state <= S_DONE;
        S_DONE:  if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Handshake rule: a result offered to the next layer stays offered until
  // it is taken.
  a_valid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid);

endmodule
