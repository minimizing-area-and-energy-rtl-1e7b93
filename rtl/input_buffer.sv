// input_buffer: the input vector of one layer.
//
// Holds N activations of ABITS bits. With SERIAL = 1 (first layer) it is
// filled element by element from a valid/ready stream in index order (784
// pixels of an image); with SERIAL = 0 (later layers) a whole vector from the
// previous layer is written in one cycle by a valid/ready transfer. Once the
// last element has arrived, full is set and the buffer accepts nothing more
// until the consuming layer pulses release, after which it can be refilled
// while the consumer finishes its pipeline. rd_data is a combinational read
// of element rd_idx; nz_mask flags the non-zero elements for zero skipping.
// The buffer is named by the paper; its single bank and handshake are this
// design's choice.
module input_buffer #(
  parameter int unsigned N     = 784,
  parameter int unsigned ABITS = 8,
  parameter bit          SERIAL = 1'b1,
  localparam int unsigned IW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // serial fill (SERIAL = 1)
  input  logic               s_valid,
  output logic               s_ready,
  input  logic [ABITS-1:0]   s_data,
  // parallel fill (SERIAL = 0)
  input  logic               p_valid,
  output logic               p_ready,
  input  logic [N*ABITS-1:0] p_data,
  // consumer side
  output logic               full,
  input  logic               release_buf,
  input  logic [IW-1:0]      rd_idx,
  output logic [ABITS-1:0]   rd_data,
  output logic [N-1:0]       nz_mask
);

  logic [ABITS-1:0] mem [N];

  assign rd_data = mem[rd_idx];

  for (genvar i = 0; i < N; i++) begin : g_nz
    assign nz_mask[i] = |mem[i];
  end

  if (SERIAL) begin : g_serial
    logic [IW-1:0] wr_ptr;

    assign s_ready = !full;
    assign p_ready = 1'b0;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wr_ptr <= '0;
        full   <= 1'b0;
      end else if (release_buf) begin
        full   <= 1'b0;
      end else if (s_valid && s_ready) begin
        if (wr_ptr == IW'(N - 1)) begin
          wr_ptr <= '0;
          full   <= 1'b1;
        end else begin
          wr_ptr <= wr_ptr + 1'b1;
        end
      end
    end

    always_ff @(posedge clk) begin
      if (s_valid && s_ready) mem[wr_ptr] <= s_data;
    end
  end else begin : g_parallel
    assign p_ready = !full;
    assign s_ready = 1'b0;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        full <= 1'b0;
      end else if (release_buf) begin
        full <= 1'b0;
      end else if (p_valid && p_ready) begin
        full <= 1'b1;
      end
    end

    always_ff @(posedge clk) begin
      if (p_valid && p_ready) begin
        for (int i = 0; i < N; i++) mem[i] <= p_data[i*ABITS +: ABITS];
      end
    end
  end

  // The consumer may only release a buffer it is working on.
  a_release_full: assert property (@(posedge clk) disable iff (!rst_n)
                                   release_buf |-> full);

endmodule
