// zero_skip: input-zero skipping for one layer.
//
// On load the non-zero mask of the layer's input vector is copied into a
// pending register. Each cycle, idx is the lowest pending position and valid
// says whether one is left; advance removes idx from the pending set. The
// layer controller therefore spends exactly one cycle per non-zero input
// activation and none on zeros. Finding the index with a priority encoder
// over a pending mask is this design's choice; the paper only states that
// the block finds the active input index and skips zero inputs.
module zero_skip #(
  parameter int unsigned N   = 784,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [N-1:0]  mask,
  input  logic          advance,
  output logic          valid,
  output logic [IW-1:0] idx
);

  logic [N-1:0] pending;

  // Lowest set bit of the pending mask.
  always_comb begin
    idx = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (pending[i]) idx = IW'(i);
    end
  end

  assign valid = |pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0;
    end else if (load) begin
      pending <= mask;
    end else if (advance && valid) begin
      pending[idx] <= 1'b0;
    end
  end

endmodule
