// activation: activation function and output quantisation of one neuron.
//
// RELU = 1 (hidden layers): negative values become 0 and values above
// 2^OW - 1 clip to 2^OW - 1, giving OW-bit unsigned activations on equally
// spaced levels (the fractional meaning of the levels, e.g. steps of 0.25 for
// 3-bit activations, is folded into the batch-norm constants).
// RELU = 0 (output layer): linear, the value is saturated to OW-bit signed.
// The ReLU/linear choice per layer follows the paper; the clipping and
// saturation are this design's. Purely combinational.
module activation #(
  parameter int unsigned IW   = 27,
  parameter int unsigned OW   = 8,
  parameter bit          RELU = 1'b1
) (
  input  logic signed [IW-1:0] y,
  output logic [OW-1:0]        a
);

  if (RELU) begin : g_relu
    localparam logic signed [IW:0] MAXV = (IW+1)'((1 << OW) - 1);
    always_comb begin
      if (y < 0)                 a = '0;
      else if ((IW+1)'(y) > MAXV) a = '1;
      else                       a = OW'(y);
    end
  end else begin : g_lin
    localparam logic signed [IW:0] MAXV = (IW+1)'((1 << (OW - 1)) - 1);
    localparam logic signed [IW:0] MINV = -(IW+1)'(1 << (OW - 1));
    always_comb begin
      if ((IW+1)'(y) > MAXV)      a = OW'(MAXV);
      else if ((IW+1)'(y) < MINV) a = OW'(MINV);
      else                       a = OW'(y);
    end
  end

endmodule
