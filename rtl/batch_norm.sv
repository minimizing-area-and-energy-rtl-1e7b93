// batch_norm: folded batch normalisation of one neuron, y = x' * gamma' + beta'.
//
// The bias, mean, standard deviation and the trained scale and shift are
// folded off-line into gamma' = gamma / sigma and
// beta' = beta + (b - mu) / sigma * gamma, so the hardware needs one multiply
// and one add per neuron (this folding is the paper's). Number formats are
// this design's: gamma' is signed with FRAC fraction bits, beta' is signed in
// the scale of the product, and the sum is shifted right arithmetically by
// FRAC (rounding towards minus infinity). Purely combinational.
module batch_norm #(
  parameter int unsigned XW      = 22,
  parameter int unsigned GAMMA_W = 16,
  parameter int unsigned BETA_W  = 32,
  parameter int unsigned FRAC    = 12,
  localparam int unsigned MW     = XW + GAMMA_W,
  localparam int unsigned SW     = ((MW > BETA_W) ? MW : BETA_W) + 1,
  localparam int unsigned YW     = SW - FRAC
) (
  input  logic signed [XW-1:0]      x,
  input  logic signed [GAMMA_W-1:0] gamma,
  input  logic signed [BETA_W-1:0]  beta,
  output logic signed [YW-1:0]      y
);

  logic signed [SW-1:0] sum;

  always_comb begin
    sum = SW'(x) * SW'(gamma) + SW'(beta);
    y   = YW'(sum >>> FRAC);
  end

endmodule
