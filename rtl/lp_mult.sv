// lp_mult: product of one unsigned activation and one low-precision weight.
//
// Weight codes:
//   WBITS = 1 : 0 -> -1, 1 -> +1 (binary weights), product -a or +a
//   WBITS = 2 : 00 -> -1/4, 01 -> -1/2, 10 -> +1/2, 11 -> +1/4, done with
//               shifts; the product is scaled by 4 so that it stays an
//               integer: -a, -2a, +2a, +a
//   WBITS >= 3: two's-complement integer, conventional multiplier
// The 2-bit table and the use of shifters below 3 bits follow the paper; the
// 1-bit code, the x4 scaling and the integer 3-bit format are this design's
// choices (the scale is absorbed in the batch-norm gamma'). en = 0 forces the
// product to zero, which is how a lane of a dropped CGS block contributes
// nothing. Purely combinational.
module lp_mult #(
  parameter int unsigned ABITS = 8,
  parameter int unsigned WBITS = 3,
  localparam int unsigned PW   = ABITS + WBITS + 1
) (
  input  logic                 en,
  input  logic [ABITS-1:0]     a,
  input  logic [WBITS-1:0]     w,
  output logic signed [PW-1:0] p
);

  logic signed [PW-1:0] a_ext;
  assign a_ext = PW'({1'b0, a});

  if (WBITS == 1) begin : g_bin
    always_comb p = en ? (w[0] ? a_ext : -a_ext) : '0;
  end else if (WBITS == 2) begin : g_shift
    always_comb begin
      unique case (w)
        2'b00:   p = -a_ext;          // -1/4
        2'b01:   p = -(a_ext <<< 1);  // -1/2
        2'b10:   p = a_ext <<< 1;     // +1/2
        default: p = a_ext;           // +1/4
      endcase
      if (!en) p = '0;
    end
  end else begin : g_mul
    logic signed [WBITS-1:0] ws;
    assign ws = w;
    always_comb p = en ? PW'(a_ext * PW'(ws)) : '0;
  end

endmodule
