// cgs_decompress: coarse-grain-sparsity weight decompression.
//
// The weight matrix of a hidden layer is cut into BLK x BLK blocks; of the
// NOUT/BLK blocks in each block-row (BLK consecutive input neurons) only KEPT
// are stored. For one input neuron the memory delivers KEPT*BLK weights,
// block k holding the weights to output neurons idx[k]*BLK .. idx[k]*BLK+BLK-1.
// This block demultiplexes each stored block to its output block with idx[k]
// as select, giving NOUT weight lanes; wmask marks the lanes that received a
// weight (lanes of dropped blocks must add nothing, and the 1-/2-bit weight
// codes have no zero). Compressed weight m sits at cw[m*WBITS +: WBITS].
// Demultiplexing with the stored indices follows the paper; a fixed KEPT per
// block-row and the plain binary index are this design's choices.
// Purely combinational.
module cgs_decompress #(
  parameter int unsigned NOUT  = 512,
  parameter int unsigned BLK   = 16,
  parameter int unsigned KEPT  = 4,
  parameter int unsigned WBITS = 3,
  localparam int unsigned NB   = NOUT / BLK,
  localparam int unsigned XW   = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic [KEPT*BLK*WBITS-1:0] cw,
  input  logic [KEPT*XW-1:0]        idx,
  output logic [NOUT*WBITS-1:0]     w,
  output logic [NOUT-1:0]           wmask
);

  // One demultiplexer per output block: it takes the stored block whose
  // index selects it.
  for (genvar b = 0; b < NB; b++) begin : g_blk
    always_comb begin
      w[b*BLK*WBITS +: BLK*WBITS] = '0;
      wmask[b*BLK +: BLK]         = '0;
      for (int k = 0; k < KEPT; k++) begin
        if (idx[k*XW +: XW] == XW'(b)) begin
          w[b*BLK*WBITS +: BLK*WBITS] = cw[k*BLK*WBITS +: BLK*WBITS];
          wmask[b*BLK +: BLK]         = '1;
        end
      end
    end
  end

endmodule
