// tb_cgs_decompress: at the default size (512 lanes, 16x16 blocks, 4 kept
// blocks of 3-bit weights) drives random compressed vectors with random
// distinct block indices and compares every lane with a dense reference
// built by placing kept block k at output block idx[k].
module tb_cgs_decompress;
  localparam int NOUT = 512, BLK = 16, KEPT = 4, WB = 3, NB = NOUT / BLK, XW = 5;
  int checks = 0, failures = 0;

  logic [KEPT*BLK*WB-1:0] cw;
  logic [KEPT*XW-1:0]     idx;
  logic [NOUT*WB-1:0]     w;
  logic [NOUT-1:0]        wmask;

  cgs_decompress u_dut (.cw, .idx, .w, .wmask);

  initial begin
    for (int t = 0; t < 200; t++) begin
      automatic int blocks [$];
      automatic int ref_w [NOUT];
      automatic bit ref_m [NOUT];
      for (int b = 0; b < NB; b++) blocks.push_back(b);
      blocks.shuffle();
      for (int i = 0; i < KEPT * BLK * WB / 32 + 1; i++)
        if (i * 32 < KEPT * BLK * WB) cw[i*32 +: 32] = $urandom;
      for (int n = 0; n < NOUT; n++) begin ref_w[n] = 0; ref_m[n] = 0; end
      for (int k = 0; k < KEPT; k++) begin
        idx[k*XW +: XW] = XW'(blocks[k]);
        for (int j = 0; j < BLK; j++) begin
          ref_w[blocks[k]*BLK + j] = int'(cw[(k*BLK + j)*WB +: WB]);
          ref_m[blocks[k]*BLK + j] = 1;
        end
      end
      #1;
      for (int n = 0; n < NOUT; n++) begin
        checks++;
        if (int'(w[n*WB +: WB]) != ref_w[n] || wmask[n] != ref_m[n]) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d: w=%0d m=%0d exp %0d %0d",
                                      n, w[n*WB +: WB], wmask[n], ref_w[n], ref_m[n]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
