// tb_dnn_top_a8w2: end-to-end test of dnn_top with 2-bit shift-coded weights and CGS 8X at
// reduced size (64-128-10, 128-weight rows).
//
// The testbench builds a random network in the accelerator's formats: for
// each hidden layer, KEPT distinct output blocks per 16-input block-row and
// random 3-bit weights inside them; a dense output layer; folded batch-norm
// constants chosen from the pre-activation statistics so that the ReLU both
// zeroes and clips. It loads everything through the cfg port, streams
// 8 sparse images (one of them all zero) back to back with random
// gaps, takes the scores with random back-pressure (holding the first one
// long enough for the whole pipeline to back up), and compares every score
// with a reference model written directly from the equations
// y = floor((sum a_i*w_i * gamma' + beta') / 2^12), ReLU/clip to 0..255,
// 16-bit saturation at the output. It also checks, per layer, that exactly
// one issue cycle was spent per non-zero input, and counts the mechanisms
// (zero skipping, index reuse, CGS demultiplexing, back-pressure stalls,
// layers working concurrently, ReLU zeroing and clipping): one that never
// happened counts as a failure.
module tb_dnn_top_a8w2;
  import dnn_pkg::*;

  localparam int NI = 64, NH = 128, NO = 10;
  localparam int AB = 8, WB = 2, BLK = 16, RATIO = 8, ROWW = 128;
  localparam int ONPR = 1, SW = 16;
  localparam int NIMG = 8;
  localparam int NB = NH / BLK, XW = $clog2(NB), KEPT = NB / RATIO, VEC = KEPT * BLK;
  localparam int NPR = ROWW / VEC, CFGW = ROWW * WB;
  localparam int OFF1 = 0, OFF2 = NI * NH, OFF3 = NI * NH + NH * NH, NW = OFF3 + NH * NO;
  localparam longint FRAC_DIV = 64'd1 << BN_FRAC;

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pix_valid = 0, pix_ready, res_valid, res_ready = 0, cfg_we = 0;
  logic [AB-1:0] pix_data = '0;
  logic [NO*SW-1:0] res_score;
  logic [1:0] cfg_layer = '0;
  cfg_sel_e cfg_sel = CFG_WEIGHT;
  logic [15:0] cfg_addr = '0;
  logic [CFGW-1:0] cfg_wdata = '0;
  logic [15:0] cfg_gamma = '0;
  logic [31:0] cfg_beta = '0;

  dnn_top #(
    .N_IN(NI), .N_HID(NH), .N_OUT(NO), .ABITS(AB), .WBITS(WB), .CGS_BLK(BLK),
    .CGS_RATIO(RATIO), .ROW_WEIGHTS(ROWW), .OUT_NPR(ONPR), .SCORE_W(SW)
  ) u_dut (
    .clk, .rst_n, .pix_valid, .pix_ready, .pix_data, .res_valid, .res_ready, .res_score,
    .cfg_we, .cfg_layer, .cfg_sel, .cfg_addr, .cfg_wdata, .cfg_gamma, .cfg_beta);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  // ------------------------------------------------------ reference model
  int wv [];                       // dense weight values, all layers
  int gam [3][NH];
  int bet [3][NH];
  int img [NIMG][NI];
  int h1 [NIMG][NH];
  int h2 [NIMG][NH];
  int sc [NIMG][NO];
  longint xs [NIMG][NH];
  int relu_zero = 0, relu_clip = 0;

  function automatic longint floor_div(longint v, longint d);
    longint q = v / d;
    if ((v % d != 0) && (v < 0)) q -= 1;
    return q;
  endfunction

  task automatic cfg_write(int layer, cfg_sel_e sel, int addr, logic [CFGW-1:0] data,
                           int g, int b);
    @(negedge clk);
    cfg_we = 1; cfg_layer = 2'(layer); cfg_sel = sel; cfg_addr = 16'(addr);
    cfg_wdata = data; cfg_gamma = 16'(g); cfg_beta = 32'(b);
    @(negedge clk);
    cfg_we = 0;
  endtask

  // weight value (x4 for the 2-bit shift codes -1/4, -1/2, +1/2, +1/4)
  function automatic int wval(int code);
    int quarter [4] = '{-1, -2, 2, 1};
    if (WB == 1) return code ? 1 : -1;
    if (WB == 2) return quarter[code];
    return (code >= (1 << (WB - 1))) ? code - (1 << WB) : code;
  endfunction

  // CGS layer: random kept blocks, random weights, written to the memories.
  task automatic load_cgs(int layer, int nin, int off);
    int codes [];
    codes = new[nin * VEC];
    for (int i = 0; i < nin * NH; i++) wv[off + i] = 0;
    for (int r = 0; r < nin / BLK; r++) begin
      automatic int blocks [$];
      automatic logic [CFGW-1:0] row = '0;
      for (int b = 0; b < NB; b++) blocks.push_back(b);
      blocks.shuffle();
      for (int k = 0; k < KEPT; k++) row[k*XW +: XW] = XW'(blocks[k]);
      cfg_write(layer, CFG_INDEX, r, row, 0, 0);
      for (int i = r * BLK; i < r * BLK + BLK; i++)
        for (int k = 0; k < KEPT; k++)
          for (int j = 0; j < BLK; j++) begin
            automatic int c = $urandom_range(0, (1 << WB) - 1);
            codes[i*VEC + k*BLK + j] = c;
            wv[off + i*NH + blocks[k]*BLK + j] = wval(c);
          end
    end
    for (int row_i = 0; row_i < (nin + NPR - 1) / NPR; row_i++) begin
      automatic logic [CFGW-1:0] row = '0;
      for (int s = 0; s < NPR; s++) begin
        automatic int i = row_i * NPR + s;
        if (i < nin)
          for (int m = 0; m < VEC; m++) row[(s*VEC + m)*WB +: WB] = WB'(codes[i*VEC + m]);
      end
      cfg_write(layer, CFG_WEIGHT, row_i, row, 0, 0);
    end
  endtask

  task automatic load_dense_out();
    for (int row_i = 0; row_i < NH / ONPR; row_i++) begin
      automatic logic [CFGW-1:0] row = '0;
      for (int s = 0; s < ONPR; s++)
        for (int n = 0; n < NO; n++) begin
          automatic int c = $urandom_range(0, (1 << WB) - 1);
          row[(s*NO + n)*WB +: WB] = WB'(c);
          wv[OFF3 + (row_i*ONPR + s)*NO + n] = wval(c);
        end
      cfg_write(2, CFG_WEIGHT, row_i, row, 0, 0);
    end
  endtask

  // Pre-activations of one layer for all images, then batch-norm constants
  // chosen from their spread, written to the layer.
  task automatic layer_stats_and_bn(int layer, int nin, int nout, int off, int src);
    for (int k = 0; k < NIMG; k++)
      for (int n = 0; n < nout; n++) begin
        automatic longint x = 0;
        for (int i = 0; i < nin; i++) begin
          automatic int a = (src == 0) ? img[k][i] : (src == 1) ? h1[k][i] : h2[k][i];
          if (a != 0) x += longint'(a) * wv[off + i*nout + n];
        end
        xs[k][n] = x;
      end
    for (int n = 0; n < nout; n++) begin
      automatic longint mn = xs[0][n], mx = xs[0][n], sum = 0, g, b;
      for (int k = 0; k < NIMG; k++) begin
        if (xs[k][n] < mn) mn = xs[k][n];
        if (xs[k][n] > mx) mx = xs[k][n];
        sum += xs[k][n];
      end
      g = (longint'(3 << AB) * FRAC_DIV) / (mx - mn + 1);
      g = g * $urandom_range(50, 150) / 100;
      if (g < 1) g = 1;
      if (g > 32767) g = 32767;
      b = -(sum / NIMG) * g + longint'($signed($urandom_range(0, 5 << (AB - 2))) - (2 << (AB - 2))) * FRAC_DIV;
      if (b > 64'sd2147483647) b = 64'sd2147483647;
      if (b < -64'sd2147483648) b = -64'sd2147483648;
      gam[layer][n] = int'(g);
      bet[layer][n] = int'(b);
      cfg_write(layer, CFG_BN, n, '0, int'(g), int'(b));
    end
    for (int k = 0; k < NIMG; k++)
      for (int n = 0; n < nout; n++) begin
        automatic longint y = floor_div(xs[k][n] * gam[layer][n] + longint'(bet[layer][n]), FRAC_DIV);
        if (layer < 2) begin
          automatic int a = (y < 0) ? 0 : (y > (1 << AB) - 1) ? (1 << AB) - 1 : int'(y);
          if (y < 0) relu_zero++;
          if (y > (1 << AB) - 1) relu_clip++;
          if (layer == 0) h1[k][n] = a; else h2[k][n] = a;
        end else begin
          sc[k][n] = (y > (1 << (SW - 1)) - 1) ? (1 << (SW - 1)) - 1 :
                     (y < -(1 << (SW - 1))) ? -(1 << (SW - 1)) : int'(y);
        end
      end
  endtask

  // ------------------------------------------------ mechanism counters
  int issues [3], idx_reuse [2], decompress_ops [2], stalls [4], overlap, starts [3];
  always @(posedge clk) if (rst_n) begin
    automatic int busy = 0;
    if (u_dut.u_layer1.u_ctrl.issue) begin issues[0]++; busy++; end
    if (u_dut.u_layer2.u_ctrl.issue) begin issues[1]++; busy++; end
    if (u_dut.u_layer3.u_ctrl.issue) begin issues[2]++; busy++; end
    if (busy >= 2) overlap++;
    if (u_dut.u_layer1.u_ctrl.issue && !u_dut.u_layer1.u_ctrl.i_re) idx_reuse[0]++;
    if (u_dut.u_layer2.u_ctrl.issue && !u_dut.u_layer2.u_ctrl.i_re) idx_reuse[1]++;
    if (u_dut.u_layer1.u_ctrl.acc_en && !(&u_dut.u_layer1.w_mask)) decompress_ops[0]++;
    if (u_dut.u_layer2.u_ctrl.acc_en && !(&u_dut.u_layer2.w_mask)) decompress_ops[1]++;
    if (pix_valid && !pix_ready) stalls[0]++;
    if (u_dut.h1_valid && !u_dut.h1_ready) stalls[1]++;
    if (u_dut.h2_valid && !u_dut.h2_ready) stalls[2]++;
    if (res_valid && !res_ready) stalls[3]++;
    if (u_dut.u_layer1.u_ctrl.zs_load) starts[0]++;
    if (u_dut.u_layer2.u_ctrl.zs_load) starts[1]++;
    if (u_dut.u_layer3.u_ctrl.zs_load) starts[2]++;
  end

  // --------------------------------------------------------------- test
  int results = 0;
  bit stream_done = 0;

  initial begin
    longint nnz [3] = '{0, 0, 0};
    wv = new[NW];
    for (int k = 0; k < NIMG; k++)
      for (int i = 0; i < NI; i++)
        img[k][i] = (k == 1) ? 0 :
                    ($urandom_range(0, 99) < 10 + 10 * (k % 3)) ? $urandom_range(1, (1 << AB) - 1) : 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_cgs(0, NI, OFF1);
    load_cgs(1, NH, OFF2);
    load_dense_out();
    layer_stats_and_bn(0, NI, NH, OFF1, 0);
    layer_stats_and_bn(1, NH, NH, OFF2, 1);
    layer_stats_and_bn(2, NH, NO, OFF3, 2);
    for (int k = 0; k < NIMG; k++) begin
      for (int i = 0; i < NI; i++) if (img[k][i] != 0) nnz[0]++;
      for (int i = 0; i < NH; i++) if (h1[k][i] != 0) nnz[1]++;
      for (int i = 0; i < NH; i++) if (h2[k][i] != 0) nnz[2]++;
    end
    $display("reference ready: nnz per layer %0d %0d %0d", nnz[0], nnz[1], nnz[2]);

    // stream the images; scores are collected below
    fork
      begin
        for (int k = 0; k < NIMG; k++)
          for (int i = 0; i < NI; i++) begin
            pix_valid = ($urandom_range(0, 9) != 0);
            while (!pix_valid) begin
              @(negedge clk);
              pix_valid = ($urandom_range(0, 9) != 0);
            end
            pix_data = AB'(img[k][i]);
            @(posedge clk);
            while (!pix_ready) @(posedge clk);
            @(negedge clk);
            pix_valid = 0;
          end
        stream_done = 1;
      end
      begin
        // hold the first result long enough for every layer to back up
        while (!res_valid) @(negedge clk);
        repeat (6 * NI) @(negedge clk);
        while (results < NIMG) begin
          @(negedge clk);
          res_ready = ($urandom_range(0, 3) == 0);
          @(posedge clk);
          if (res_valid && res_ready) begin
            for (int n = 0; n < NO; n++)
              check($sformatf("image %0d score %0d", results, n),
                    longint'($signed(res_score[n*SW +: SW])), longint'(sc[results][n]));
            results++;
          end
        end
        @(negedge clk);
        res_ready = 0;
      end
    join

    check("results", results, NIMG);
    check("layer 1 issue cycles = non-zero pixels", issues[0], nnz[0]);
    check("layer 2 issue cycles = non-zero activations", issues[1], nnz[1]);
    check("layer 3 issue cycles = non-zero activations", issues[2], nnz[2]);
    for (int l = 0; l < 3; l++) check("images per layer", starts[l], NIMG);
    $display("COUNT zero_skipped_inputs=%0d index_reuse=%0d,%0d cgs_decompress=%0d,%0d",
             longint'(NIMG) * (NI + 2 * NH) - issues[0] - issues[1] - issues[2],
             idx_reuse[0], idx_reuse[1], decompress_ops[0], decompress_ops[1]);
    $display("COUNT stalls pix=%0d l1->l2=%0d l2->l3=%0d out=%0d layer_overlap=%0d relu_zero=%0d relu_clip=%0d",
             stalls[0], stalls[1], stalls[2], stalls[3], overlap, relu_zero, relu_clip);
    check("zero skipping happened", (longint'(NIMG) * (NI + 2 * NH) - issues[0] - issues[1] - issues[2]) > 0, 1);
    check("index reuse happened", (idx_reuse[0] > 0) && (idx_reuse[1] > 0), 1);
    check("CGS decompression happened", (decompress_ops[0] > 0) && (decompress_ops[1] > 0), 1);
    check("input back-pressure happened", stalls[0] > 0, 1);
    check("layer-to-layer stall happened", (stalls[1] > 0) && (stalls[2] > 0), 1);
    check("output back-pressure happened", stalls[3] > 0, 1);
    check("layers ran concurrently", overlap > 0, 1);
    check("ReLU zeroing happened", relu_zero > 0, 1);
    check("ReLU clipping happened", relu_clip > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: %0d results", results);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
