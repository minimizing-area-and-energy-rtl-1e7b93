// tb_fc_layer: one CGS hidden layer at reduced size (96 inputs, 64 outputs,
// 16x16 blocks, CGS 2X so 2 kept blocks per block-row, 64-weight SRAM rows
// holding 2 inputs each) fed by a serial input buffer. Random kept blocks,
// weights and batch-norm constants are loaded through the cfg port; random
// sparse vectors are streamed in; each output vector is compared with
// floor((x'*gamma' + beta') / 4096) clipped to 0..255, x' computed from the
// dense reference matrix. It checks the result latency (nnz + 3 cycles after
// the buffer is full), that out_valid holds under back-pressure, and that the
// next vector can be streamed in while the previous result waits.
module tb_fc_layer;
  import dnn_pkg::*;
  localparam int NIN = 96, NOUT = 64, BLK = 16, RATIO = 2, ROWW = 64, WB = 3, AB = 8;
  localparam int NB = NOUT / BLK, XW = $clog2(NB), KEPT = NB / RATIO, VEC = KEPT * BLK;
  localparam int NPR = ROWW / VEC, CFGW = ROWW * WB, NVEC = 12;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_valid = 0, s_ready, p_ready, out_valid, out_ready = 0, cfg_we = 0;
  logic [AB-1:0] s_data = '0;
  logic [NOUT*AB-1:0] out_data;
  cfg_sel_e cfg_sel = CFG_WEIGHT;
  logic [15:0] cfg_addr = '0;
  logic [CFGW-1:0] cfg_wdata = '0;
  logic [15:0] cfg_gamma = '0;
  logic [31:0] cfg_beta = '0;

  fc_layer #(.NIN(NIN), .NOUT(NOUT), .CGS_RATIO(RATIO), .ROW_WEIGHTS(ROWW), .CFG_W(CFGW)) u_dut (
    .clk, .rst_n, .s_valid, .s_ready, .s_data, .p_valid(1'b0), .p_ready, .p_data('0),
    .out_valid, .out_ready, .out_data, .cfg_we, .cfg_sel, .cfg_addr, .cfg_wdata,
    .cfg_gamma, .cfg_beta);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  int wv [NIN][NOUT];
  int codes [NIN][VEC];
  int gam [NOUT], bet [NOUT];
  int vecs [NVEC][NIN];

  task automatic cfg_write(cfg_sel_e sel, int addr, logic [CFGW-1:0] data, int g, int b);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_addr = 16'(addr); cfg_wdata = data;
    cfg_gamma = 16'(g); cfg_beta = 32'(b);
    @(negedge clk);
    cfg_we = 0;
  endtask

  function automatic longint floor_div(longint v, longint d);
    longint q = v / d;
    if ((v % d != 0) && (v < 0)) q -= 1;
    return q;
  endfunction

  // result latency monitor: first cycle full with the layer idle -> out_valid
  int full_cycle = -1, cyc = 0, lat_q [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (u_dut.u_ctrl.zs_load) full_cycle <= cyc;
    if (out_valid && !$past(out_valid)) lat_q.push_back(cyc - full_cycle);
  end

  initial begin
    for (int i = 0; i < NIN; i++) for (int n = 0; n < NOUT; n++) wv[i][n] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < NIN / BLK; r++) begin
      automatic int blocks [$];
      automatic logic [CFGW-1:0] row = '0;
      for (int b = 0; b < NB; b++) blocks.push_back(b);
      blocks.shuffle();
      for (int k = 0; k < KEPT; k++) row[k*XW +: XW] = XW'(blocks[k]);
      cfg_write(CFG_INDEX, r, row, 0, 0);
      for (int i = r * BLK; i < (r + 1) * BLK; i++)
        for (int k = 0; k < KEPT; k++)
          for (int j = 0; j < BLK; j++) begin
            automatic int c = $urandom_range(0, 7);
            codes[i][k*BLK + j] = c;
            wv[i][blocks[k]*BLK + j] = (c > 3) ? c - 8 : c;
          end
    end
    for (int r = 0; r < NIN / NPR; r++) begin
      automatic logic [CFGW-1:0] row = '0;
      for (int s = 0; s < NPR; s++)
        for (int m = 0; m < VEC; m++) row[(s*VEC + m)*WB +: WB] = WB'(codes[r*NPR + s][m]);
      cfg_write(CFG_WEIGHT, r, row, 0, 0);
    end
    for (int n = 0; n < NOUT; n++) begin
      gam[n] = $urandom_range(200, 2000);
      bet[n] = $signed($urandom_range(0, 800000)) - 400000;
      cfg_write(CFG_BN, n, '0, gam[n], bet[n]);
    end
    for (int v = 0; v < NVEC; v++)
      for (int i = 0; i < NIN; i++)
        vecs[v][i] = (v == 3) ? 0 : ($urandom_range(0, 99) < 25) ? $urandom_range(1, 255) : 0;

    fork
      // stream all vectors
      for (int v = 0; v < NVEC; v++)
        for (int i = 0; i < NIN; i++) begin
          @(negedge clk);
          s_valid = 1; s_data = AB'(vecs[v][i]);
          @(posedge clk);
          while (!s_ready) @(posedge clk);
          @(negedge clk);
          s_valid = 0;
        end
      // collect results with random back-pressure
      for (int v = 0; v < NVEC; v++) begin
        automatic int nnz = 0;
        while (!out_valid) @(negedge clk);
        repeat ($urandom_range(0, 120)) begin
          @(negedge clk);
          check("valid held", int'(out_valid), 1);
        end
        for (int n = 0; n < NOUT; n++) begin
          automatic longint x = 0, y;
          for (int i = 0; i < NIN; i++) x += longint'(vecs[v][i]) * wv[i][n];
          y = floor_div(x * gam[n] + bet[n], 4096);
          y = (y < 0) ? 0 : (y > 255) ? 255 : y;
          check($sformatf("vector %0d neuron %0d", v, n), longint'(out_data[n*AB +: AB]), y);
        end
        for (int i = 0; i < NIN; i++) if (vecs[v][i] != 0) nnz++;
        if (lat_q.size() > 0) check("latency nnz+3", lat_q.pop_front(), nnz + 3);
        else check("latency recorded", 0, 1);
        out_ready = 1;
        @(negedge clk);
        out_ready = 0;
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
