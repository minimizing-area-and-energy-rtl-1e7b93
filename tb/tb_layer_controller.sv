// tb_layer_controller: drives the controller at its default size (784
// inputs, 16-input block-rows, 8 inputs per weight row) with random sparse
// input vectors held in a model of the input buffer. Checks: one issue per
// non-zero input in increasing order, weight row address and slice, index
// reads exactly when the block-row changes, the activation reaching the
// accumulator two cycles after its issue, one buffer release, the result
// latency of nnz + 3 cycles, and that out_valid holds until out_ready.
module tb_layer_controller;
  localparam int NIN = 784, NPR = 8, BLK = 16;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_full = 0, in_release, w_re, i_re, s1_valid, acc_clr, acc_en, out_valid, out_ready = 0;
  logic [NIN-1:0] nz_mask;
  logic [9:0] buf_rd_idx;
  logic [7:0] buf_rd_data, acc_act;
  logic [6:0] w_addr;
  logic [5:0] i_addr;
  logic [2:0] s1_slice;
  logic [7:0] vec [NIN];

  assign buf_rd_data = vec[buf_rd_idx];
  for (genvar i = 0; i < NIN; i++) begin : g_nz
    assign nz_mask[i] = (vec[i] != 0);
  end

  layer_controller u_dut (.clk, .rst_n, .in_full, .nz_mask, .in_release, .buf_rd_idx,
                          .buf_rd_data, .w_re, .w_addr, .i_re, .i_addr, .s1_valid,
                          .s1_slice, .acc_clr, .acc_en, .acc_act, .out_valid, .out_ready);

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  // expectations, filled when a vector starts
  int exp_idx [$];
  int issued_slice [$];
  int issued_act [$];
  int pend_act [$];
  int last_irow;
  int releases, issues, accs;

  always @(posedge clk) if (rst_n) begin
    if (w_re) begin
      automatic int e = (exp_idx.size() > 0) ? exp_idx.pop_front() : -1;
      issues++;
      check("issue index", int'(buf_rd_idx), e);
      check("weight row", int'(w_addr), e / NPR);
      check("index read when block-row changes", int'(i_re), int'(e / BLK != last_irow));
      if (i_re) check("index row", int'(i_addr), e / BLK);
      last_irow = e / BLK;
      issued_slice.push_back(e % NPR);
      issued_act.push_back(int'(vec[e]));
    end else begin
      check("no index read without issue", int'(i_re), 0);
    end
    if (s1_valid) begin
      check("slice", int'(s1_slice), issued_slice.pop_front());
      pend_act.push_back(issued_act.pop_front());
    end
    if (acc_en) begin
      accs++;
      check("accumulated activation", int'(acc_act), pend_act.pop_front());
    end
    if (in_release) releases++;
  end

  // input-buffer model: full until released
  always @(posedge clk) if (in_release) in_full <= 1'b0;

  task automatic run_vector(int density, int ready_delay);
    int nnz = 0, lat = 0;
    for (int i = 0; i < NIN; i++) begin
      vec[i] = ($urandom_range(0, 99) < density) ? 8'($urandom_range(1, 255)) : 8'd0;
      if (vec[i] != 0) begin nnz++; exp_idx.push_back(i); end
    end
    releases = 0; issues = 0; accs = 0; last_irow = -1;
    @(negedge clk); in_full = 1;
    while (!out_valid) begin
      @(negedge clk);
      lat++;
      if (lat > 2000) break;
    end
    check("latency nnz+3", lat, nnz + 3);
    repeat (ready_delay) begin
      @(negedge clk);
      check("valid held", int'(out_valid), 1);
    end
    out_ready = 1;
    @(negedge clk); out_ready = 0;
    check("valid dropped", int'(out_valid), 0);
    check("issues", issues, nnz);
    check("accumulates", accs, nnz);
    check("one release", releases, 1);
    check("all issued", exp_idx.size(), 0);
  endtask

  initial begin
    for (int i = 0; i < NIN; i++) vec[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_vector(0, 0);
    run_vector(100, 2);
    for (int t = 0; t < 10; t++) run_vector($urandom_range(5, 40), $urandom_range(0, 4));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
