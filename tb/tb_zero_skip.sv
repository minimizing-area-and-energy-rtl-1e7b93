// tb_zero_skip: loads random sparse masks (and the all-zero and all-one
// cases) into zero_skip at its default size of 784 and checks that the
// indices come out in increasing order, one per cycle, exactly the set
// positions of the mask, and that valid drops right after the last one.
module tb_zero_skip;
  localparam int N = 784;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, load = 0, advance = 0, valid;
  logic [N-1:0] mask;
  logic [9:0] idx;

  always #5 clk = ~clk;

  zero_skip u_dut (.clk, .rst_n, .load, .mask, .advance, .valid, .idx);

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic run_mask(logic [N-1:0] m);
    int expect_pos [$];
    int cycles = 0;
    for (int i = 0; i < N; i++) if (m[i]) expect_pos.push_back(i);
    @(negedge clk); mask = m; load = 1;
    @(negedge clk); load = 0; advance = 1;
    while (valid) begin
      if (expect_pos.size() == 0) begin check("extra index", 1, 0); break; end
      check("index", int'(idx), expect_pos.pop_front());
      cycles++;
      @(negedge clk);
    end
    advance = 0;
    check("left over", expect_pos.size(), 0);
    check("cycles", cycles, $countones(m));
  endtask

  initial begin
    logic [N-1:0] m;
    mask = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_mask('0);
    run_mask('1);
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < N; i++) m[i] = ($urandom_range(0, 99) < 20);
      run_mask(m);
    end
    // hold: without advance the index stays
    for (int i = 0; i < N; i++) m[i] = (i % 7 == 3);
    @(negedge clk); mask = m; load = 1;
    @(negedge clk); load = 0;
    repeat (3) @(negedge clk);
    check("hold idx", int'(idx), 3);
    check("hold valid", int'(valid), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
