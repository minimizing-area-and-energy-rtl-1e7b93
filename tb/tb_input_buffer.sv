// tb_input_buffer: a serial buffer at the default 784 x 8 bits is filled from
// a stream with random gaps, then checked for full, back-pressure (s_ready
// low while full), contents, non-zero mask and refill after release. A
// parallel 512-element buffer is checked the same way for one-cycle loads.
module tb_input_buffer;
  localparam int N1 = 784, N2 = 512;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // serial instance
  logic s_valid = 0, s_ready, full1, rel1 = 0;
  logic [7:0] s_data, rd1;
  logic [9:0] idx1;
  logic [N1-1:0] nz1;
  logic p_ready_unused;
  input_buffer u_ser (.clk, .rst_n, .s_valid, .s_ready, .s_data,
                      .p_valid(1'b0), .p_ready(p_ready_unused), .p_data('0),
                      .full(full1), .release_buf(rel1), .rd_idx(idx1), .rd_data(rd1),
                      .nz_mask(nz1));

  // parallel instance
  logic p_valid = 0, p_ready, full2, rel2 = 0, s_ready_unused;
  logic [N2*8-1:0] p_data;
  logic [7:0] rd2;
  logic [8:0] idx2;
  logic [N2-1:0] nz2;
  input_buffer #(.N(N2), .SERIAL(1'b0)) u_par (
    .clk, .rst_n, .s_valid(1'b0), .s_ready(s_ready_unused), .s_data('0),
    .p_valid, .p_ready, .p_data, .full(full2), .release_buf(rel2),
    .rd_idx(idx2), .rd_data(rd2), .nz_mask(nz2));

  int accepted = 0;
  always @(posedge clk) if (s_valid && s_ready) accepted <= accepted + 1;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    logic [7:0] img [N1];
    logic [7:0] vec [N2];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      automatic int base = accepted;
      for (int i = 0; i < N1; i++) img[i] = ($urandom_range(0, 4) == 0) ? 8'($urandom_range(1, 255)) : 8'd0;
      check("empty before fill", int'(full1), 0);
      while (accepted - base < N1) begin
        s_valid = ($urandom_range(0, 3) != 0);
        s_data = img[accepted - base];
        @(negedge clk);
      end
      @(negedge clk); s_valid = 1; s_data = 8'hAA;
      check("full", int'(full1), 1);
      check("ready low when full", int'(s_ready), 0);
      @(negedge clk); s_valid = 0;
      for (int i = 0; i < N1; i++) begin
        idx1 = 10'(i); #1;
        check("serial data", int'(rd1), int'(img[i]));
        check("serial nz", int'(nz1[i]), int'(img[i] != 0));
      end
      @(negedge clk); rel1 = 1;
      @(negedge clk); rel1 = 0;
    end
    for (int round = 0; round < 3; round++) begin
      for (int i = 0; i < N2; i++) begin
        vec[i] = ($urandom_range(0, 1) == 0) ? 8'($urandom) : 8'd0;
        p_data[i*8 +: 8] = vec[i];
      end
      @(negedge clk);
      check("p_ready when empty", int'(p_ready), 1);
      p_valid = 1;
      @(negedge clk);
      p_data = '1;
      check("full after one cycle", int'(full2), 1);
      check("p_ready low when full", int'(p_ready), 0);
      @(negedge clk); p_valid = 0;
      for (int i = 0; i < N2; i++) begin
        idx2 = 9'(i); #1;
        check("parallel data", int'(rd2), int'(vec[i]));
        check("parallel nz", int'(nz2[i]), int'(vec[i] != 0));
      end
      @(negedge clk); rel2 = 1;
      @(negedge clk); rel2 = 0;
      check("empty after release", int'(full2), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
