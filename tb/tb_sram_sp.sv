// tb_sram_sp: writes random rows into the weight-memory model at its default
// size (98 x 1536), reads them back in random order, and checks the one-cycle
// read latency and that rdata holds its value while no read is done (also
// across a write to another row).
module tb_sram_sp;
  localparam int DEPTH = 98, WIDTH = 1536;
  int checks = 0, failures = 0;

  logic clk = 0, cs = 0, we = 0;
  logic [6:0] addr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];

  always #5 clk = ~clk;

  sram_sp u_dut (.clk, .cs, .we, .addr, .wdata, .rdata);

  function automatic logic [WIDTH-1:0] rnd_row();
    logic [WIDTH-1:0] r;
    for (int i = 0; i < WIDTH / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  task automatic check(string what, logic [WIDTH-1:0] got, logic [WIDTH-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int r = 0; r < DEPTH; r++) begin
      ref_mem[r] = rnd_row();
      @(negedge clk); cs = 1; we = 1; addr = 7'(r); wdata = ref_mem[r];
    end
    @(negedge clk); cs = 0; we = 0;
    for (int t = 0; t < 300; t++) begin
      automatic int r = $urandom_range(0, DEPTH - 1);
      @(negedge clk); cs = 1; we = 0; addr = 7'(r);
      @(negedge clk); cs = 0;
      check("read", rdata, ref_mem[r]);
      // no read: value held, also across a write to another row
      addr = 7'((r + 1) % DEPTH);
      cs = 1; we = 1; wdata = rnd_row();
      @(negedge clk); cs = 0; we = 0;
      check("hold", rdata, ref_mem[r]);
      ref_mem[(r + 1) % DEPTH] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
