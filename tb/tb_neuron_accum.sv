// tb_neuron_accum: at the default size (512 lanes, 8-bit activations, 3-bit
// weights, 22-bit accumulators) accumulates random activation/weight/mask
// sequences, with idle cycles in between, and compares every accumulator
// with integer sums after each sequence; clr must zero all lanes.
module tb_neuron_accum;
  localparam int NOUT = 512, AB = 8, WB = 3, ACC_W = 22;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [AB-1:0] act;
  logic [NOUT*WB-1:0] w;
  logic [NOUT-1:0] wmask;
  logic signed [ACC_W-1:0] acc [NOUT];
  longint ref_acc [NOUT];

  always #5 clk = ~clk;

  neuron_accum u_dut (.clk, .rst_n, .clr, .en, .act, .w, .wmask, .acc);

  task automatic compare(string what);
    for (int n = 0; n < NOUT; n++) begin
      checks++;
      if (longint'(acc[n]) != ref_acc[n]) begin
        failures++;
        if (failures < 10) $display("FAIL %s lane %0d: got %0d exp %0d", what, n, acc[n], ref_acc[n]);
      end
    end
  endtask

  initial begin
    act = '0; w = '0; wmask = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 6; s++) begin
      @(negedge clk); clr = 1;
      for (int n = 0; n < NOUT; n++) ref_acc[n] = 0;
      @(negedge clk); clr = 0;
      compare("clear");
      for (int t = 0; t < 100 + 100 * s; t++) begin
        en = ($urandom_range(0, 3) != 0);
        act = AB'($urandom);
        if (s == 5) act = '1;
        for (int n = 0; n < NOUT; n++) begin
          automatic int wv;
          w[n*WB +: WB] = WB'($urandom);
          if (s == 5) w[n*WB +: WB] = (n % 2) ? 3'b100 : 3'b011;
          wmask[n] = ($urandom_range(0, 7) == 0) ? 1'b0 : 1'b1;
          wv = int'(w[n*WB +: WB]);
          if (wv > 3) wv -= 8;
          if (en && wmask[n]) ref_acc[n] += longint'(act) * wv;
        end
        @(negedge clk);
      end
      en = 0;
      compare("sum");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
