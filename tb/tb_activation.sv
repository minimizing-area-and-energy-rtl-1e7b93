// tb_activation: checks the ReLU/8-bit quantiser (negative -> 0, above 255
// -> 255) and the linear 16-bit saturating output against a reference, for
// random values of all magnitudes and the boundary values.
module tb_activation;
  int checks = 0, failures = 0;

  logic signed [26:0] y;
  logic [7:0]  a_relu;
  logic [15:0] a_lin;

  activation                                  u_relu (.y(y), .a(a_relu));
  activation #(.IW(27), .OW(16), .RELU(1'b0)) u_lin  (.y(y), .a(a_lin));

  task automatic one(int v);
    int er, el;
    y = 27'(v);
    #1;
    er = (v < 0) ? 0 : (v > 255) ? 255 : v;
    el = (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
    checks += 2;
    if (int'(a_relu) != er) begin
      failures++;
      if (failures < 10) $display("FAIL relu %0d: got %0d exp %0d", v, a_relu, er);
    end
    if (int'($signed(a_lin)) != el) begin
      failures++;
      if (failures < 10) $display("FAIL lin %0d: got %0d exp %0d", v, $signed(a_lin), el);
    end
  endtask

  initial begin
    int bounds [] = '{0, 1, -1, 254, 255, 256, 32767, 32768, -32768, -32769,
                      67108863, -67108864};
    foreach (bounds[i]) one(bounds[i]);
    for (int t = 0; t < 5000; t++) begin
      automatic int sh = $urandom_range(0, 26);
      automatic int v = $signed($urandom) >>> (31 - sh);
      one(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
