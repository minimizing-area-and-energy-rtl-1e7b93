// tb_batch_norm: random and corner values of x', gamma' and beta' at the
// default widths (22-bit x', 16-bit gamma' with 12 fraction bits, 32-bit
// beta'); the reference is floor((x'*gamma' + beta') / 4096) computed with
// 64-bit integers and an explicit floor division.
module tb_batch_norm;
  int checks = 0, failures = 0;

  logic signed [21:0] x;
  logic signed [15:0] gamma;
  logic signed [31:0] beta;
  logic signed [26:0] y;

  batch_norm u_dut (.x, .gamma, .beta, .y);

  function automatic longint floor_div(longint v, longint d);
    longint q = v / d;
    if ((v % d != 0) && (v < 0)) q -= 1;
    return q;
  endfunction

  task automatic one(longint xv, longint gv, longint bv);
    longint e;
    x = 22'(xv); gamma = 16'(gv); beta = 32'(bv);
    #1;
    e = floor_div(longint'(x) * longint'(gamma) + longint'(beta), 4096);
    checks++;
    if (longint'(y) != e) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d g=%0d b=%0d: got %0d exp %0d", x, gamma, beta, y, e);
    end
  endtask

  initial begin
    one(0, 0, 0);
    one(-1, 1, 0);
    one(2097151, 32767, 2147483647);
    one(-2097152, -32768, -2147483648);
    one(-2097152, 32767, -2147483648);
    one(1000, 4096, -4096000);
    for (int t = 0; t < 20000; t++)
      one(longint'($signed($urandom)), longint'($signed($urandom)), longint'($signed($urandom)));
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
