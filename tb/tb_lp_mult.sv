// tb_lp_mult: exhaustive check of the low-precision products for 1-, 2- and
// 3-bit weights (8-bit activations) against values computed from the weight
// tables: 1 bit -1/+1, 2 bits -1/4,-1/2,+1/2,+1/4 (x4), 3 bits signed integer.
// Also checks that en = 0 gives 0.
module tb_lp_mult;
  int checks = 0, failures = 0;

  logic       en;
  logic [7:0] a;
  logic [0:0] w1;
  logic [1:0] w2;
  logic [2:0] w3;
  logic signed [9:0]  p1;
  logic signed [10:0] p2;
  logic signed [11:0] p3;

  lp_mult #(.ABITS(8), .WBITS(1)) u_m1 (.en(en), .a(a), .w(w1), .p(p1));
  lp_mult #(.ABITS(8), .WBITS(2)) u_m2 (.en(en), .a(a), .w(w2), .p(p2));
  lp_mult                          u_m3 (.en(en), .a(a), .w(w3), .p(p3));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%0d: got %0d exp %0d", what, a, got, exp);
    end
  endtask

  initial begin
    int e1, e2, e3;
    int quarter_tab [4] = '{-1, -2, 2, 1};  // weight*4 for codes 00,01,10,11
    for (int ie = 0; ie < 2; ie++) begin
      for (int ia = 0; ia < 256; ia++) begin
        for (int iw = 0; iw < 8; iw++) begin
          en = ie[0]; a = 8'(ia); w1 = 1'(iw); w2 = 2'(iw); w3 = 3'(iw);
          #1;
          e1 = ie ? ((iw % 2) ? ia : -ia) : 0;
          e2 = ie ? ia * quarter_tab[iw % 4] : 0;
          e3 = ie ? ia * ((iw < 4) ? iw : iw - 8) : 0;
          check("w1", int'(p1), e1);
          check("w2", int'(p2), e2);
          check("w3", int'(p3), e3);
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
