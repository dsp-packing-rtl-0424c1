// tb_lsb_calc -- exhaustive test of the product-LSB circuit for K = 1, 2, 3.
//
// For every pair of 4-bit operands (a unsigned, w two's complement) the K
// outputs must equal the K low bits of the integer product a*w. Includes
// the worked example a_1 = 3, w_0 = -7, whose two low product bits are 11.
module tb_lsb_calc;

  int checks = 0, failures = 0;

  logic [3:0] a, w;
  logic [0:0] p1;
  logic [1:0] p2;
  logic [2:0] p3;

  lsb_calc #(.K(1)) u_k1 (.a_lsb(a[0:0]), .w_lsb(w[0:0]), .p_lsb(p1));
  lsb_calc #(.K(2)) u_k2 (.a_lsb(a[1:0]), .w_lsb(w[1:0]), .p_lsb(p2));
  lsb_calc #(.K(3)) u_k3 (.a_lsb(a[2:0]), .w_lsb(w[2:0]), .p_lsb(p3));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%0d w=%0d", what, a, $signed(w));
    end
  endtask

  initial begin
    for (int av = 0; av < 16; av++) begin
      for (int wv = -8; wv < 8; wv++) begin
        automatic int prod = av * wv;
        a = 4'(av);
        w = 4'(wv);
        #1;
        check(p1 == 1'(prod), "K=1");
        check(p2 == 2'(prod), "K=2");
        check(p3 == 3'(prod), "K=3");
      end
    end
    a = 4'd3; w = 4'b1001;
    #1;
    check(p2 == 2'b11, "worked example");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
