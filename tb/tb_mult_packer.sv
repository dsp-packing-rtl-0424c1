// tb_mult_packer -- exhaustive test of the operand packer.
//
// INT4 packing (a_off = {0,11}, w_off = {0,22}) for all 2^16 operand sets,
// plus random operands for the six-product layout a_off = {0,7,14},
// w_off = {0,21} with 5-bit w. Checks that B holds sum a_i*2^a_off,i, that
// A and D hold w_0 and w_1*2^w_off,1 as two's complement numbers, and that
// B*(A+D) equals the sum of all products at their result offsets.
// A mixed-width instance (a 5 and 3 bits, w 4 and 6 bits, a_off = {0,11},
// w_off = {0,20}) gets random values in the operand bits above each
// element's width and must give the same identity for the in-range values.
module tb_mult_packer;
  import dsp_pack_pkg::*;

  int checks = 0, failures = 0;

  logic [1:0][3:0]  a4;
  logic [1:0][3:0]  w4;
  logic signed [26:0] a_p4, d_p4;
  logic [17:0]        b_p4;

  logic [2:0][3:0]  a6;
  logic [1:0][4:0]  w6;
  logic signed [26:0] a_p6, d_p6;
  logic [17:0]        b_p6;

  mult_packer u_int4 (.a_vec(a4), .w_vec(w4), .a_port(a_p4), .d_port(d_p4), .b_port(b_p4));

  localparam int unsigned SIX_A_OFF [3] = '{0, 7, 14};
  localparam int unsigned SIX_W_OFF [2] = '{0, 21};

  mult_packer #(.NA(3), .A_W(4), .W_W(5), .A_OFF(SIX_A_OFF), .W_OFF(SIX_W_OFF)) u_six (
    .a_vec(a6), .w_vec(w6), .a_port(a_p6), .d_port(d_p6), .b_port(b_p6));

  localparam int unsigned MIX_A_OFF [2]  = '{0, 11};
  localparam int unsigned MIX_W_OFF [2]  = '{0, 20};
  localparam int unsigned MIX_A_WDTH [2] = '{5, 3};
  localparam int unsigned MIX_W_WDTH [2] = '{4, 6};

  logic [1:0][4:0]    am;
  logic [1:0][5:0]    wm;
  logic signed [26:0] a_pm, d_pm;
  logic [17:0]        b_pm;

  mult_packer #(.NA(2), .A_W(5), .W_W(6), .A_OFF(MIX_A_OFF), .W_OFF(MIX_W_OFF),
                .A_WDTH(MIX_A_WDTH), .W_WDTH(MIX_W_WDTH)) u_mix (
    .a_vec(am), .w_vec(wm), .a_port(a_pm), .d_port(d_pm), .b_port(b_pm));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int v = 0; v < 65536; v++) begin
      automatic int av0 = v & 15, av1 = (v >> 4) & 15;
      automatic int wv0 = ((v >> 8) & 15) - (((v >> 8) & 8) << 1);
      automatic int wv1 = ((v >> 12) & 15) - (((v >> 12) & 8) << 1);
      automatic longint prod, expect_sum;
      a4 = {4'(av1), 4'(av0)};
      w4 = {4'(wv1), 4'(wv0)};
      #1;
      check(longint'(b_p4) == longint'(av0 + av1 * 2048), "INT4 B port");
      check(longint'(a_p4) == longint'(wv0), "INT4 A port");
      check(longint'(d_p4) == longint'(wv1) * (64'(1) << 22), "INT4 D port");
      prod = longint'(b_p4) * (longint'(a_p4) + longint'(d_p4));
      expect_sum = longint'(av0 * wv0) + (longint'(av1 * wv0) <<< 11)
                 + (longint'(av0 * wv1) <<< 22) + (longint'(av1 * wv1) <<< 33);
      check(prod == expect_sum, "INT4 product identity");
    end
    for (int t = 0; t < 2000; t++) begin
      automatic int av [3], wv [2];
      automatic longint prod, expect_sum = 0;
      for (int i = 0; i < 3; i++) av[i] = $urandom % 16;
      for (int j = 0; j < 2; j++) wv[j] = int'($urandom % 32) - 16;
      a6 = {4'(av[2]), 4'(av[1]), 4'(av[0])};
      w6 = {5'(wv[1]), 5'(wv[0])};
      #1;
      for (int j = 0; j < 2; j++)
        for (int i = 0; i < 3; i++)
          expect_sum += longint'(av[i] * wv[j]) * (64'(1) << (7 * i + 21 * j));
      prod = longint'(b_p6) * (longint'(a_p6) + longint'(d_p6));
      check(prod == expect_sum, "six-product identity");
      check(b_p6[17] == av[2][3], "a_2 MSB on B bit 17");
    end
    for (int t = 0; t < 2000; t++) begin
      automatic int awd [2] = '{5, 3}, wwd [2] = '{4, 6};
      automatic int av [2], wv [2];
      automatic longint prod, expect_sum = 0;
      for (int i = 0; i < 2; i++) begin
        av[i] = $urandom % (1 << awd[i]);
        wv[i] = int'($urandom % (1 << wwd[i])) - (1 << (wwd[i] - 1));
        am[i] = 5'(av[i]) | 5'(($urandom << awd[i]) & 32'h1f);
        wm[i] = 6'(wv[i] & ((1 << wwd[i]) - 1)) | 6'(($urandom << wwd[i]) & 32'h3f);
      end
      #1;
      check(longint'(b_pm) == longint'(av[0] + av[1] * 2048), "mixed B port");
      check(longint'(a_pm) == longint'(wv[0]), "mixed A port");
      check(longint'(d_pm) == longint'(wv[1]) * (64'(1) << 20), "mixed D port");
      for (int j = 0; j < 2; j++)
        for (int i = 0; i < 2; i++)
          expect_sum += longint'(av[i] * wv[j]) * (64'(1) << (11 * i + 20 * j));
      prod = longint'(b_pm) * (longint'(a_pm) + longint'(d_pm));
      check(prod == expect_sum, "mixed-width identity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
