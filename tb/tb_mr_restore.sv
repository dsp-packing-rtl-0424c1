// tb_mr_restore -- MSB restoration on the 4x4-bit packing with padding -2
// (a_off = {0,6}, w_off = {0,12}, r_off = {0,6,12,18}, 8-bit results).
//
// For all 2^16 operand sets the overlapped word P = sum a_i*w_j*2^r_off is
// formed here and its raw 8-bit fields are fed in. Checks:
//   * each restored field equals the raw field minus the two low bits of
//     the next result placed at bits 7:6 (modulo 256); the top one is raw;
//   * with en = 0 the fields pass unchanged;
//   * the worked example a = {10, 3}, w = {-7, -4}: raw a_0w_0 = 122,
//     restored -70;
//   * error statistics against the exact products: a_0w_0 is always exact,
//     the worst error is 2 and the mean absolute error over all results is
//     0.47 to 0.48 (published 0.47, MR-Overpacking delta = -2).
module tb_mr_restore;

  int checks = 0, failures = 0;

  localparam int unsigned AO [2] = '{0, 6};
  localparam int unsigned WO [2] = '{0, 12};
  localparam int ROFF [4] = '{0, 6, 12, 18};

  logic            en;
  logic [1:0][3:0] a, w;
  logic [3:0][7:0] r_in, r_out;

  mr_restore #(.NA(2), .A_W(4), .W_W(4), .R_W(8), .A_OFF(AO), .W_OFF(WO)) dut (
    .en(en), .a_vec(a), .w_vec(w), .r_in(r_in), .r_out(r_out));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h w=%h", what, a, w);
    end
  endtask

  initial begin
    longint abs_err = 0;
    int wce = 0, err0 = 0;
    for (int v = 0; v < 65536; v++) begin
      automatic int av [2], wv [2], prod [4];
      automatic longint pw = 0;
      av[0] = v & 15; av[1] = (v >> 4) & 15;
      wv[0] = ((v >> 8) & 15) - (((v >> 8) & 8) << 1);
      wv[1] = ((v >> 12) & 15) - (((v >> 12) & 8) << 1);
      for (int n = 0; n < 4; n++) begin
        prod[n] = av[n % 2] * wv[n / 2];
        pw += longint'(prod[n]) * (64'(1) << ROFF[n]);
      end
      a = {4'(av[1]), 4'(av[0])};
      w = {4'(wv[1]), 4'(wv[0])};
      for (int n = 0; n < 4; n++) r_in[n] = 8'(pw >>> ROFF[n]);
      en = 1'b0;
      #1;
      check(r_out == r_in, "pass-through");
      en = 1'b1;
      #1;
      for (int n = 0; n < 4; n++) begin
        automatic logic [7:0] e = r_in[n];
        automatic int d;
        if (n < 3) e = e - {2'(prod[n + 1]), 6'b0};
        check(r_out[n] == e, "restored field");
        d = int'($signed(r_out[n])) - prod[n];
        if (d < 0) d = -d;
        abs_err += d;
        if (d > wce) wce = d;
        if (n == 0 && d != 0) err0++;
      end
      if (av[0] == 10 && av[1] == 3 && wv[0] == -7 && wv[1] == -4) begin
        check(r_in[0] == 8'd122, "example raw field");
        check($signed(r_out[0]) == -70, "example restored");
      end
    end
    check(err0 == 0, "a0w0 exact");
    check(wce == 2, $sformatf("WCE %0d", wce));
    check(abs_err * 100 >= 47 * 4 * 65536 - 2 * 65536 && abs_err * 100 < 49 * 4 * 65536,
          $sformatf("MAE %f", real'(abs_err) / (4 * 65536)));
    $display("MR delta=-2: MAE %0.3f WCE %0d", real'(abs_err) / (4 * 65536), wce);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
