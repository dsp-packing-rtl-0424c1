// tb_table1_error_stats -- error statistics of (MR-)Overpacking with 4-bit
// operands, against the published table of packing results.
//
// Six packed multiplier units, each packing a_0, a_1 (unsigned 4-bit) and
// w_0, w_1 (signed 4-bit) into one DSP with padding delta = -1, -2, -3
// (a_off = {0, 8+delta}, w_off = {0, 2*(8+delta)}), with and without MSB
// restoration, run all 2^16 operand sets. For each unit the mean absolute
// error (MAE), error probability (EP) and worst-case error (WCE) over the
// four results are computed against the exact products and compared with
// the published values (MAE to within 0.015, EP to within 0.02 points):
//
//                     MAE     EP        WCE
//   Overpacking -1   24.27   49.85 %   129
//   Overpacking -2   37.95   58.64 %   194   (EP not checked, see below)
//   Overpacking -3   45.53   78.26 %   228
//   MR -1             0.37   37.35 %     1
//   MR -2             0.47   41.48 %     2
//   MR -3             0.78   49.95 %     4
//
// For plain Overpacking with delta = -2 this arithmetic gives EP 64.90 %
// although MAE and WCE agree; the published 58.64 % is not reproduced.
// Every unit output is also checked against the integer reference model.
module tb_table1_error_stats;
  import dsp_pack_pkg::*;
  import pack_ref_pkg::*;

  localparam int NV = 65536;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic            vld;
  logic [1:0][3:0] a, w;
  logic            ov [6];
  logic [3:0][7:0] r [6];

  localparam int unsigned AO1 [2] = '{0, 7};
  localparam int unsigned WO1 [2] = '{0, 14};
  localparam int unsigned AO2 [2] = '{0, 6};
  localparam int unsigned WO2 [2] = '{0, 12};
  localparam int unsigned AO3 [2] = '{0, 5};
  localparam int unsigned WO3 [2] = '{0, 10};

  packed_mult_unit #(.A_OFF(AO1), .W_OFF(WO1), .MR_EN(1'b0)) u_op1 (.clk(clk), .rst(rst),
    .in_valid(vld), .corr_mode(CORR_NONE), .a_vec(a), .w_vec(w), .out_valid(ov[0]), .r_vec(r[0]));
  packed_mult_unit #(.A_OFF(AO2), .W_OFF(WO2), .MR_EN(1'b0)) u_op2 (.clk(clk), .rst(rst),
    .in_valid(vld), .corr_mode(CORR_NONE), .a_vec(a), .w_vec(w), .out_valid(ov[1]), .r_vec(r[1]));
  packed_mult_unit #(.A_OFF(AO3), .W_OFF(WO3), .MR_EN(1'b0)) u_op3 (.clk(clk), .rst(rst),
    .in_valid(vld), .corr_mode(CORR_NONE), .a_vec(a), .w_vec(w), .out_valid(ov[2]), .r_vec(r[2]));
  packed_mult_unit #(.A_OFF(AO1), .W_OFF(WO1), .MR_EN(1'b1)) u_mr1 (.clk(clk), .rst(rst),
    .in_valid(vld), .corr_mode(CORR_NONE), .a_vec(a), .w_vec(w), .out_valid(ov[3]), .r_vec(r[3]));
  packed_mult_unit #(.A_OFF(AO2), .W_OFF(WO2), .MR_EN(1'b1)) u_mr2 (.clk(clk), .rst(rst),
    .in_valid(vld), .corr_mode(CORR_NONE), .a_vec(a), .w_vec(w), .out_valid(ov[4]), .r_vec(r[4]));
  packed_mult_unit #(.A_OFF(AO3), .W_OFF(WO3), .MR_EN(1'b1)) u_mr3 (.clk(clk), .rst(rst),
    .in_valid(vld), .corr_mode(CORR_NONE), .a_vec(a), .w_vec(w), .out_valid(ov[5]), .r_vec(r[5]));

  // published values, index = unit
  real pub_mae [6] = '{24.27, 37.95, 45.53, 0.37, 0.47, 0.78};
  real pub_ep  [6] = '{49.85, 58.64, 78.26, 37.35, 41.48, 49.95};
  int  pub_wce [6] = '{129, 194, 228, 1, 2, 4};
  string name  [6] = '{"Overpacking -1", "Overpacking -2", "Overpacking -3",
                       "MR-Overpacking -1", "MR-Overpacking -2", "MR-Overpacking -3"};

  longint sum_abs [6][4];
  longint n_err   [6][4];
  int     wce     [6];
  int     q_a [$], q_w [$];
  int     n_out = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic int sx4(int v);
    return (v & 15) - ((v & 8) << 1);
  endfunction

  initial begin
    foreach (sum_abs[u, n]) begin sum_abs[u][n] = 0; n_err[u][n] = 0; end
    foreach (wce[u]) wce[u] = 0;
    vld = 0; a = '0; w = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      vld = 1;
      a = {4'(v >> 4), 4'(v)};
      w = {4'(v >> 12), 4'(v >> 8)};
      q_a.push_back(v & 255);
      q_w.push_back(v >> 8);
    end
    @(negedge clk);
    vld = 0;
    repeat (8) @(negedge clk);
    check(n_out == NV, "all operations answered");
    for (int u = 0; u < 6; u++) begin
      automatic longint tabs = 0, terr = 0;
      automatic real mae, ep;
      for (int n = 0; n < 4; n++) begin tabs += sum_abs[u][n]; terr += n_err[u][n]; end
      mae = real'(tabs) / (4.0 * NV);
      ep  = 100.0 * real'(terr) / (4.0 * NV);
      $display("%-18s MAE %6.3f (%5.2f)  EP %6.2f %% (%5.2f %%)  WCE %3d (%0d)  per result MAE %0.2f %0.2f %0.2f %0.2f",
               name[u], mae, pub_mae[u], ep, pub_ep[u], wce[u], pub_wce[u],
               real'(sum_abs[u][0]) / NV, real'(sum_abs[u][1]) / NV,
               real'(sum_abs[u][2]) / NV, real'(sum_abs[u][3]) / NV);
      check(mae > pub_mae[u] - 0.015 && mae < pub_mae[u] + 0.015, {name[u], " MAE"});
      if (u != 1) check(ep > pub_ep[u] - 0.02 && ep < pub_ep[u] + 0.02, {name[u], " EP"});
      check(wce[u] == pub_wce[u], {name[u], " WCE"});
    end
    // the lowest result is never corrupted by MR-Overpacking
    check(sum_abs[4][0] == 0, "MR -2: a0w0 exact");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst && ov[0]) begin
      automatic int va = q_a.pop_front(), vw = q_w.pop_front();
      automatic int ia [] = '{va & 15, va >> 4};
      automatic int iw [] = '{sx4(vw), sx4(vw >> 4)};
      automatic int offs [3] = '{7, 6, 5};
      n_out++;
      for (int u = 0; u < 6; u++) begin
        automatic int ref_r [] = packed_mult_ref(2, 4, 4, '{0, offs[u % 3]},
                                                 '{0, 2 * offs[u % 3]}, ia, iw, 0, u >= 3);
        check(ov[u], "valid");
        for (int n = 0; n < 4; n++) begin
          automatic int got = int'($signed(r[u][n]));
          automatic int d = got - ia[n % 2] * iw[n / 2];
          if (d < 0) d = -d;
          checks++;
          if (got != ref_r[n]) begin
            failures++;
            if (failures < 20) $display("FAIL %s r%0d=%0d ref %0d", name[u], n, got, ref_r[n]);
          end
          sum_abs[u][n] += d;
          if (d != 0) n_err[u][n]++;
          if (d > wce[u]) wce[u] = d;
        end
      end
    end
  end

  initial begin
    repeat (NV + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
