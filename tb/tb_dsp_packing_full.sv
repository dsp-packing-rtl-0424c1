// tb_dsp_packing_full -- the default top on its full evaluation workload.
//
// INT4 unit: all 2^16 operand sets (a_0, a_1 unsigned 4-bit; w_0, w_1
// signed 4-bit) in each correction mode, one operation per cycle. Every
// result is compared with the reference model and error statistics against
// the exact products are collected per mode and compared with the published
// figures for 4-bit INT4 packing:
//   none   MAE 0.37, EP 37.35 %, WCE 1
//   full   MAE 0,    EP 0 %,     WCE 0
//   approx MAE 0.02, WCE 1 (EP is reported; this implementation gives
//          2.35 % where 3.13 % is published)
// MR-Overpacking unit: the same number of random operations, checked
// against the reference; its MAE/EP/WCE against exact products are printed.
// Packed adder: random operations; every lane is checked against a
// lane-by-lane model and the error rate of each lane against true sums is
// printed (published for a 9-bit lane: EP 51.83 %, WCE 1); the worst error
// must be 1 and lane 0 must be exact.
// Accumulating chain: one dot product of eight random INT4 outer products
// per cycle, full correction on every other one. Corrected sums must be
// exact; uncorrected ones must match the floor reading of the packed sum,
// and their error rate against the exact sums is printed.
module tb_dsp_packing_full;
  import dsp_pack_pkg::*;
  import pack_ref_pkg::*;

  localparam int NI = 3 * 65536;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic            i_vld, o_vld, a_vld;
  corr_mode_e      i_mode;
  logic [1:0][3:0] i_a, i_w;
  logic [2:0][3:0] o_a;
  logic [1:0][4:0] o_w;
  logic [4:0][8:0] ax, ay;
  logic            i_ov, o_ov, a_ov;
  logic [3:0][7:0] i_r;
  logic [5:0][8:0] o_r;
  logic [4:0][8:0] a_s;
  logic [0:0]      a_g;
  logic                 c_vld, c_full, c_ov;
  logic [7:0][1:0][3:0] c_a, c_w;
  logic [3:0][10:0]     c_r;

  dsp_packing_top dut (
    .clk(clk), .rst(rst),
    .int4_in_valid(i_vld), .int4_mode(i_mode), .int4_a(i_a), .int4_w(i_w),
    .int4_out_valid(i_ov), .int4_r(i_r),
    .ovp_in_valid(o_vld), .ovp_a(o_a), .ovp_w(o_w),
    .ovp_out_valid(o_ov), .ovp_r(o_r),
    .add_in_valid(a_vld), .add_x(ax), .add_y(ay),
    .add_out_valid(a_ov), .add_sum(a_s), .add_guard_carry(a_g),
    .acc_in_valid(c_vld), .acc_full_en(c_full), .acc_a(c_a), .acc_w(c_w),
    .acc_out_valid(c_ov), .acc_r(c_r));

  typedef struct { int t; int m; int r []; int x []; } mexp_t;
  typedef struct { int t; int s []; int x []; } aexp_t;
  mexp_t iq [$], oq [$], cq [$];
  aexp_t aq [$];

  // statistics: [mode]
  longint i_abs [3] = '{0, 0, 0};
  longint i_ne  [3] = '{0, 0, 0};
  int     i_wce [3] = '{0, 0, 0};
  longint o_abs = 0, o_ne = 0, o_n = 0;
  int     o_wce = 0;
  longint a_ne [5] = '{0, 0, 0, 0, 0};
  int     a_wce = 0, a_n = 0;
  longint c_ne = 0, c_n = 0;
  int     c_wce_full = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cycle, what);
    end
  endtask

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  initial begin
    i_vld = 0; o_vld = 0; a_vld = 0; i_mode = CORR_NONE;
    i_a = '0; i_w = '0; o_a = '0; o_w = '0; ax = '0; ay = '0;
    c_vld = 0; c_full = 0; c_a = '0; c_w = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < NI; t++) begin
      @(negedge clk);
      begin : int4_op
        automatic mexp_t e;
        automatic int v = t % 65536, m = t / 65536;
        automatic int a [] = new[2], w [] = new[2];
        a[0] = v & 15; a[1] = (v >> 4) & 15;
        w[0] = ((v >> 8) & 15) - (((v >> 8) & 8) << 1);
        w[1] = ((v >> 12) & 15) - (((v >> 12) & 8) << 1);
        i_vld = 1; i_mode = corr_mode_e'(m);
        for (int k = 0; k < 2; k++) begin i_a[k] = 4'(a[k]); i_w[k] = 4'(w[k]); end
        e.t = cycle; e.m = m;
        e.r = packed_mult_ref(2, 4, 4, '{0, 11}, '{0, 22}, a, w, m, 1'b0);
        e.x = new[4];
        for (int n = 0; n < 4; n++) e.x[n] = a[n % 2] * w[n / 2];
        iq.push_back(e);
      end
      begin : ovp_op
        automatic mexp_t e;
        automatic int a [] = new[3], w [] = new[2];
        foreach (a[i]) a[i] = $urandom % 16;
        foreach (w[j]) w[j] = int'($urandom % 32) - 16;
        o_vld = 1;
        for (int k = 0; k < 3; k++) o_a[k] = 4'(a[k]);
        for (int k = 0; k < 2; k++) o_w[k] = 5'(w[k]);
        e.t = cycle;
        e.r = packed_mult_ref(3, 4, 5, '{0, 7, 14}, '{0, 21}, a, w, 0, 1'b1);
        e.x = new[6];
        for (int n = 0; n < 6; n++) e.x[n] = a[n % 3] * w[n / 3];
        oq.push_back(e);
      end
      begin : acc_op
        automatic mexp_t e;
        automatic longint p = 0;
        automatic int roff [4] = '{0, 11, 22, 33};
        e.x = new[4]; e.r = new[4];
        foreach (e.x[n]) e.x[n] = 0;
        c_vld = 1;
        c_full = t[0];
        for (int k = 0; k < 8; k++) begin
          automatic int a [2], w [2];
          for (int i = 0; i < 2; i++) begin
            a[i] = $urandom % 16;
            w[i] = int'($urandom % 16) - 8;
            c_a[k][i] = 4'(a[i]);
            c_w[k][i] = 4'(w[i]);
          end
          p += longint'(a[0] + a[1] * 2048) * longint'(w[0] + w[1] * 4194304);
          for (int n = 0; n < 4; n++) e.x[n] += a[n % 2] * w[n / 2];
        end
        p = ux(p, 48);
        for (int n = 0; n < 4; n++) e.r[n] = c_full ? e.x[n] : int'(sx(p >> roff[n], 11));
        e.t = cycle; e.m = c_full;
        cq.push_back(e);
      end
      begin : add_op
        automatic aexp_t e;
        automatic int cin = 0;
        e.s = new[5]; e.x = new[5];
        a_vld = 1;
        for (int k = 0; k < 5; k++) begin
          automatic int xv = $urandom % 512, yv = $urandom % 512;
          ax[k] = 9'(xv); ay[k] = 9'(yv);
          e.x[k] = (xv + yv) & 511;
          e.s[k] = (xv + yv + cin) & 511;
          cin = (xv + yv + cin) >> 9;
        end
        e.t = cycle;
        aq.push_back(e);
      end
    end
    @(negedge clk);
    i_vld = 0; o_vld = 0; a_vld = 0; c_vld = 0;
    repeat (16) @(negedge clk);
    check(iq.size() == 0 && oq.size() == 0 && aq.size() == 0 && cq.size() == 0,
          "all operations answered");
    $display("chain of 8, uncorrected: EP %0.2f %%; corrected: WCE %0d",
             100.0 * real'(c_ne) / real'(c_n), c_wce_full);
    check(c_wce_full == 0 && c_ne > 0, "chain: corrected sums exact, floor bias seen");
    for (int m = 0; m < 3; m++)
      $display("INT4 mode %0d: MAE %0.4f EP %0.2f %% WCE %0d", m,
               real'(i_abs[m]) / (4 * 65536), 100.0 * real'(i_ne[m]) / (4 * 65536), i_wce[m]);
    $display("MR-Overpacking 6x(4x5): MAE %0.4f EP %0.2f %% WCE %0d",
             real'(o_abs) / real'(o_n), 100.0 * real'(o_ne) / real'(o_n), o_wce);
    for (int k = 0; k < 5; k++)
      $display("adder lane %0d: EP %0.2f %%", k, 100.0 * real'(a_ne[k]) / real'(a_n));
    // published INT4 figures, rounded as printed
    check(i_ne[0] >= 97898 && i_ne[0] <= 97924, "INT4 EP 37.35 %");
    check(i_abs[0] * 200 >= 73 * 4 * 65536 && i_abs[0] * 200 < 75 * 4 * 65536, "INT4 MAE 0.37");
    check(i_wce[0] == 1, "INT4 WCE 1");
    check(i_abs[2] == 0 && i_wce[2] == 0, "full correction exact");
    check(i_abs[1] * 200 >= 3 * 4 * 65536 && i_abs[1] * 200 < 5 * 4 * 65536, "approx MAE 0.02");
    check(i_wce[1] == 1, "approx WCE 1");
    check(a_ne[0] == 0 && a_wce == 1, "adder: lane 0 exact, WCE 1");
    for (int k = 1; k < 5; k++)
      check(a_ne[k] * 100 > 45 * a_n && a_ne[k] * 100 < 55 * a_n, "adder lane EP near 50 %");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst) begin
      if (i_ov) begin
        if (iq.size() == 0) check(0, "unexpected INT4 result");
        else begin
          automatic mexp_t e = iq.pop_front();
          check(cycle - e.t == 5, "INT4 latency");
          for (int n = 0; n < 4; n++) begin
            automatic int got = int'($signed(i_r[n]));
            automatic int d = iabs(got - e.x[n]);
            check(got == e.r[n], $sformatf("INT4 mode %0d r%0d", e.m, n));
            i_abs[e.m] += d;
            if (d != 0) i_ne[e.m]++;
            if (d > i_wce[e.m]) i_wce[e.m] = d;
          end
        end
      end
      if (o_ov) begin
        if (oq.size() == 0) check(0, "unexpected OVP result");
        else begin
          automatic mexp_t e = oq.pop_front();
          check(cycle - e.t == 5, "OVP latency");
          for (int n = 0; n < 6; n++) begin
            automatic int got = int'($signed(o_r[n]));
            automatic int d = iabs(got - e.x[n]);
            check(got == e.r[n], $sformatf("OVP r%0d", n));
            o_abs += d; o_n++;
            if (d != 0) o_ne++;
            if (d > o_wce) o_wce = d;
          end
        end
      end
      if (c_ov) begin
        if (cq.size() == 0) check(0, "unexpected chain result");
        else begin
          automatic mexp_t e = cq.pop_front();
          check(cycle - e.t == 12, "chain latency");
          for (int n = 0; n < 4; n++) begin
            automatic int got = int'($signed(c_r[n]));
            automatic int d = iabs(got - e.x[n]);
            check(got == e.r[n], $sformatf("chain S%0d", n));
            if (e.m == 1 && d > c_wce_full) c_wce_full = d;
            if (e.m == 0) begin c_n++; if (d != 0) c_ne++; end
          end
        end
      end
      if (a_ov) begin
        if (aq.size() == 0) check(0, "unexpected adder result");
        else begin
          automatic aexp_t e = aq.pop_front();
          check(cycle - e.t == 3, "adder latency");
          a_n++;
          for (int k = 0; k < 5; k++) begin
            automatic int d = (int'(a_s[k]) - e.x[k]) & 511;
            check(int'(a_s[k]) == e.s[k], $sformatf("adder lane %0d", k));
            if (d != 0) a_ne[k]++;
            if (d > a_wce) a_wce = d;
          end
        end
      end
    end
  end

  initial begin
    repeat (NI + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
