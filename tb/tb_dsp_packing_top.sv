// tb_dsp_packing_top -- end-to-end test of the four packed DSP units.
//
// Two tops run side by side on the same stimulus: dut with all defaults and
// dut_g whose adder has guard bits at its three lowest lane boundaries. Each
// unit gets its own random valid pattern; INT4 operations switch their
// correction mode at random. All outputs are compared with the integer
// reference models and the latencies (5, 5, 3, 12 cycles) are checked. The
// accumulating chain gets eight random INT4 operand sets per dot product
// with full_en random.
//
// The run counts how often each mechanism of the design acted and fails if
// one never did: a correction-mode switch, the approximate correction
// changing a result, the full correction rounding a result up, the MSB
// restoration changing a result, a carry crossing an unguarded adder lane,
// a guard bit catching a carry, the full correction rounding an accumulated
// dot product, and back-to-back operations (one per cycle).
module tb_dsp_packing_top;
  import dsp_pack_pkg::*;
  import pack_ref_pkg::*;

  localparam int NOPS = 2000;

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

  logic            i_ov [2], o_ov [2], a_ov [2];
  logic [3:0][7:0] i_r [2];
  logic [5:0][8:0] o_r [2];
  logic [4:0][8:0] a_s [2];
  logic [0:0]      a_g0;
  logic [2:0]      a_g1;
  logic                  c_vld, c_full;
  logic [7:0][1:0][3:0]  c_a, c_w;
  logic                  c_ov [2];
  logic [3:0][10:0]      c_r [2];

  dsp_packing_top dut (
    .clk(clk), .rst(rst),
    .int4_in_valid(i_vld), .int4_mode(i_mode), .int4_a(i_a), .int4_w(i_w),
    .int4_out_valid(i_ov[0]), .int4_r(i_r[0]),
    .ovp_in_valid(o_vld), .ovp_a(o_a), .ovp_w(o_w),
    .ovp_out_valid(o_ov[0]), .ovp_r(o_r[0]),
    .add_in_valid(a_vld), .add_x(ax), .add_y(ay),
    .add_out_valid(a_ov[0]), .add_sum(a_s[0]), .add_guard_carry(a_g0),
    .acc_in_valid(c_vld), .acc_full_en(c_full), .acc_a(c_a), .acc_w(c_w),
    .acc_out_valid(c_ov[0]), .acc_r(c_r[0]));

  dsp_packing_top #(.ADD_N_GUARD(3)) dut_g (
    .clk(clk), .rst(rst),
    .int4_in_valid(i_vld), .int4_mode(i_mode), .int4_a(i_a), .int4_w(i_w),
    .int4_out_valid(i_ov[1]), .int4_r(i_r[1]),
    .ovp_in_valid(o_vld), .ovp_a(o_a), .ovp_w(o_w),
    .ovp_out_valid(o_ov[1]), .ovp_r(o_r[1]),
    .add_in_valid(a_vld), .add_x(ax), .add_y(ay),
    .add_out_valid(a_ov[1]), .add_sum(a_s[1]), .add_guard_carry(a_g1),
    .acc_in_valid(c_vld), .acc_full_en(c_full), .acc_a(c_a), .acc_w(c_w),
    .acc_out_valid(c_ov[1]), .acc_r(c_r[1]));

  typedef struct { int t; int r []; } mexp_t;
  typedef struct { int t; int s0 []; int s1 []; int g1 []; } aexp_t;
  mexp_t iq [$], oq [$], cq [$];
  aexp_t aq [$];

  // mechanism counters
  int n_switch = 0, n_approx = 0, n_full = 0, n_mr = 0, n_cross = 0, n_guard = 0;
  int n_b2b = 0, n_acc = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cycle, what);
    end
  endtask

  function automatic void lane_ref(int ng, int xv [], int yv [], output int s [],
                                   output int gc []);
    int cin = 0;
    s = new[5];
    gc = new[5];
    for (int k = 0; k < 5; k++) begin
      automatic int full = xv[k] + yv[k] + cin;
      s[k]  = full & 511;
      gc[k] = full >> 9;
      cin   = (k < ng) ? 0 : gc[k];
    end
  endfunction

  int i_sent = 0, o_sent = 0, a_sent = 0, c_sent = 0;
  int last_mode = -1;
  bit last_vld = 0;

  initial begin
    i_vld = 0; o_vld = 0; a_vld = 0; i_mode = CORR_NONE;
    i_a = '0; i_w = '0; o_a = '0; o_w = '0; ax = '0; ay = '0;
    c_vld = 0; c_full = 0; c_a = '0; c_w = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    while (i_sent < NOPS || o_sent < NOPS || a_sent < NOPS || c_sent < NOPS) begin
      @(negedge clk);
      // INT4 unit
      i_vld = (i_sent < NOPS) && ($urandom % 5 != 0);
      if (i_vld) begin
        automatic mexp_t e;
        automatic int a [] = new[2], w [] = new[2], plain [];
        automatic int m = $urandom % 3;
        foreach (a[i]) a[i] = $urandom % 16;
        foreach (w[j]) w[j] = int'($urandom % 16) - 8;
        i_mode = corr_mode_e'(m);
        for (int k = 0; k < 2; k++) begin i_a[k] = 4'(a[k]); i_w[k] = 4'(w[k]); end
        e.t = cycle;
        e.r = packed_mult_ref(2, 4, 4, '{0, 11}, '{0, 22}, a, w, m, 1'b0);
        plain = packed_mult_ref(2, 4, 4, '{0, 11}, '{0, 22}, a, w, 0, 1'b0);
        if (e.r != plain) begin
          if (m == 1) n_approx++;
          if (m == 2) n_full++;
        end
        if (last_mode >= 0 && last_mode != m) n_switch++;
        if (last_vld) n_b2b++;
        last_mode = m;
        iq.push_back(e);
        i_sent++;
      end
      last_vld = i_vld;
      // MR-Overpacking unit
      o_vld = (o_sent < NOPS) && ($urandom % 3 != 0);
      if (o_vld) begin
        automatic mexp_t e;
        automatic int a [] = new[3], w [] = new[2], raw [];
        foreach (a[i]) a[i] = $urandom % 16;
        foreach (w[j]) w[j] = int'($urandom % 32) - 16;
        for (int k = 0; k < 3; k++) o_a[k] = 4'(a[k]);
        for (int k = 0; k < 2; k++) o_w[k] = 5'(w[k]);
        e.t = cycle;
        e.r = packed_mult_ref(3, 4, 5, '{0, 7, 14}, '{0, 21}, a, w, 0, 1'b1);
        raw = packed_mult_ref(3, 4, 5, '{0, 7, 14}, '{0, 21}, a, w, 0, 1'b0);
        if (e.r != raw) n_mr++;
        oq.push_back(e);
        o_sent++;
      end
      // accumulating chain: eight INT4 outer products summed, fields 11 bits
      c_vld = (c_sent < NOPS) && ($urandom % 3 != 0);
      if (c_vld) begin
        automatic mexp_t e;
        automatic longint p = 0;
        automatic int x [4] = '{0, 0, 0, 0}, roff [4] = '{0, 11, 22, 33};
        c_full = $urandom % 2;
        for (int k = 0; k < 8; k++) begin
          automatic int a [2], w [2];
          for (int i = 0; i < 2; i++) begin
            a[i] = $urandom % 16;
            w[i] = int'($urandom % 16) - 8;
            c_a[k][i] = 4'(a[i]);
            c_w[k][i] = 4'(w[i]);
          end
          p += longint'(a[0] + a[1] * 2048) * longint'(w[0] + w[1] * 4194304);
          for (int n = 0; n < 4; n++) x[n] += a[n % 2] * w[n / 2];
        end
        p = ux(p, 48);
        e.t = cycle;
        e.r = new[4];
        for (int n = 0; n < 4; n++) begin
          automatic int fl = int'(sx(p >> roff[n], 11));
          e.r[n] = c_full ? x[n] : fl;
          if (c_full && fl != x[n]) n_acc++;
        end
        cq.push_back(e);
        c_sent++;
      end
      // packed adder
      a_vld = (a_sent < NOPS) && ($urandom % 4 != 0);
      if (a_vld) begin
        automatic aexp_t e;
        automatic int xv [] = new[5], yv [] = new[5], gc0 [], gc1 [];
        foreach (xv[k]) begin xv[k] = $urandom % 512; yv[k] = $urandom % 512; end
        for (int k = 0; k < 5; k++) begin ax[k] = 9'(xv[k]); ay[k] = 9'(yv[k]); end
        e.t = cycle;
        lane_ref(0, xv, yv, e.s0, gc0);
        lane_ref(3, xv, yv, e.s1, gc1);
        e.g1 = gc1;
        for (int k = 0; k < 4; k++) n_cross += gc0[k];
        for (int k = 0; k < 3; k++) n_guard += gc1[k];
        aq.push_back(e);
        a_sent++;
      end
    end
    @(negedge clk);
    i_vld = 0; o_vld = 0; a_vld = 0; c_vld = 0;
    repeat (16) @(negedge clk);
    check(iq.size() == 0 && oq.size() == 0 && aq.size() == 0 && cq.size() == 0,
          "all operations answered");
    $display("mode switches %0d, approx corrections %0d, full round-ups %0d", n_switch,
             n_approx, n_full);
    $display("MR restorations %0d, lane carries %0d, guard catches %0d, back-to-back %0d",
             n_mr, n_cross, n_guard, n_b2b);
    check(n_switch > 0, "mode switch happened");
    check(n_approx > 0, "approximate correction acted");
    check(n_full > 0, "full correction acted");
    check(n_mr > 0, "MSB restoration acted");
    check(n_cross > 0, "carry crossed an unguarded lane boundary");
    check(n_guard > 0, "guard bit caught a carry");
    check(n_b2b > 0, "back-to-back operations");
    $display("accumulated dot products rounded up by the full correction: %0d", n_acc);
    check(n_acc > 0, "full correction acted on an accumulated sum");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst) begin
      check(i_ov[0] == i_ov[1] && o_ov[0] == o_ov[1] && a_ov[0] == a_ov[1], "tops agree");
      if (i_ov[0]) begin
        if (iq.size() == 0) check(0, "unexpected INT4 result");
        else begin
          automatic mexp_t e = iq.pop_front();
          check(cycle - e.t == 5, "INT4 latency");
          for (int n = 0; n < 4; n++)
            for (int d = 0; d < 2; d++)
              check(int'($signed(i_r[d][n])) == e.r[n], $sformatf("INT4 r%0d", n));
        end
      end
      if (o_ov[0]) begin
        if (oq.size() == 0) check(0, "unexpected OVP result");
        else begin
          automatic mexp_t e = oq.pop_front();
          check(cycle - e.t == 5, "OVP latency");
          for (int n = 0; n < 6; n++)
            for (int d = 0; d < 2; d++)
              check(int'($signed(o_r[d][n])) == e.r[n], $sformatf("OVP r%0d", n));
        end
      end
      check(c_ov[0] == c_ov[1], "chains agree");
      if (c_ov[0]) begin
        if (cq.size() == 0) check(0, "unexpected chain result");
        else begin
          automatic mexp_t e = cq.pop_front();
          check(cycle - e.t == 12, "chain latency");
          for (int n = 0; n < 4; n++)
            for (int d = 0; d < 2; d++)
              check(int'($signed(c_r[d][n])) == e.r[n], $sformatf("chain S%0d", n));
        end
      end
      if (a_ov[0]) begin
        if (aq.size() == 0) check(0, "unexpected adder result");
        else begin
          automatic aexp_t e = aq.pop_front();
          check(cycle - e.t == 3, "adder latency");
          for (int k = 0; k < 5; k++) begin
            check(int'(a_s[0][k]) == e.s0[k], $sformatf("adder lane %0d", k));
            check(int'(a_s[1][k]) == e.s1[k], $sformatf("guarded adder lane %0d", k));
          end
          for (int k = 0; k < 3; k++) check(int'(a_g1[k]) == e.g1[k], "guard flag");
          check(a_g0 == 1'b0, "no guard flag without guard bits");
        end
      end
    end
  end

  initial begin
    repeat (NOPS * 6 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
