// tb_packed_mult_unit -- streaming test of the packed multiplier unit.
//
// Three instances see random operations with random idle cycles:
//   u_int4 : INT4 packing, corr_mode random per operation (none/approx/full)
//   u_ovp  : six products, a 4-bit x3, w 5-bit x2, a_off = {0,7,14},
//            w_off = {0,21}, padding -2, MSB restoration on
//   u_intn : six products, a 4-bit x3, w 3-bit x2, same offsets, padding 0
//   u_mix  : a 5 and 3 bits, w 4 and 6 bits, a_off = {0,11}, w_off = {0,20};
//            results of 9, 7, 11 and 9 bits with padding 2, 2, 0
//   u_mixo : same widths, a_off = {0,10}, w_off = {0,18}; result a_0w_1 is
//            overlapped by one bit, restored by MR
// The two mixed-width units take random corr_mode and see random values in
// the operand bits above each element's width, which must be ignored.
// Every result is compared with the integer reference model, and each
// out_valid must come exactly 5 cycles after its in_valid. For INT4 the
// fully corrected results must also equal the exact products.
module tb_packed_mult_unit;
  import dsp_pack_pkg::*;
  import pack_ref_pkg::*;

  localparam int NOPS = 3000;
  localparam int LAT  = 5;

  localparam int unsigned SIX_A_OFF [3] = '{0, 7, 14};
  localparam int unsigned SIX_W_OFF [2] = '{0, 21};
  localparam int unsigned MIX_A_WDTH [2] = '{5, 3};
  localparam int unsigned MIX_W_WDTH [2] = '{4, 6};
  localparam int unsigned MIX_A_OFF [2]  = '{0, 11};
  localparam int unsigned MIX_W_OFF [2]  = '{0, 20};
  localparam int unsigned MIXO_A_OFF [2] = '{0, 10};
  localparam int unsigned MIXO_W_OFF [2] = '{0, 18};

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // stimulus
  logic            vld;
  corr_mode_e      mode;
  logic [1:0][3:0] a4, w4;
  logic [2:0][3:0] a6;
  logic [1:0][4:0] w6;
  logic [1:0][2:0] w3;

  logic            v4, v6, vn;
  logic [3:0][7:0] r4;
  logic [5:0][8:0] r6;
  logic [5:0][6:0] rn;
  logic [1:0][4:0] am;
  logic [1:0][5:0] wm;
  logic            vm, vmo;
  logic [3:0][10:0] rm, rmo;

  packed_mult_unit u_int4 (
    .clk(clk), .rst(rst), .in_valid(vld), .corr_mode(mode),
    .a_vec(a4), .w_vec(w4), .out_valid(v4), .r_vec(r4));

  packed_mult_unit #(.NA(3), .A_W(4), .W_W(5), .A_OFF(SIX_A_OFF), .W_OFF(SIX_W_OFF)) u_ovp (
    .clk(clk), .rst(rst), .in_valid(vld), .corr_mode(CORR_NONE),
    .a_vec(a6), .w_vec(w6), .out_valid(v6), .r_vec(r6));

  packed_mult_unit #(.NA(3), .A_W(4), .W_W(3), .A_OFF(SIX_A_OFF), .W_OFF(SIX_W_OFF)) u_intn (
    .clk(clk), .rst(rst), .in_valid(vld), .corr_mode(CORR_NONE),
    .a_vec(a6), .w_vec(w3), .out_valid(vn), .r_vec(rn));

  packed_mult_unit #(.NA(2), .A_W(5), .W_W(6), .A_OFF(MIX_A_OFF), .W_OFF(MIX_W_OFF),
                     .A_WDTH(MIX_A_WDTH), .W_WDTH(MIX_W_WDTH)) u_mix (
    .clk(clk), .rst(rst), .in_valid(vld), .corr_mode(mode),
    .a_vec(am), .w_vec(wm), .out_valid(vm), .r_vec(rm));

  packed_mult_unit #(.NA(2), .A_W(5), .W_W(6), .A_OFF(MIXO_A_OFF), .W_OFF(MIXO_W_OFF),
                     .A_WDTH(MIX_A_WDTH), .W_WDTH(MIX_W_WDTH)) u_mixo (
    .clk(clk), .rst(rst), .in_valid(vld), .corr_mode(mode),
    .a_vec(am), .w_vec(wm), .out_valid(vmo), .r_vec(rmo));

  typedef struct {
    int t_in;
    int em [];
    int emo [];
    int xm [];
    int e4 [];
    int x4 [];
    int e6 [];
    int en [];
    int mode;
  } exp_t;

  exp_t q [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cycle, what);
    end
  endtask

  int sent = 0, got = 0;

  // drive on the falling edge
  initial begin
    vld = 0; mode = CORR_NONE; a4 = '0; w4 = '0; a6 = '0; w6 = '0; w3 = '0;
    am = '0; wm = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    while (sent < NOPS) begin
      @(negedge clk);
      vld = ($urandom % 4) != 0;
      if (vld) begin
        automatic exp_t e;
        automatic int ia4 [] = new[2], iw4 [] = new[2], ia6 [] = new[3];
        automatic int iw6 [] = new[2], iw3 [] = new[2];
        automatic int m = $urandom % 3;
        automatic int iam [] = new[2], iwm [] = new[2];
        automatic int awd [] = '{5, 3}, wwd [] = '{4, 6};
        foreach (ia4[i]) ia4[i] = $urandom % 16;
        foreach (iw4[j]) iw4[j] = int'($urandom % 16) - 8;
        foreach (ia6[i]) ia6[i] = $urandom % 16;
        foreach (iw6[j]) iw6[j] = int'($urandom % 32) - 16;
        foreach (iw3[j]) iw3[j] = int'($urandom % 8) - 4;
        mode = corr_mode_e'(m);
        for (int i = 0; i < 2; i++) begin a4[i] = 4'(ia4[i]); w4[i] = 4'(iw4[i]); end
        for (int i = 0; i < 3; i++) a6[i] = 4'(ia6[i]);
        for (int j = 0; j < 2; j++) begin w6[j] = 5'(iw6[j]); w3[j] = 3'(iw3[j]); end
        for (int i = 0; i < 2; i++) begin
          iam[i] = $urandom % (1 << awd[i]);
          iwm[i] = int'($urandom % (1 << wwd[i])) - (1 << (wwd[i] - 1));
          // random junk above the element width
          am[i] = 5'(iam[i]) | 5'(($urandom << awd[i]) & 32'h1f);
          wm[i] = 6'(iwm[i] & ((1 << wwd[i]) - 1)) | 6'(($urandom << wwd[i]) & 32'h3f);
        end
        e.em  = packed_mult_ref_w(2, awd, wwd, '{0, 11}, '{0, 20}, iam, iwm, m, 1'b1);
        e.emo = packed_mult_ref_w(2, awd, wwd, '{0, 10}, '{0, 18}, iam, iwm, m, 1'b1);
        e.xm = new[4];
        for (int n = 0; n < 4; n++) e.xm[n] = iam[n % 2] * iwm[n / 2];
        e.t_in = cycle;
        e.mode = m;
        e.e4 = packed_mult_ref(2, 4, 4, '{0, 11}, '{0, 22}, ia4, iw4, m, 1'b1);
        e.x4 = new[4];
        for (int n = 0; n < 4; n++) e.x4[n] = ia4[n % 2] * iw4[n / 2];
        e.e6 = packed_mult_ref(3, 4, 5, '{0, 7, 14}, '{0, 21}, ia6, iw6, 0, 1'b1);
        e.en = packed_mult_ref(3, 4, 3, '{0, 7, 14}, '{0, 21}, ia6, iw3, 0, 1'b1);
        q.push_back(e);
        sent++;
      end
    end
    @(negedge clk);
    vld = 0;
    repeat (LAT + 3) @(negedge clk);
    check(q.size() == 0, "all operations answered");
    check(got == NOPS, "result count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor on the falling edge, half a cycle after the outputs change
  always @(negedge clk) begin
    if (!rst) begin
      check(v4 == v6 && v4 == vn && v4 == vm && v4 == vmo, "valid outputs agree");
      if (v4) begin
        automatic exp_t e;
        if (q.size() == 0) begin
          check(0, "unexpected out_valid");
        end else begin
          e = q.pop_front();
          got++;
          check(cycle - e.t_in == LAT, $sformatf("latency %0d", cycle - e.t_in));
          for (int n = 0; n < 4; n++) begin
            check(int'($signed(r4[n])) == e.e4[n],
                  $sformatf("INT4 mode %0d r%0d=%0d exp %0d", e.mode, n, $signed(r4[n]), e.e4[n]));
            if (e.mode == 2) check(int'($signed(r4[n])) == e.x4[n], "INT4 full correction exact");
          end
          for (int n = 0; n < 4; n++) begin
            check(int'($signed(rm[n])) == e.em[n],
                  $sformatf("MIX mode %0d r%0d=%0d exp %0d", e.mode, n, $signed(rm[n]), e.em[n]));
            if (e.mode == 2) check(int'($signed(rm[n])) == e.xm[n], "MIX full correction exact");
            check(int'($signed(rmo[n])) == e.emo[n],
                  $sformatf("MIXO mode %0d r%0d=%0d exp %0d", e.mode, n, $signed(rmo[n]), e.emo[n]));
          end
          for (int n = 0; n < 6; n++) begin
            check(int'($signed(r6[n])) == e.e6[n],
                  $sformatf("OVP r%0d=%0d exp %0d", n, $signed(r6[n]), e.e6[n]));
            check(int'($signed(rn[n])) == e.en[n],
                  $sformatf("INT-N r%0d=%0d exp %0d", n, $signed(rn[n]), e.en[n]));
          end
        end
      end
    end
  end

  initial begin
    repeat (NOPS * 3 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
