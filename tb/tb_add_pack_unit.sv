// tb_add_pack_unit -- addition packing with and without guard bits.
//
// Instances:
//   u_plain : five 9-bit lanes, no guard bit (the default)
//   u_guard : five 9-bit lanes, guard bits at the three lowest boundaries
//   u_fig   : two 8-bit lanes, no guard bit  (worked example below)
//   u_figg  : two 8-bit lanes, one guard bit
//   u_mixw  : two 9-bit and three 10-bit lanes filling all 48 bits, with
//             random values in the operand bits above each lane's width
// The reference is built lane by lane: lane k gets the carry out of lane
// k-1 unless a guard bit separates them. Checks every sum, every guard
// flag and the 3-cycle latency, and that carries really crossed lanes.
// Worked example: lower lane -13 + -15 = -28 in both cases, upper lane
// 9 + 15 gives 25 without and 24 with the guard bit.
module tb_add_pack_unit;

  localparam int NOPS = 3000;
  localparam int LAT  = 3;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic            vld;
  logic [4:0][8:0] x, y, s_plain, s_guard;
  logic [1:0][7:0] fx, fy, s_fig, s_figg;
  logic            v_plain, v_guard, v_fig, v_figg;
  logic [0:0]      g_plain, g_fig, g_figg;
  logic [2:0]      g_guard;
  logic [4:0][9:0] mx, my, s_mixw;
  logic            v_mixw;
  logic [0:0]      g_mixw;

  localparam int unsigned MIXW [5] = '{9, 9, 10, 10, 10};

  add_pack_unit u_plain (.clk(clk), .rst(rst), .in_valid(vld), .x_vec(x), .y_vec(y),
    .out_valid(v_plain), .sum_vec(s_plain), .guard_carry(g_plain));
  add_pack_unit #(.N_GUARD(3)) u_guard (.clk(clk), .rst(rst), .in_valid(vld), .x_vec(x),
    .y_vec(y), .out_valid(v_guard), .sum_vec(s_guard), .guard_carry(g_guard));
  add_pack_unit #(.LANES(2), .LANE_W(8)) u_fig (.clk(clk), .rst(rst), .in_valid(vld),
    .x_vec(fx), .y_vec(fy), .out_valid(v_fig), .sum_vec(s_fig), .guard_carry(g_fig));
  add_pack_unit #(.LANES(2), .LANE_W(8), .N_GUARD(1)) u_figg (.clk(clk), .rst(rst),
    .in_valid(vld), .x_vec(fx), .y_vec(fy), .out_valid(v_figg), .sum_vec(s_figg),
    .guard_carry(g_figg));
  add_pack_unit #(.LANES(5), .LANE_W(10), .LANE_WDTH(MIXW)) u_mixw (.clk(clk), .rst(rst),
    .in_valid(vld), .x_vec(mx), .y_vec(my), .out_valid(v_mixw), .sum_vec(s_mixw),
    .guard_carry(g_mixw));

  typedef struct {
    int t_in;
    logic [4:0][8:0] sp, sg;
    logic [2:0]      gg;
    logic [1:0][7:0] sf, sfg;
    logic [4:0][9:0] sm;
  } exp_t;
  exp_t q [$];

  int crossed = 0, caught = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cycle, what);
    end
  endtask

  // reference: lanes of width w, guard bits at the lowest ng boundaries
  function automatic void lane_ref(int lanes, int w, int ng, int xv [], int yv [],
                                   output int s [], output int gc []);
    int cin = 0;
    s = new[lanes];
    gc = new[lanes];
    for (int k = 0; k < lanes; k++) begin
      automatic int full = xv[k] + yv[k] + cin;
      s[k]  = full & ((1 << w) - 1);
      gc[k] = full >> w;
      cin   = (k < ng) ? 0 : gc[k];
    end
  endfunction

  // reference with a width per lane, no guard bits
  function automatic void lane_ref_w(int lanes, int wd [], int xv [], int yv [],
                                     output int s []);
    int cin = 0;
    s = new[lanes];
    for (int k = 0; k < lanes; k++) begin
      automatic int full = xv[k] + yv[k] + cin;
      s[k] = full & ((1 << wd[k]) - 1);
      cin  = full >> wd[k];
    end
  endfunction

  int sent = 0, got = 0;

  initial begin
    vld = 0; x = '0; y = '0; fx = '0; fy = '0; mx = '0; my = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    while (sent < NOPS) begin
      @(negedge clk);
      vld = ($urandom % 4) != 0;
      if (vld) begin
        automatic exp_t e;
        automatic int xv [] = new[5], yv [] = new[5], fxv [] = new[2], fyv [] = new[2];
        automatic int s [], gc [];
        if (sent == 0) begin  // the worked example first
          fxv = '{-13 & 255, 9};
          fyv = '{-15 & 255, 15};
        end else begin
          foreach (fxv[k]) begin fxv[k] = $urandom % 256; fyv[k] = $urandom % 256; end
        end
        foreach (xv[k]) begin xv[k] = $urandom % 512; yv[k] = $urandom % 512; end
        for (int k = 0; k < 5; k++) begin x[k] = 9'(xv[k]); y[k] = 9'(yv[k]); end
        for (int k = 0; k < 2; k++) begin fx[k] = 8'(fxv[k]); fy[k] = 8'(fyv[k]); end
        begin
          automatic int wd [] = '{9, 9, 10, 10, 10};
          automatic int mxv [] = new[5], myv [] = new[5];
          foreach (mxv[k]) begin
            mxv[k] = $urandom % (1 << wd[k]);
            myv[k] = $urandom % (1 << wd[k]);
            mx[k] = 10'(mxv[k]) | 10'(($urandom << wd[k]) & 32'h3ff);
            my[k] = 10'(myv[k]) | 10'(($urandom << wd[k]) & 32'h3ff);
          end
          lane_ref_w(5, wd, mxv, myv, s);
          for (int k = 0; k < 5; k++) e.sm[k] = 10'(s[k]);
        end
        e.t_in = cycle;
        lane_ref(5, 9, 0, xv, yv, s, gc);
        for (int k = 0; k < 5; k++) e.sp[k] = 9'(s[k]);
        for (int k = 0; k < 4; k++) crossed += gc[k];
        lane_ref(5, 9, 3, xv, yv, s, gc);
        for (int k = 0; k < 5; k++) e.sg[k] = 9'(s[k]);
        for (int k = 0; k < 3; k++) begin e.gg[k] = gc[k][0]; caught += gc[k]; end
        lane_ref(2, 8, 0, fxv, fyv, s, gc);
        for (int k = 0; k < 2; k++) e.sf[k] = 8'(s[k]);
        lane_ref(2, 8, 1, fxv, fyv, s, gc);
        for (int k = 0; k < 2; k++) e.sfg[k] = 8'(s[k]);
        if (sent == 0) begin
          check(e.sf[1] == 8'd25 && e.sfg[1] == 8'd24 && $signed(e.sf[0]) == -28,
                "reference reproduces the worked example");
        end
        q.push_back(e);
        sent++;
      end
    end
    @(negedge clk);
    vld = 0;
    repeat (LAT + 3) @(negedge clk);
    check(q.size() == 0 && got == NOPS, "all operations answered");
    check(crossed > 0 && caught > 0, "carries crossed lanes and were caught");
    $display("carries across unguarded boundaries: %0d, caught by guard bits: %0d",
             crossed, caught);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst) begin
      check(v_plain == v_guard && v_plain == v_fig && v_plain == v_figg && v_plain == v_mixw,
            "valids agree");
      if (v_plain) begin
        automatic exp_t e;
        if (q.size() == 0) check(0, "unexpected out_valid");
        else begin
          e = q.pop_front();
          got++;
          check(cycle - e.t_in == LAT, $sformatf("latency %0d", cycle - e.t_in));
          check(s_plain == e.sp, $sformatf("no-guard sums %h exp %h", s_plain, e.sp));
          check(s_guard == e.sg, $sformatf("guarded sums %h exp %h", s_guard, e.sg));
          check(g_guard == e.gg, "guard flags");
          check(s_fig == e.sf, $sformatf("8-bit pair %h exp %h", s_fig, e.sf));
          check(s_figg == e.sfg, $sformatf("8-bit pair with guard %h exp %h", s_figg, e.sfg));
          check(s_mixw == e.sm, $sformatf("9/10-bit lanes %h exp %h", s_mixw, e.sm));
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
