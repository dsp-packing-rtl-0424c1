// tb_packed_mac_chain -- accumulation of packed products through a chain of
// cascaded slices.
//
// Instances:
//   u_int4 : the default, 8 slices of INT4 packing (11-bit dot products)
//   u_d4   : 4 slices of the same packing (10-bit fields, one spare bit)
// Random dot products enter back to back or with idle cycles, with full_en
// random. The first operations use the extreme operands (all a = 15 with all
// w = -8, and all a = 15 with all w = 7) to reach both ends of the field
// range. With full_en every field must equal the exact dot product; without
// it every field must equal the plain floor reading of the packed sum,
// computed here from integers. out_valid must follow in_valid after
// DEPTH + 4 cycles. The number of plain readings that came out one too
// small is counted; it must be non-zero.
module tb_packed_mac_chain;
  import pack_ref_pkg::*;

  localparam int NOPS = 2000;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, biased = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic                  vld, full;
  logic [7:0][1:0][3:0]  a8, w8;
  logic [3:0][1:0][3:0]  a4, w4;
  logic                  v8, v4;
  logic [3:0][10:0]      r8;
  logic [3:0][9:0]       r4;

  packed_mac_chain u_int4 (
    .clk(clk), .rst(rst), .in_valid(vld), .full_en(full),
    .a_vec(a8), .w_vec(w8), .out_valid(v8), .acc_vec(r8));

  packed_mac_chain #(.DEPTH(4)) u_d4 (
    .clk(clk), .rst(rst), .in_valid(vld), .full_en(full),
    .a_vec(a4), .w_vec(w4), .out_valid(v4), .acc_vec(r4));

  typedef struct {
    int t_in;
    int full;
    int x8 [4], f8 [4], x4 [4], f4 [4];
  } exp_t;
  exp_t q8 [$], q4 [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cycle, what);
    end
  endtask

  // exact sums and the floor reading of the packed sum (fields of width fw)
  function automatic void chain_ref(int depth, int fw, int av [][2], int wv [][2],
                                    output int x [4], output int f [4]);
    longint p = 0;
    int roff [4] = '{0, 11, 22, 33};
    for (int n = 0; n < 4; n++) x[n] = 0;
    for (int k = 0; k < depth; k++) begin
      p += longint'(av[k][0] + av[k][1] * 2048) * longint'(wv[k][0] + wv[k][1] * 4194304);
      for (int n = 0; n < 4; n++) x[n] += av[k][n % 2] * wv[k][n / 2];
    end
    p = ux(p, 48);
    for (int n = 0; n < 4; n++) f[n] = int'(sx(p >> roff[n], fw));
  endfunction

  int sent = 0, got8 = 0, got4 = 0;

  initial begin
    vld = 0; full = 0; a8 = '0; w8 = '0; a4 = '0; w4 = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    while (sent < NOPS) begin
      @(negedge clk);
      vld = (sent < 4) || (($urandom % 4) != 0);
      if (vld) begin
        automatic exp_t e;
        automatic int av [][2] = new[8], wv [][2] = new[8];
        for (int k = 0; k < 8; k++)
          for (int i = 0; i < 2; i++) begin
            case (sent)
              0, 2:    begin av[k][i] = 15; wv[k][i] = -8; end
              1, 3:    begin av[k][i] = 15; wv[k][i] = 7;  end
              default: begin av[k][i] = $urandom % 16; wv[k][i] = int'($urandom % 16) - 8; end
            endcase
            a8[k][i] = 4'(av[k][i]);
            w8[k][i] = 4'(wv[k][i]);
            if (k < 4) begin a4[k][i] = 4'(av[k][i]); w4[k][i] = 4'(wv[k][i]); end
          end
        full = (sent < 4) ? sent[1] : ($urandom % 2);
        e.t_in = cycle;
        e.full = full;
        chain_ref(8, 11, av, wv, e.x8, e.f8);
        chain_ref(4, 10, av, wv, e.x4, e.f4);
        for (int n = 0; n < 4; n++) if (e.f8[n] != e.x8[n]) biased++;
        q8.push_back(e);
        q4.push_back(e);
        sent++;
      end
    end
    @(negedge clk);
    vld = 0;
    repeat (16) @(negedge clk);
    check(q8.size() == 0 && q4.size() == 0, "all dot products answered");
    check(got8 == NOPS && got4 == NOPS, "result count");
    check(biased > 0, "floor bias seen on accumulated fields");
    $display("plain readings one too small: %0d", biased);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (!rst) begin
      if (v8) begin
        automatic exp_t e;
        if (q8.size() == 0) check(0, "unexpected out_valid (8 slices)");
        else begin
          e = q8.pop_front();
          got8++;
          check(cycle - e.t_in == 12, $sformatf("latency %0d, 8 slices", cycle - e.t_in));
          for (int n = 0; n < 4; n++)
            check(int'($signed(r8[n])) == (e.full ? e.x8[n] : e.f8[n]),
                  $sformatf("8 slices full %0d S%0d=%0d exp %0d/%0d", e.full, n,
                            $signed(r8[n]), e.x8[n], e.f8[n]));
        end
      end
      if (v4) begin
        automatic exp_t e;
        if (q4.size() == 0) check(0, "unexpected out_valid (4 slices)");
        else begin
          e = q4.pop_front();
          got4++;
          check(cycle - e.t_in == 8, $sformatf("latency %0d, 4 slices", cycle - e.t_in));
          for (int n = 0; n < 4; n++)
            check(int'($signed(r4[n])) == (e.full ? e.x4[n] : e.f4[n]),
                  $sformatf("4 slices full %0d S%0d=%0d exp %0d/%0d", e.full, n,
                            $signed(r4[n]), e.x4[n], e.f4[n]));
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
