// tb_result_extract -- checks result extraction and the full correction.
//
// 1. For every INT4 operand set the packed word P = sum a_i*w_j*2^r_off is
//    formed here; without correction each field must equal the product or
//    the product minus one (floor bias), with the full correction it must
//    equal the product exactly.
// 2. For random 48-bit words each field must equal P[r_off+7:r_off], plus
//    P[r_off-1] when the correction is on (never for the field at 0).
module tb_result_extract;
  import dsp_pack_pkg::*;

  int checks = 0, failures = 0;

  logic [47:0]     p;
  logic            full_en;
  logic [3:0][7:0] r;

  result_extract dut (.p(p), .full_en(full_en), .r_vec(r));

  localparam int ROFF [4] = '{0, 11, 22, 33};

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int biased = 0;
    for (int v = 0; v < 65536; v++) begin
      automatic int a [2], w [2], prod [4];
      automatic longint pw = 0;
      a[0] = v & 15; a[1] = (v >> 4) & 15;
      w[0] = ((v >> 8) & 15) - (((v >> 8) & 8) << 1);
      w[1] = ((v >> 12) & 15) - (((v >> 12) & 8) << 1);
      for (int n = 0; n < 4; n++) begin
        prod[n] = a[n % 2] * w[n / 2];
        pw += longint'(prod[n]) * (64'(1) << ROFF[n]);
      end
      p = 48'(pw);
      full_en = 1'b0;
      #1;
      for (int n = 0; n < 4; n++) begin
        automatic int got = int'($signed(r[n]));
        check(got == prod[n] || got == prod[n] - 1, "plain field");
        if (got != prod[n]) biased++;
      end
      full_en = 1'b1;
      #1;
      for (int n = 0; n < 4; n++)
        check(int'($signed(r[n])) == prod[n], "fully corrected field");
    end
    // the floor bias must show up in 37.35 % (rounded) of the 4*65536 results
    check(biased >= 97898 && biased <= 97924, $sformatf("bias count %0d", biased));
    for (int t = 0; t < 5000; t++) begin
      p = {$urandom, $urandom};
      full_en = t[0];
      #1;
      for (int n = 0; n < 4; n++) begin
        automatic logic [7:0] e = p[ROFF[n] +: 8];
        if (full_en && n > 0) e = e + 8'(p[ROFF[n] - 1]);
        check(r[n] === e, "random word");
      end
    end
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
