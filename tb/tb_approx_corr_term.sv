// tb_approx_corr_term -- checks the C-port correction word.
//
// INT4 layout: the word must hold the sign of w_0 at bits 11 and 22 and the
// sign of w_1 at bit 33, and nothing else. Six-product layout (a_off =
// {0,7,14}, w_off = {0,21}): sign of w_0 at bits 7, 14 and 21, sign of w_1
// at bits 28 and 35. With en = 0 the word must be zero.
module tb_approx_corr_term;
  import dsp_pack_pkg::*;

  int checks = 0, failures = 0;

  logic        en;
  logic [1:0]  w_sign;
  logic signed [47:0] c4, c6;

  localparam int unsigned SIX_A_OFF [3] = '{0, 7, 14};
  localparam int unsigned SIX_W_OFF [2] = '{0, 21};

  approx_corr_term u_int4 (.en(en), .w_sign(w_sign), .c_word(c4));
  approx_corr_term #(.NA(3), .A_OFF(SIX_A_OFF), .W_OFF(SIX_W_OFF)) u_six (
    .en(en), .w_sign(w_sign), .c_word(c6));

  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int s = 0; s < 4; s++) begin
        automatic logic [47:0] exp4 = '0, exp6 = '0;
        en = e[0];
        w_sign = s[1:0];
        #1;
        if (en) begin
          exp4[11] = s[0]; exp4[22] = s[0]; exp4[33] = s[1];
          exp6[7] = s[0]; exp6[14] = s[0]; exp6[21] = s[0];
          exp6[28] = s[1]; exp6[35] = s[1];
        end
        checks++;
        if (c4 !== exp4) begin
          failures++;
          $display("INT4 en=%0d s=%0d c=%h exp=%h", e, s, c4, exp4);
        end
        checks++;
        if (c6 !== exp6) begin
          failures++;
          $display("six en=%0d s=%0d c=%h exp=%h", e, s, c6, exp6);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
