// tb_dsp48e2_mac -- self-checking test of the DSP slice model.
//
// Streams random operations, one per cycle, with A/B/D in cycle t, C in
// cycle t+2 and pin_sel/pcin in cycle t+3, and compares P after the edge
// ending cycle t+3 with B*(A+D)+C+Pin computed here in 64-bit integers
// (27-bit pre-adder and 48-bit result wrap-around modelled explicitly).
// All three pin_sel choices are used, including accumulation on P. The
// latency of 4 cycles is checked by the alignment itself.
module tb_dsp48e2_mac;
  import dsp_pack_pkg::*;

  localparam int N = 400;

  logic clk = 1'b0, rst = 1'b1;
  logic signed [26:0] a, d;
  logic        [17:0] b;
  logic signed [47:0] c, pcin, p, pcout;
  pin_sel_e           pin_sel;

  dsp48e2_mac dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // operation stimulus, indexed by operation number
  longint av [N], dv [N], bv [N], cv [N], pv [N];
  pin_sel_e sv [N];
  longint exp_p;

  function automatic longint wrap(longint x, int w);
    return (x <<< (64 - w)) >>> (64 - w);
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin
      av[i] = wrap(longint'({$urandom, $urandom}), 27);
      dv[i] = wrap(longint'({$urandom, $urandom}), 27);
      bv[i] = longint'($urandom % (1 << 18));
      cv[i] = wrap(longint'({$urandom, $urandom}), 48);
      pv[i] = wrap(longint'({$urandom, $urandom}), 48);
      sv[i] = pin_sel_e'($urandom % 3);
      if (i < 8) begin  // a few corner operands
        av[i] = (i[0]) ? -(1 <<< 26) : (1 <<< 26) - 1;
        dv[i] = (i[1]) ? -(1 <<< 26) : (1 <<< 26) - 1;
        bv[i] = (1 << 18) - 1;
      end
    end
    a = '0; d = '0; b = '0; c = '0; pcin = '0; pin_sel = PIN_ZERO;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    exp_p = 0;
    // cycle k drives A/B/D of op k, C of op k-2, pin of op k-3
    for (int k = 0; k < N + 4; k++) begin
      a = (k < N) ? 27'(av[k]) : '0;
      d = (k < N) ? 27'(dv[k]) : '0;
      b = (k < N) ? 18'(bv[k]) : '0;
      c = (k >= 2 && k - 2 < N) ? 48'(cv[k-2]) : '0;
      pcin    = (k >= 3 && k - 3 < N) ? 48'(pv[k-3]) : '0;
      pin_sel = (k >= 3 && k - 3 < N) ? sv[k-3] : PIN_ZERO;
      @(negedge clk);
      if (k >= 3 && k - 3 < N) begin
        automatic int o = k - 3;
        automatic longint ad = wrap(av[o] + dv[o], 27);
        automatic longint pin = (sv[o] == PIN_CASCADE) ? pv[o]
                              : (sv[o] == PIN_FEEDBACK) ? exp_p : 0;
        exp_p = wrap(ad * bv[o] + cv[o] + pin, 48);
        checks++;
        if (p !== 48'(exp_p) || pcout !== p) begin
          failures++;
          if (failures < 10)
            $display("op %0d: p=%h expected %h", o, p, 48'(exp_p));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N * 4 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
