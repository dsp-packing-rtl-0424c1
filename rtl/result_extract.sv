// result_extract -- cuts the packed products out of the DSP result word,
// optionally with full rounding correction.
//
// Result n = a_i*w_j (n = j*NA + i) lies in P at r_off[n] = A_OFF[i] +
// W_OFF[j] and is A_WDTH[i] + W_WDTH[j] bits wide. Taking the field is a
// right shift, i.e. a division that rounds towards minus infinity, so a
// field sitting above a
// negative lower part comes out one too small. Reading the packed word as a
// fixed-point number with its binary point just below r_off[n], the full
// correction rounds half up instead: it adds bit P[r_off[n]-1] (the first bit
// behind the point) to the field. This costs one small adder per result
// above offset 0 and removes the error completely when the padding between
// results is non-negative. The lowest result has nothing below it and is
// always exact.
//
// Purely combinational. full_en = 0 gives the plain floor extraction.
// Each output is the result's field, wrapping like the field itself, sign-
// extended to R_W bits (R_W is the widest result; with equal element widths
// every field is R_W bits).
module result_extract
  import dsp_pack_pkg::*;
#(
  parameter int unsigned NA         = 2,
  parameter int unsigned R_W        = 8,
  parameter int unsigned A_OFF [NA] = '{0, 11},
  parameter int unsigned W_OFF [2]  = '{0, 22},
  parameter int unsigned A_WDTH [NA] = '{default: R_W / 2},
  parameter int unsigned W_WDTH [2]  = '{default: R_W - R_W / 2}
) (
  input  logic [DSP_P_W-1:0]        p,        // DSP result word
  input  logic                      full_en,  // round-half-up correction on
  output logic [2*NA-1:0][R_W-1:0]  r_vec     // r_vec[n] = a_i*w_j, n = j*NA+i
);

  localparam int unsigned NR = 2 * NA;

  always_comb begin
    for (int n = 0; n < int'(NR); n++) begin
      automatic int unsigned off = A_OFF[n % int'(NA)] + W_OFF[n / int'(NA)];
      automatic int unsigned sh  = R_W - (A_WDTH[n % int'(NA)] + W_WDTH[n / int'(NA)]);
      automatic logic [R_W-1:0] f = R_W'(p >> off);
      if (full_en && off > 0)
        f = f + R_W'(p[off-1]);
      r_vec[n] = R_W'($signed(f << sh) >>> sh);
    end
  end

endmodule
