// approx_corr_term -- C-port word for the approximate rounding correction.
//
// Extracting a packed result by taking its bit field rounds the true value
// towards minus infinity: when the results packed below field n sum to a
// negative number, their sign extension borrows one from field n. Such a
// borrow happens exactly when the result directly below (index n-1) is
// negative, and since a is unsigned, that result's sign is the sign of the w
// operand that produced it. This block therefore adds the sign bit of that w
// at bit r_off[n] of the DSP's C port, one term per result n >= 1, so the
// borrow is cancelled before extraction. A product whose a operand is zero
// has no sign even though w is negative; those cases stay wrong.
//
// Result n is a_i*w_j with n = j*NA + i and r_off[n] = A_OFF[i] + W_OFF[j];
// results are assumed to be numbered in ascending offset order, as in every
// packing the design is used with. For INT4 packing this places w_0's sign at
// bits 11 and 22 and w_1's sign at bit 33.
//
// Purely combinational. With en = 0 the word is zero (no correction).
module approx_corr_term
  import dsp_pack_pkg::*;
#(
  parameter int unsigned NA         = 2,
  parameter int unsigned A_OFF [NA] = '{0, 11},
  parameter int unsigned W_OFF [2]  = '{0, 22}
) (
  input  logic                      en,      // approximate correction on
  input  logic [1:0]                w_sign,  // sign bits of w_1, w_0
  output logic signed [DSP_P_W-1:0] c_word   // to the DSP C port
);

  localparam int unsigned NR = 2 * NA;

  always_comb begin
    c_word = '0;
    if (en) begin
      for (int n = 1; n < int'(NR); n++) begin
        // result n-1 was produced by w_j, j = (n-1)/NA
        c_word = c_word
               + (DSP_P_W'(w_sign[(n-1)/int'(NA)])
                  << (A_OFF[n % int'(NA)] + W_OFF[n / int'(NA)]));
      end
    end
  end

endmodule
