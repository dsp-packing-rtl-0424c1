// mult_packer -- places the operands of a packed outer product on the DSP ports.
//
// Packed multiplication computes all products a_i*w_j of an unsigned vector a
// (NA entries) and a signed vector w (two entries) with one wide
// multiplication:
//
//   (sum_i a_i * 2^A_OFF[i]) * (sum_j w_j * 2^W_OFF[j])
//       = sum_j sum_i a_i*w_j * 2^(A_OFF[i] + W_OFF[j])
//
// The unsigned a_i share the multiplier port B: each sits at its offset and
// the bits in between are zero, so the sum is a plain concatenation. The w_j
// are signed and cannot share one port that way, so w_0 goes to pre-adder
// port A and w_1 to pre-adder port D, each sign-extended over all upper bits
// and shifted by its offset; the DSP's pre-adder then forms their weighted sum.
//
// Every entry has its own width, A_WDTH[i] and W_WDTH[j], as in the general
// INT-N formulation; A_W and W_W are the widths of the port entries and the
// largest element widths. Bits of a_vec[i] above A_WDTH[i] are ignored and
// w_vec[j] is sign-extended from bit W_WDTH[j]-1, so narrow operands may
// arrive with anything in their unused upper bits.
//
// Purely combinational. Defaults are the INT4 packing: a_off = {0, 11},
// w_off = {0, 22}, all widths 4. The caller must keep the fields inside the
// ports (A_OFF[i] + A_WDTH[i] <= 18, W_OFF[1] + W_WDTH[1] <= 27) and the a
// fields disjoint. Restricting w to two entries follows from the two signed
// pre-adder ports of the slice.
module mult_packer
  import dsp_pack_pkg::*;
#(
  parameter int unsigned NA         = 2,
  parameter int unsigned A_W        = 4,
  parameter int unsigned W_W        = 4,
  parameter int unsigned A_OFF [NA] = '{0, 11},
  parameter int unsigned W_OFF [2]  = '{0, 22},
  parameter int unsigned A_WDTH [NA] = '{default: A_W},
  parameter int unsigned W_WDTH [2]  = '{default: W_W}
) (
  input  logic [NA-1:0][A_W-1:0]     a_vec,   // unsigned a_i
  input  logic [1:0][W_W-1:0]        w_vec,   // signed w_j (two's complement)
  output logic signed [DSP_AD_W-1:0] a_port,  // carries w_0
  output logic signed [DSP_AD_W-1:0] d_port,  // carries w_1
  output logic        [DSP_B_W-1:0]  b_port   // carries all a_i
);

  // a_i cut to its width, w_j sign-extended from its width
  logic [NA-1:0][A_W-1:0] a_el;
  logic [1:0][W_W-1:0]    w_el;

  always_comb begin
    b_port = '0;
    for (int i = 0; i < int'(NA); i++) begin
      a_el[i] = a_vec[i] & A_W'((64'(1) << A_WDTH[i]) - 1);
      b_port  = b_port | (DSP_B_W'(a_el[i]) << A_OFF[i]);
    end
    for (int j = 0; j < 2; j++)
      w_el[j] = W_W'($signed(w_vec[j] << (W_W - W_WDTH[j])) >>> (W_W - W_WDTH[j]));
  end

  assign a_port = DSP_AD_W'($signed(w_el[0])) <<< W_OFF[0];
  assign d_port = DSP_AD_W'($signed(w_el[1])) <<< W_OFF[1];

endmodule
