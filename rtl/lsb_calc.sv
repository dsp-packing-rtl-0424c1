// lsb_calc -- the K least significant bits of a product, from the operands'
// K least significant bits.
//
// The low K bits of a*w depend only on the low K bits of a and w, whatever
// the signs, so they can be formed next to the DSP with a few gates. For
// K = 1 this is  p[0] = a[0] & w[0];  for K = 2 additionally
// p[1] = (a[0] & w[1]) ^ (a[1] & w[0]).  Larger K follow the same rules of
// binary multiplication (a K x K bit product truncated to K bits); the logic
// grows quickly with K, which is why MSB-restoring Overpacking is used with
// one to three overlapping bits.
//
// Purely combinational. K = 1 and K = 2 are written out as the equations
// above; larger K use a truncated multiplication.
module lsb_calc #(
  parameter int unsigned K = 2
) (
  input  logic [K-1:0] a_lsb,  // low K bits of the unsigned operand
  input  logic [K-1:0] w_lsb,  // low K bits of the signed operand
  output logic [K-1:0] p_lsb   // low K bits of a*w
);

  if (K == 1) begin : g_k1
    assign p_lsb = a_lsb & w_lsb;
  end else if (K == 2) begin : g_k2
    assign p_lsb[0] = a_lsb[0] & w_lsb[0];
    assign p_lsb[1] = (a_lsb[0] & w_lsb[1]) ^ (a_lsb[1] & w_lsb[0]);
  end else begin : g_kn
    assign p_lsb = K'(a_lsb * w_lsb);
  end

endmodule
