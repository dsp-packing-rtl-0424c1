// mr_restore -- MSB-restoring (MR) correction for Overpacking.
//
// Overpacking places results closer together than their width (negative
// padding), so neighbouring fields overlap. In the packed word the overlap is
// an addition: the lowest K bits of result n+1 are added onto the top K bits
// of result n, where K = rw[n] - (r_off[n+1] - r_off[n]) and rw[n] =
// A_WDTH[i] + W_WDTH[j] is the width of result n. Corrupted top bits
// give large errors, so this block undoes that addition. The K contaminating
// bits are recomputed from the operands of result n+1 (lsb_calc) and
// subtracted from the extracted field n at bit position rw[n]-K:
//
//   r_n = field_n - (lsb_K(a_i' * w_j') << (rw[n] - K)),  n+1 = j'*NA + i'
//
// The low bits of result n+1 itself stay contaminated by the top of result n;
// that error is small and is accepted. The topmost result has no neighbour
// above and passes unchanged, as does any result whose neighbour does not
// overlap it (K <= 0).
//
// Purely combinational; the a and w inputs must be the operands that produced
// the packed word being corrected (the caller delays them to line up with the
// DSP output). en = 0 passes all fields through (plain Overpacking). In a
// layout without any overlap (INT4, for example) the block is pure wiring,
// and en and the operand inputs are then deliberately left unused.
// Results are numbered in ascending offset order, as in the packings used.
// Fields arrive and leave sign-extended from their own width to R_W bits;
// operand bits above an element's width are ignored, as in mult_packer.
module mr_restore #(
  parameter int unsigned NA         = 2,
  parameter int unsigned A_W        = 4,
  parameter int unsigned W_W        = 4,
  parameter int unsigned R_W        = 8,
  parameter int unsigned A_OFF [NA] = '{0, 6},
  parameter int unsigned W_OFF [2]  = '{0, 12},
  parameter int unsigned A_WDTH [NA] = '{default: A_W},
  parameter int unsigned W_WDTH [2]  = '{default: W_W}
) (
  input  logic                     en,      // restoration on
  input  logic [NA-1:0][A_W-1:0]   a_vec,   // operands of this word
  input  logic [1:0][W_W-1:0]      w_vec,
  input  logic [2*NA-1:0][R_W-1:0] r_in,    // extracted fields
  output logic [2*NA-1:0][R_W-1:0] r_out    // restored results
);

  localparam int unsigned NR = 2 * NA;

  function automatic int roff(input int n);
    return int'(A_OFF[n % int'(NA)] + W_OFF[n / int'(NA)]);
  endfunction

  function automatic int rwdth(input int n);
    return int'(A_WDTH[n % int'(NA)] + W_WDTH[n / int'(NA)]);
  endfunction

  // number of bits by which result n+1 overlaps result n
  function automatic int overlap(input int n);
    int gap;
    gap = roff(n + 1) - roff(n);
    return (gap < rwdth(n)) ? rwdth(n) - gap : 0;
  endfunction

  for (genvar n = 0; n < int'(NR); n++) begin : g_res
    localparam int K  = (n < int'(NR) - 1) ? overlap(n) : 0;
    localparam int IH = (n + 1) % int'(NA);  // operands of result n+1
    localparam int JH = (n + 1) / int'(NA);
    localparam int RW = rwdth(n);
    localparam int SH = int'(R_W) - RW;        // sign-extension shift

    if (K > 0) begin : g_mr
      localparam int AW = int'(A_WDTH[IH]);
      localparam int WW = int'(W_WDTH[JH]);
      logic [K-1:0]   a_lsb, w_lsb, p_lsb;
      logic [R_W-1:0] f;

      // operand bits 0..K-1; a is zero- and w sign-extended if narrower than K
      always_comb begin
        for (int b = 0; b < K; b++) begin
          a_lsb[b] = (b < AW) ? a_vec[IH][b] : 1'b0;
          w_lsb[b] = (b < WW) ? w_vec[JH][b] : w_vec[JH][WW-1];
        end
      end

      lsb_calc #(.K(K)) u_lsb (
        .a_lsb (a_lsb),
        .w_lsb (w_lsb),
        .p_lsb (p_lsb)
      );

      // subtract at bit RW-K, then sign-extend again from bit RW-1
      assign f        = r_in[n] - (R_W'(p_lsb) << (RW - K));
      assign r_out[n] = en ? R_W'($signed(f << SH) >>> SH) : r_in[n];
    end else begin : g_pass
      assign r_out[n] = r_in[n];
    end
  end

endmodule
