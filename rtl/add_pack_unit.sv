// add_pack_unit -- several narrow additions carried out by one 48-bit DSP adder.
//
// LANES independent additions x_k + y_k of LANE_WDTH[k] bits each are packed
// side by side into two 48-bit words and added with the DSP's post-adder in
// one operation. Lane k starts right above lane k-1; the lowest N_GUARD lane
// boundaries have one guard bit each, kept at zero in both operands.
// LANE_W is the width of the port entries and the default lane width; a
// narrower lane uses the low bits of its entry, ignores the operand bits
// above its width and returns its sum zero-extended.
//
// A guard bit absorbs the carry out of the lane below it, so that lane
// boundary is exact. Across a boundary without a guard bit, the carry out of
// the lower lane enters the LSB of the upper lane: the lowest lane is always
// exact and every other lane is at most 1 too large. Two's complement and
// unsigned operands both work, since each lane is taken modulo 2^width.
//
// Defaults: five 9-bit lanes without guard bits (45 of 48 bits). With
// N_GUARD = 3 the five lanes fill all 48 bits and only the top lane can be
// off by one. LANE_W = 10 with LANE_WDTH = {9, 9, 10, 10, 10} fills all 48
// bits with two 9-bit and three 10-bit additions.
//
// Mapping onto the DSP (own choice, using only P = B*(A+D) + C + Pin): the
// packed x word drives C, the packed y word drives the cascade input, and
// the multiplier operands are zero. The y word is registered once so that it
// meets C at the post-adder.
//
// Interface and timing: one operation per cycle; sums appear on sum_vec
// with out_valid exactly LATENCY = 3 cycles after in_valid. guard_carry[g]
// reports the carry caught by guard bit g (lanes g and g+1) for that result.
// With N_GUARD = 0 there is no guard bit and guard_carry is a constant zero
// kept only so that the port exists in every configuration. The slice's
// cascade output is left open, as no further slice is chained behind it.
// Synchronous active-high reset.
module add_pack_unit
  import dsp_pack_pkg::*;
#(
  parameter int unsigned LANES   = 5,
  parameter int unsigned LANE_W  = 9,
  parameter int unsigned N_GUARD = 0,
  parameter int unsigned LANE_WDTH [LANES] = '{default: LANE_W},
  localparam int unsigned G_W     = (N_GUARD > 0) ? N_GUARD : 1,
  localparam int unsigned LATENCY = 3
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          in_valid,
  input  logic [LANES-1:0][LANE_W-1:0]  x_vec,
  input  logic [LANES-1:0][LANE_W-1:0]  y_vec,
  output logic                          out_valid,
  output logic [LANES-1:0][LANE_W-1:0]  sum_vec,
  output logic [G_W-1:0]                guard_carry
);

  function automatic int unsigned lane_off(input int unsigned k);
    int unsigned off = 0;
    for (int unsigned m = 0; m < k; m++)
      off += LANE_WDTH[m] + ((m < N_GUARD) ? 1 : 0);
    return off;
  endfunction

  function automatic logic [LANE_W-1:0] lane_mask(input int unsigned k);
    return LANE_W'((64'(1) << LANE_WDTH[k]) - 1);
  endfunction

  // ---- packing --------------------------------------------------------------
  logic [DSP_P_W-1:0] x_word, y_word;

  always_comb begin
    x_word = '0;
    y_word = '0;
    for (int unsigned k = 0; k < LANES; k++) begin
      x_word = x_word | (DSP_P_W'(x_vec[k] & lane_mask(k)) << lane_off(k));
      y_word = y_word | (DSP_P_W'(y_vec[k] & lane_mask(k)) << lane_off(k));
    end
  end

  logic [DSP_P_W-1:0] y_q;
  logic [1:0]         vld_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      y_q   <= '0;
      vld_q <= '0;
    end else begin
      y_q   <= y_word;
      vld_q <= {vld_q[0], in_valid};
    end
  end

  // ---- the 48-bit adder of the DSP ------------------------------------------
  logic signed [DSP_P_W-1:0] p;

  dsp48e2_mac u_dsp (
    .clk     (clk),
    .rst     (rst),
    .a       ('0),
    .d       ('0),
    .b       ('0),
    .c       (x_word),
    .pin_sel (PIN_CASCADE),
    .pcin    (y_q),
    .p       (p),
    .pcout   ()
  );

  // ---- unpacking ------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid   <= 1'b0;
      sum_vec     <= '0;
      guard_carry <= '0;
    end else begin
      out_valid   <= vld_q[1];
      for (int unsigned k = 0; k < LANES; k++)
        sum_vec[k] <= LANE_W'(p >> lane_off(k)) & lane_mask(k);
      for (int unsigned g = 0; g < G_W; g++)
        guard_carry[g] <= (g < N_GUARD) ? p[lane_off(g) + LANE_WDTH[g]] : 1'b0;
    end
  end

endmodule
