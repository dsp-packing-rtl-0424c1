// packed_mult_unit -- one DSP slice computing the outer product of two short
// low-precision vectors, with the error corrections of DSP packing.
//
// The unit multiplies every unsigned a_i (NA of them, A_WDTH[i] bits) with
// both signed w_j (W_WDTH[j] bits) in a single DSP multiplication (see
// mult_packer) and returns the 2*NA products. Product n = a_i*w_j,
// n = j*NA + i, is read from the DSP result at r_off[n] = A_OFF[i] + W_OFF[j]
// and is A_WDTH[i] + W_WDTH[j] bits wide. By default all a widths are A_W and
// all w widths W_W; the port entries are A_W, W_W and R_W = A_W + W_W bits,
// narrower elements use the low bits and results come sign-extended. The
// padding delta between neighbouring results (gap minus the lower result's
// width) decides the behaviour:
//   * delta >= 0 (e.g. INT4: a_off = {0,11}, w_off = {0,22}, delta = 3):
//     products are exact up to a floor-rounding bias of -1, which corr_mode
//     removes fully (CORR_FULL, adders after the DSP) or mostly (CORR_APPROX,
//     sign terms fed in through the DSP's C port at no logic cost);
//   * delta < 0 ("Overpacking", e.g. a_off = {0,6}, w_off = {0,12}, delta = -2):
//     fields overlap; with MR_EN the contaminated top bits of each product are
//     restored from a few operand LSBs (mr_restore), leaving small LSB errors.
//
// Data path: mult_packer -> dsp48e2_mac -> result_extract -> mr_restore ->
// output register. The approximate-correction word is delayed two cycles so
// that it reaches the C port together with the product it belongs to; the
// operands and the mode are delayed four cycles to meet the DSP output.
//
// Interface and timing: one operation may enter every cycle (in_valid with
// a_vec, w_vec, corr_mode); its products appear on r_vec with out_valid
// exactly LATENCY = 5 cycles later. Synchronous active-high reset. Each
// operation carries its own corr_mode, so the mode may change every cycle.
// The slice's cascade output is left open: the unit does not chain slices.
// The pipeline timing and the valid/mode sidebands are this design's own;
// the packing, corrections and restoration follow the published schemes.
module packed_mult_unit
  import dsp_pack_pkg::*;
#(
  parameter int unsigned NA         = 2,
  parameter int unsigned A_W        = 4,
  parameter int unsigned W_W        = 4,
  parameter int unsigned A_OFF [NA] = '{0, 11},
  parameter int unsigned W_OFF [2]  = '{0, 22},
  parameter int unsigned A_WDTH [NA] = '{default: A_W},
  parameter int unsigned W_WDTH [2]  = '{default: W_W},
  parameter bit          MR_EN      = 1'b1,
  localparam int unsigned R_W       = A_W + W_W,
  localparam int unsigned LATENCY   = 5
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     in_valid,
  input  corr_mode_e               corr_mode,
  input  logic [NA-1:0][A_W-1:0]   a_vec,     // unsigned
  input  logic [1:0][W_W-1:0]      w_vec,     // two's complement
  output logic                     out_valid,
  output logic [2*NA-1:0][R_W-1:0] r_vec      // r_vec[j*NA+i] = a_i*w_j
);

  localparam int unsigned NR    = 2 * NA;
  localparam int unsigned DSP_L = 4;  // A/B/D to P
  localparam int unsigned C_L   = 2;  // C enters two cycles after A/B/D

  // ---- operand packing and DSP -------------------------------------------
  logic signed [DSP_AD_W-1:0] a_port, d_port;
  logic        [DSP_B_W-1:0]  b_port;
  logic signed [DSP_P_W-1:0]  c_word, p;
  logic signed [DSP_P_W-1:0]  c_dly [C_L];

  mult_packer #(
    .NA(NA), .A_W(A_W), .W_W(W_W), .A_OFF(A_OFF), .W_OFF(W_OFF),
    .A_WDTH(A_WDTH), .W_WDTH(W_WDTH)
  ) u_pack (
    .a_vec  (a_vec),
    .w_vec  (w_vec),
    .a_port (a_port),
    .d_port (d_port),
    .b_port (b_port)
  );

  approx_corr_term #(
    .NA(NA), .A_OFF(A_OFF), .W_OFF(W_OFF)
  ) u_approx (
    .en     (corr_mode == CORR_APPROX),
    .w_sign ({w_vec[1][W_WDTH[1]-1], w_vec[0][W_WDTH[0]-1]}),
    .c_word (c_word)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < int'(C_L); s++) c_dly[s] <= '0;
    end else begin
      c_dly[0] <= c_word;
      for (int s = 1; s < int'(C_L); s++) c_dly[s] <= c_dly[s-1];
    end
  end

  dsp48e2_mac u_dsp (
    .clk     (clk),
    .rst     (rst),
    .a       (a_port),
    .d       (d_port),
    .b       (b_port),
    .c       (c_dly[C_L-1]),
    .pin_sel (PIN_ZERO),
    .pcin    ('0),
    .p       (p),
    .pcout   ()
  );

  // ---- side band aligned with the DSP output -------------------------------
  typedef struct packed {
    logic                   valid;
    corr_mode_e             mode;
    logic [NA-1:0][A_W-1:0] a;
    logic [1:0][W_W-1:0]    w;
  } side_t;

  side_t side_dly [DSP_L];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < int'(DSP_L); s++) side_dly[s] <= '0;
    end else begin
      side_dly[0] <= '{valid: in_valid, mode: corr_mode, a: a_vec, w: w_vec};
      for (int s = 1; s < int'(DSP_L); s++) side_dly[s] <= side_dly[s-1];
    end
  end

  side_t side_p;
  assign side_p = side_dly[DSP_L-1];

  // ---- extraction, full correction and MSB restoration --------------------
  logic [NR-1:0][R_W-1:0] r_ext, r_res;

  result_extract #(
    .NA(NA), .R_W(R_W), .A_OFF(A_OFF), .W_OFF(W_OFF),
    .A_WDTH(A_WDTH), .W_WDTH(W_WDTH)
  ) u_extract (
    .p       (p),
    .full_en (side_p.mode == CORR_FULL),
    .r_vec   (r_ext)
  );

  mr_restore #(
    .NA(NA), .A_W(A_W), .W_W(W_W), .R_W(R_W), .A_OFF(A_OFF), .W_OFF(W_OFF),
    .A_WDTH(A_WDTH), .W_WDTH(W_WDTH)
  ) u_mr (
    .en    (MR_EN),
    .a_vec (side_p.a),
    .w_vec (side_p.w),
    .r_in  (r_ext),
    .r_out (r_res)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      r_vec     <= '0;
    end else begin
      out_valid <= side_p.valid;
      r_vec     <= r_res;
    end
  end

endmodule
