// dsp_packing_top -- four DSP units, each packing several low-precision
// operations into DSP slices.
//
//   u_int4 : INT4 packing. Four 4x4-bit products a_i*w_j (a unsigned, w
//            signed) from one DSP, results 11 bits apart (3 padding bits).
//            The rounding correction is chosen per operation by int4_mode:
//            none, approximate (C-port sign terms) or full (round half up).
//   u_ovp  : MSB-restoring Overpacking. Six products of a 4-bit unsigned a_i
//            (three of them) and a 5-bit signed w_j (two), 9-bit results only
//            7 bits apart (padding -2). The two top bits of each result are
//            restored from operand LSBs; small LSB errors remain.
//   u_add  : addition packing. Five independent 9-bit additions in the
//            48-bit post-adder, without guard bits by default.
//   u_acc  : accumulation. Eight INT4-packed slices chained through their
//            cascade ports sum eight outer products; the 3 padding bits
//            let each field grow to an 11-bit dot product.
//
// The three units are independent streams sharing clock and reset; their
// combination in one top level is this design's own choice, the packings
// themselves are the published configurations. Timing: u_int4 and u_ovp
// accept one operation per cycle and answer after 5 cycles; u_add after 3;
// u_acc after ACC_DEPTH + 4 = 12.
// Result order of the multipliers: r[j*NA + i] = a_i * w_j. The *_WDTH
// parameters give each operand or lane its own width (all equal by default).
module dsp_packing_top
  import dsp_pack_pkg::*;
#(
  // INT4 packing
  parameter int unsigned INT4_NA          = 2,
  parameter int unsigned INT4_A_W         = 4,
  parameter int unsigned INT4_W_W         = 4,
  parameter int unsigned INT4_A_OFF [INT4_NA] = '{0, 11},
  parameter int unsigned INT4_W_OFF [2]   = '{0, 22},
  parameter int unsigned INT4_A_WDTH [INT4_NA] = '{default: INT4_A_W},
  parameter int unsigned INT4_W_WDTH [2]  = '{default: INT4_W_W},
  // MR-Overpacking
  parameter int unsigned OVP_NA           = 3,
  parameter int unsigned OVP_A_W          = 4,
  parameter int unsigned OVP_W_W          = 5,
  parameter int unsigned OVP_A_OFF [OVP_NA] = '{0, 7, 14},
  parameter int unsigned OVP_W_OFF [2]    = '{0, 21},
  parameter int unsigned OVP_A_WDTH [OVP_NA] = '{default: OVP_A_W},
  parameter int unsigned OVP_W_WDTH [2]   = '{default: OVP_W_W},
  // addition packing
  parameter int unsigned ADD_LANES        = 5,
  parameter int unsigned ADD_LANE_W       = 9,
  parameter int unsigned ADD_N_GUARD      = 0,
  parameter int unsigned ADD_LANE_WDTH [ADD_LANES] = '{default: ADD_LANE_W},
  // accumulating chain (INT4 packing)
  parameter int unsigned ACC_DEPTH        = 8,
  localparam int unsigned INT4_R_W  = INT4_A_W + INT4_W_W,
  localparam int unsigned OVP_R_W   = OVP_A_W + OVP_W_W,
  localparam int unsigned ADD_G_W   = (ADD_N_GUARD > 0) ? ADD_N_GUARD : 1,
  localparam int unsigned ACC_W     = INT4_R_W + $clog2(ACC_DEPTH)
) (
  input  logic                                 clk,
  input  logic                                 rst,
  // INT4 packed multiplier
  input  logic                                 int4_in_valid,
  input  corr_mode_e                           int4_mode,
  input  logic [INT4_NA-1:0][INT4_A_W-1:0]     int4_a,
  input  logic [1:0][INT4_W_W-1:0]             int4_w,
  output logic                                 int4_out_valid,
  output logic [2*INT4_NA-1:0][INT4_R_W-1:0]   int4_r,
  // MR-Overpacking multiplier
  input  logic                                 ovp_in_valid,
  input  logic [OVP_NA-1:0][OVP_A_W-1:0]       ovp_a,
  input  logic [1:0][OVP_W_W-1:0]              ovp_w,
  output logic                                 ovp_out_valid,
  output logic [2*OVP_NA-1:0][OVP_R_W-1:0]     ovp_r,
  // packed adder
  input  logic                                 add_in_valid,
  input  logic [ADD_LANES-1:0][ADD_LANE_W-1:0] add_x,
  input  logic [ADD_LANES-1:0][ADD_LANE_W-1:0] add_y,
  output logic                                 add_out_valid,
  output logic [ADD_LANES-1:0][ADD_LANE_W-1:0] add_sum,
  output logic [ADD_G_W-1:0]                   add_guard_carry,
  // accumulating chain
  input  logic                                 acc_in_valid,
  input  logic                                 acc_full_en,
  input  logic [ACC_DEPTH-1:0][INT4_NA-1:0][INT4_A_W-1:0] acc_a,
  input  logic [ACC_DEPTH-1:0][1:0][INT4_W_W-1:0]         acc_w,
  output logic                                 acc_out_valid,
  output logic [2*INT4_NA-1:0][ACC_W-1:0]      acc_r
);

  packed_mult_unit #(
    .NA(INT4_NA), .A_W(INT4_A_W), .W_W(INT4_W_W),
    .A_OFF(INT4_A_OFF), .W_OFF(INT4_W_OFF),
    .A_WDTH(INT4_A_WDTH), .W_WDTH(INT4_W_WDTH), .MR_EN(1'b0)
  ) u_int4 (
    .clk       (clk),
    .rst       (rst),
    .in_valid  (int4_in_valid),
    .corr_mode (int4_mode),
    .a_vec     (int4_a),
    .w_vec     (int4_w),
    .out_valid (int4_out_valid),
    .r_vec     (int4_r)
  );

  packed_mult_unit #(
    .NA(OVP_NA), .A_W(OVP_A_W), .W_W(OVP_W_W),
    .A_OFF(OVP_A_OFF), .W_OFF(OVP_W_OFF),
    .A_WDTH(OVP_A_WDTH), .W_WDTH(OVP_W_WDTH), .MR_EN(1'b1)
  ) u_ovp (
    .clk       (clk),
    .rst       (rst),
    .in_valid  (ovp_in_valid),
    .corr_mode (CORR_NONE),
    .a_vec     (ovp_a),
    .w_vec     (ovp_w),
    .out_valid (ovp_out_valid),
    .r_vec     (ovp_r)
  );

  add_pack_unit #(
    .LANES(ADD_LANES), .LANE_W(ADD_LANE_W), .N_GUARD(ADD_N_GUARD),
    .LANE_WDTH(ADD_LANE_WDTH)
  ) u_add (
    .clk         (clk),
    .rst         (rst),
    .in_valid    (add_in_valid),
    .x_vec       (add_x),
    .y_vec       (add_y),
    .out_valid   (add_out_valid),
    .sum_vec     (add_sum),
    .guard_carry (add_guard_carry)
  );

  packed_mac_chain #(
    .DEPTH(ACC_DEPTH), .NA(INT4_NA), .A_W(INT4_A_W), .W_W(INT4_W_W),
    .A_OFF(INT4_A_OFF), .W_OFF(INT4_W_OFF)
  ) u_acc (
    .clk       (clk),
    .rst       (rst),
    .in_valid  (acc_in_valid),
    .full_en   (acc_full_en),
    .a_vec     (acc_a),
    .w_vec     (acc_w),
    .out_valid (acc_out_valid),
    .acc_vec   (acc_r)
  );

endmodule
