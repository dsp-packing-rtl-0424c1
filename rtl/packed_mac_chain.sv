// packed_mac_chain -- packed dot products: DEPTH DSP slices chained through
// their cascade ports, each adding one packed outer product to the sum.
//
// Slice k packs its own operand set (a^k, w^k) exactly like mult_packer and
// adds B*(A+D) to the partial sum arriving on its cascade input, so the last
// slice holds sum_k of the packed products. Because packing is linear, every
// field then holds the dot product S_n = sum_k a_i^k * w_j^k. The padding
// between fields is what makes room for this growth: a field needs
// clog2(DEPTH) more bits than one product, so with INT4 packing (3 padding
// bits) up to 2^3 = 8 products can be summed before fields collide. The
// fields are read ACC_W = R_W + clog2(DEPTH) bits wide.
//
// Floor extraction has the same -1 bias as for a single product. full_en
// removes it by the round-half-up correction (result_extract), which stays
// exact as long as each accumulated field fits in ACC_W bits. The
// approximate C-port correction is not offered here: it would count every
// negative product below a field, while the borrow depends only on the sign
// of their sum.
//
// Timing: the chain is systolic. Slice k sees its operands k cycles after
// slice 0 (skew registers), which is exactly when the partial sum of slice
// k-1 reaches its post-adder. Partial sums travel only on the cascade
// path; the P outputs of the slices are therefore left unused, and the last
// slice's cascade output feeds the extraction. One dot product may enter
// every cycle, all DEPTH operand sets at once; out_valid and acc_vec follow
// LATENCY = DEPTH + 4 cycles after in_valid. Synchronous active-high reset.
//
// Chaining slices through P_in/P_cout for accumulation, and sizing the chain
// by 2^delta, follow the published description; the skew, the sidebands and
// reusing the full correction on accumulated fields are this design's own.
// Only equal element widths are supported here.
module packed_mac_chain
  import dsp_pack_pkg::*;
#(
  parameter int unsigned DEPTH      = 8,
  parameter int unsigned NA         = 2,
  parameter int unsigned A_W        = 4,
  parameter int unsigned W_W        = 4,
  parameter int unsigned A_OFF [NA] = '{0, 11},
  parameter int unsigned W_OFF [2]  = '{0, 22},
  localparam int unsigned ACC_W     = A_W + W_W + $clog2(DEPTH),
  localparam int unsigned LATENCY   = DEPTH + 4
) (
  input  logic                                  clk,
  input  logic                                  rst,
  input  logic                                  in_valid,
  input  logic                                  full_en,   // round-half-up
  input  logic [DEPTH-1:0][NA-1:0][A_W-1:0]     a_vec,     // a^k, unsigned
  input  logic [DEPTH-1:0][1:0][W_W-1:0]        w_vec,     // w^k, signed
  output logic                                  out_valid,
  output logic [2*NA-1:0][ACC_W-1:0]            acc_vec    // S_{j*NA+i}
);

  localparam int unsigned DSP_L = 4;  // A/B/D to P of one slice

  typedef struct packed {
    logic [NA-1:0][A_W-1:0] a;
    logic [1:0][W_W-1:0]    w;
  } op_t;

  logic [DEPTH-1:0][DSP_P_W-1:0] pc;  // cascade output of each slice

  for (genvar k = 0; k < int'(DEPTH); k++) begin : g_slice
    op_t skew [k+1];  // skew[s]: operand set of slice k, delayed s cycles

    assign skew[0] = '{a: a_vec[k], w: w_vec[k]};

    for (genvar s = 1; s <= k; s++) begin : g_skew
      always_ff @(posedge clk) begin
        if (rst) skew[s] <= '0;
        else     skew[s] <= skew[s-1];
      end
    end

    logic signed [DSP_AD_W-1:0] a_port, d_port;
    logic        [DSP_B_W-1:0]  b_port;

    mult_packer #(
      .NA(NA), .A_W(A_W), .W_W(W_W), .A_OFF(A_OFF), .W_OFF(W_OFF)
    ) u_pack (
      .a_vec  (skew[k].a),
      .w_vec  (skew[k].w),
      .a_port (a_port),
      .d_port (d_port),
      .b_port (b_port)
    );

    logic signed [DSP_P_W-1:0] p;

    dsp48e2_mac u_dsp (
      .clk     (clk),
      .rst     (rst),
      .a       (a_port),
      .d       (d_port),
      .b       (b_port),
      .c       ('0),
      .pin_sel ((k == 0) ? PIN_ZERO : PIN_CASCADE),
      .pcin    ((k == 0) ? '0 : pc[(k == 0) ? 0 : k-1]),
      .p       (p),
      .pcout   (pc[k])
    );
  end

  // ---- side band to the output of the last slice ----------------------------
  localparam int unsigned SB_L = DEPTH - 1 + DSP_L;

  logic [SB_L-1:0] vld_dly, full_dly;

  always_ff @(posedge clk) begin
    if (rst) begin
      vld_dly  <= '0;
      full_dly <= '0;
    end else begin
      vld_dly  <= {vld_dly[SB_L-2:0], in_valid};
      full_dly <= {full_dly[SB_L-2:0], full_en};
    end
  end

  // ---- extraction of the accumulated fields ---------------------------------
  logic [2*NA-1:0][ACC_W-1:0] acc_ext;

  result_extract #(
    .NA(NA), .R_W(ACC_W), .A_OFF(A_OFF), .W_OFF(W_OFF)
  ) u_extract (
    .p       (pc[DEPTH-1]),
    .full_en (full_dly[SB_L-1]),
    .r_vec   (acc_ext)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      acc_vec   <= '0;
    end else begin
      out_valid <= vld_dly[SB_L-1];
      acc_vec   <= acc_ext;
    end
  end

endmodule
