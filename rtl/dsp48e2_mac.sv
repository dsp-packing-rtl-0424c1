// dsp48e2_mac -- arithmetic model of one DSP slice: P = B*(A+D) + C + Pin.
//
// This is the function of the Xilinx DSP48E2 that all packing schemes of this
// design are mapped onto, written as plain RTL so that a synthesis tool can
// infer the hard block (and so that it simulates anywhere). It is not the
// vendor primitive: OPMODE/ALUMODE, clock enables and the pattern detector
// are left out; only the data path used by the packing schemes is kept.
//
// Pipeline (the register stages drawn in the DSP symbol of the INT4 packing
// figure): A and D are registered, added in the 27-bit pre-adder and the sum
// is registered (AD); B passes two registers; the product is registered (M);
// C is registered once; the post-adder result is registered (P).
//
//   A, B, D presented in cycle t  -> included in P after the edge ending t+3
//   C presented in cycle t+2      -> same P word
//   pin_sel / pcin in cycle t+3   -> same P word (unregistered, like PCIN)
//
// So P has a latency of 4 cycles from A/B/D, 2 from C and 1 from pcin, and a
// new operation can start every cycle. pin_sel chooses the third addend:
// zero, the cascade input pcin, or P itself (accumulation).
//
// Own choices: A and D are two's complement, B is taken as an UNSIGNED 18-bit
// operand (the packed unsigned a-vector may use all 18 bits; the real
// DSP48E2 treats B as two's complement, which would need B[17] = 0).
// The pre-adder wraps at 27 bits and P wraps at 48 bits. All registers have a
// synchronous active-high reset to zero.
module dsp48e2_mac
  import dsp_pack_pkg::*;
#(
  parameter int unsigned AD_W = DSP_AD_W,
  parameter int unsigned B_W  = DSP_B_W,
  parameter int unsigned P_W  = DSP_P_W
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic signed [AD_W-1:0] a,        // pre-adder operand A
  input  logic signed [AD_W-1:0] d,        // pre-adder operand D
  input  logic        [B_W-1:0]  b,        // multiplier operand B (unsigned)
  input  logic signed [P_W-1:0]  c,        // post-adder operand C
  input  pin_sel_e               pin_sel,  // third post-adder operand
  input  logic signed [P_W-1:0]  pcin,     // cascade input from a lower slice
  output logic signed [P_W-1:0]  p,        // result
  output logic signed [P_W-1:0]  pcout     // cascade output (equals p)
);

  localparam int unsigned M_W = AD_W + B_W + 1;

  logic signed [AD_W-1:0] a_q, d_q, ad_q;
  logic        [B_W-1:0]  b1_q, b2_q;
  logic signed [M_W-1:0]  m_q;
  logic signed [P_W-1:0]  c_q;
  logic signed [P_W-1:0]  pin;

  always_ff @(posedge clk) begin
    if (rst) begin
      a_q  <= '0;
      d_q  <= '0;
      b1_q <= '0;
      b2_q <= '0;
      ad_q <= '0;
      m_q  <= '0;
      c_q  <= '0;
    end else begin
      a_q  <= a;
      d_q  <= d;
      b1_q <= b;
      ad_q <= a_q + d_q;
      b2_q <= b1_q;
      m_q  <= M_W'(ad_q) * $signed({1'b0, b2_q});
      c_q  <= c;
    end
  end

  always_comb begin
    unique case (pin_sel)
      PIN_CASCADE:  pin = pcin;
      PIN_FEEDBACK: pin = p;
      default:      pin = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) p <= '0;
    else     p <= P_W'(m_q) + c_q + pin;
  end

  assign pcout = p;

endmodule
