// dsp_pack_pkg -- widths and enumerations shared by the DSP-packing datapaths.
//
// The port widths are those of a Xilinx DSP48E2 slice: a 27-bit pre-adder
// (ports A and D), an 18-bit multiplier input (port B) and a 48-bit
// post-adder / accumulator (ports C, P and the cascade input). The
// correction-mode and cascade-select encodings are this design's own.
package dsp_pack_pkg;

  // DSP slice port widths.
  localparam int unsigned DSP_AD_W = 27;  // pre-adder operands A and D
  localparam int unsigned DSP_B_W  = 18;  // multiplier operand B
  localparam int unsigned DSP_P_W  = 48;  // C, P and cascade words

  // Error-correction scheme applied to a packed multiplication.
  //   CORR_NONE   : plain extraction (floor rounding, bias of up to -1)
  //   CORR_APPROX : sign terms fed into the C port before extraction
  //   CORR_FULL   : round-half-up adders after extraction
  typedef enum logic [1:0] {
    CORR_NONE   = 2'd0,
    CORR_APPROX = 2'd1,
    CORR_FULL   = 2'd2
  } corr_mode_e;

  // Third addend of the DSP post-adder.
  typedef enum logic [1:0] {
    PIN_ZERO     = 2'd0,  // P = B*(A+D) + C
    PIN_CASCADE  = 2'd1,  // P = B*(A+D) + C + PCIN
    PIN_FEEDBACK = 2'd2   // P = B*(A+D) + C + P   (accumulate)
  } pin_sel_e;

endpackage
