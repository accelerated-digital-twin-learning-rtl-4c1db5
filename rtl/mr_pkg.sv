// mr_pkg: types, constants and fixed-point helpers shared by the model-recovery
// accelerator.
//
// All datapath values are 16-bit signed Q4.12 fixed point (range [-8, 8),
// resolution 1/4096). Products are formed at 32 bits, shifted right by 12
// (arithmetic shift, i.e. rounding toward minus infinity) and summed at 32 bits;
// a neuron's pre-activation is saturated back to 16 bits before its activation.
// The sizes N = 3, M = 2 and DEPTH = 200 come from the twins in the source
// description (three states; basal insulin and glucose appearance as external
// inputs of the insulin twin; 200 samples per series); the width of
// nu (NV = 10 = C(2+3, 3), second-order terms) and everything about the number
// format are this design's own choices.
package mr_pkg;

  localparam int unsigned FX_W    = 16;
  localparam int unsigned FX_FRAC = 12;

  typedef logic signed [FX_W-1:0] fx_t;
  typedef logic signed [31:0]     acc_t;

  localparam fx_t FX_ONE  = 16'sd4096;
  localparam fx_t FX_MAX  = 16'sh7FFF;
  localparam fx_t FX_MIN  = -16'sh8000;

  // GRU-flow gate scalings that keep the flow invertible (0.4 and 0.8, Q4.12).
  localparam fx_t ALPHA_ZG = 16'sd1638;
  localparam fx_t BETA_R   = 16'sd3277;

  // Default sizes.
  localparam int unsigned N_STATE  = 3;
  localparam int unsigned N_INPUT  = 2;
  localparam int unsigned N_LIB    = 10;
  localparam int unsigned N_DEPTH  = 200;

  // Gate index of the GRU flow cell.
  typedef enum logic [1:0] {
    GATE_R = 2'd0,
    GATE_Z = 2'd1,
    GATE_C = 2'd2
  } gate_e;

  typedef enum logic {
    ACT_SIGMOID = 1'b0,
    ACT_TANH    = 1'b1
  } act_e;

  // a*b in Q4.12, kept at 32 bits.
  function automatic acc_t fx_mul(input fx_t a, input fx_t b);
    logic signed [31:0] p;
    p = 32'(a) * 32'(b);
    return p >>> FX_FRAC;
  endfunction

  // Saturate a 32-bit Q.12 sum to Q4.12.
  function automatic fx_t fx_sat(input acc_t a);
    if (a > acc_t'(FX_MAX)) return FX_MAX;
    if (a < acc_t'(FX_MIN)) return FX_MIN;
    return fx_t'(a);
  endfunction

endpackage
