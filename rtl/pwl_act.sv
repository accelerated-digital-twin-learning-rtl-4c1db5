// pwl_act: combinational piecewise-linear sigmoid or tanh on a Q4.12 value.
//
// The sigmoid is the four-segment "PLAN" approximation, whose slopes are all
// powers of two so that only shifts and adds are needed:
//   |x| >= 5        : 1
//   2.375 <= |x| < 5: |x|/32 + 0.84375
//   1 <= |x| < 2.375: |x|/8  + 0.625
//   |x| < 1         : |x|/4  + 0.5
// and sigmoid(-x) = 1 - sigmoid(x). tanh is derived as 2*sigmoid(2x) - 1, with
// 2x formed at 18 bits so that it cannot overflow. Maximum error against the
// exact functions is about 0.019 (sigmoid) and 0.04 (tanh).
//
// dy is the derivative of the approximation at x (the slope of its segment:
// 1/4, 1/8, 1/32 or 0 for sigmoid; four times the sigmoid slope at 2x for
// tanh), which the gradient unit needs for backpropagation.
//
// Interface: x in, y and dy out, all Q4.12; FUNC selects the function at
// elaboration.
// Timing: purely combinational, no clock.
// The source design only says its neurons use nonlinear activation functions;
// the choice of functions and of this approximation is this design's.
module pwl_act
  import mr_pkg::*;
#(
  parameter act_e FUNC = ACT_SIGMOID
) (
  input  fx_t x,
  output fx_t y,
  output fx_t dy
);

  logic signed [17:0] arg;   // x or 2x
  logic        [17:0] mag;   // |arg|
  logic        [17:0] s_pos; // sigmoid(|arg|), Q.12, in [2048, 4096]
  logic        [17:0] s;     // sigmoid(arg)
  fx_t                slope; // d sigmoid / d arg

  always_comb begin
    arg = (FUNC == ACT_TANH) ? (18'(x) <<< 1) : 18'(x);
    mag = arg[17] ? 18'(-arg) : 18'(arg);
    if (mag >= 18'd20480)      begin s_pos = 18'd4096;               slope = 16'sd0;    end
    else if (mag >= 18'd9728)  begin s_pos = (mag >> 5) + 18'd3456; slope = 16'sd128;  end
    else if (mag >= 18'd4096)  begin s_pos = (mag >> 3) + 18'd2560; slope = 16'sd512;  end
    else                       begin s_pos = (mag >> 2) + 18'd2048; slope = 16'sd1024; end
    s = arg[17] ? (18'd4096 - s_pos) : s_pos;
    if (FUNC == ACT_TANH) begin
      y  = fx_t'((s << 1) - 18'd4096);
      dy = fx_t'(slope <<< 2);
    end else begin
      y  = fx_t'(s);
      dy = slope;
    end
  end

endmodule
