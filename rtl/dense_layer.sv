// dense_layer: the "analytical inverse" layer that lifts the GRU-flow state into
// nu, one value per candidate nonlinear term of the recovered ODE model.
//
// y[k] = tanh( sum_j w[k][j] * x[j] + b[k] ),  k = 0 .. NV-1.
// All NV x N products are formed in parallel (one multiplier per weight), summed
// at 32 bits, saturated to Q4.12 and passed through the piecewise-linear tanh.
//
// Interface: x (N values), w[NV][N], b[NV] and y (NV values), all Q4.12.
// Timing: one register stage; latency 1 cycle, one input per cycle; en low holds
// the stage. The activation's slope output is left open: this layer is not
// trained on chip.
// The layer, its place after the GRU flow and its nonlinear activation follow the
// source; the width NV = 10 (second-order library of three states), tanh and the
// fixed-point format are this design's choices.
module dense_layer
  import mr_pkg::*;
#(
  parameter int unsigned N  = N_STATE,
  parameter int unsigned NV = N_LIB
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic in_valid,
  input  fx_t  x [N],
  input  fx_t  w [NV][N],
  input  fx_t  b [NV],
  output logic out_valid,
  output fx_t  y [NV]
);

  fx_t pre [NV];
  fx_t act [NV];

  always_comb begin
    for (int k = 0; k < NV; k++) begin
      acc_t a;
      a = acc_t'(b[k]);
      for (int j = 0; j < N; j++) a += fx_mul(w[k][j], x[j]);
      pre[k] = fx_sat(a);
    end
  end

  for (genvar k = 0; k < NV; k++) begin : g_act
    pwl_act #(.FUNC(ACT_TANH)) u_tanh (.x(pre[k]), .y(act[k]), .dy());
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int k = 0; k < NV; k++) y[k] <= '0;
    end else if (en) begin
      out_valid <= in_valid;
      for (int k = 0; k < NV; k++) y[k] <= act[k];
    end
  end

endmodule
