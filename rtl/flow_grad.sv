// flow_grad: backpropagation of the reconstruction loss through the GRU flow
// layer, accumulated over a run.
//
// For each sample leaving the GRU flow cell it takes the error e = 2 (z - x) on
// the enabled states (the derivative of the loss_unit's squared error) and the
// cell's intermediates, and forms the gradient of that sample's loss with
// respect to every GRU-flow parameter, by the chain rule through
//   F = h + phi (1 - zg)(c - h),  c = tanh(pc),  zg = 0.4 sig(pz),  r = 0.8 sig(pr):
//   dL/dpc[k] = e[k] phi (1 - zg[k]) tanh'(pc[k])
//   dL/dpz[k] = -e[k] phi (c[k] - h[k]) 0.4 sig'(pz[k])
//   dL/dpr[j] = (sum_k dL/dpc[k] W_c[k][j]) h[j] 0.8 sig'(pr[j])
// then, for each gate g and its input vector a_g (r.*h for the candidate, h for
// the two gates): dW_g += dL/dp_g a_g^T, dU_g += dL/dp_g t, dV_g += dL/dp_g u,
// db_g += dL/dp_g. The derivatives of the activations are the slopes of their
// piecewise-linear segments. Each sum is a 48-bit Q.12 accumulator; per-sample
// local gradients saturate at the Q4.12 range.
//
// Interface: clear zeroes all sums (at the start of a run); en/in_valid as in
// the rest of the pipeline; z, meas, mask and the aux_* intermediates come from
// the GRU flow cell and the sample buffer in the same cycle; w_c are the
// candidate weights; the grad_* outputs are the running sums, in the same
// [gate][row][col] layout as the weights.
// Timing: one register stage for the local gradients, then accumulation, so a
// sample is in the sums two clock edges after it left the GRU flow cell, the
// same edge on which its result leaves the accelerator. One sample per cycle.
// That backpropagation runs in the pipeline follows the source; the loss it
// differentiates, the set of trained parameters (the GRU flow layer only; the
// dense layer receives no gradient from this loss) and all arithmetic are this
// design's choices.
module flow_grad
  import mr_pkg::*;
#(
  parameter int unsigned N     = N_STATE,
  parameter int unsigned M     = N_INPUT,
  parameter int unsigned ACC_W = 48
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    en,
  input  logic                    in_valid,
  input  fx_t                     z      [N],
  input  fx_t                     meas   [N],
  input  logic [N-1:0]            mask,
  input  fx_t                     aux_h  [N],
  input  fx_t                     aux_t,
  input  fx_t                     aux_u  [M],
  input  fx_t                     aux_r  [N],
  input  fx_t                     aux_zg [N],
  input  fx_t                     aux_c  [N],
  input  fx_t                     aux_phi,
  input  fx_t                     aux_dr [N],
  input  fx_t                     aux_dz [N],
  input  fx_t                     aux_dc [N],
  input  fx_t                     w_c    [N][N],
  output logic signed [ACC_W-1:0] grad_w [3][N][N],
  output logic signed [ACC_W-1:0] grad_u [3][N],
  output logic signed [ACC_W-1:0] grad_v [3][N][M],
  output logic signed [ACC_W-1:0] grad_b [3][N]
);

  function automatic fx_t mulsat(input fx_t a, input fx_t b);
    return fx_sat(fx_mul(a, b));
  endfunction

  // ---------------- stage G1: local gradients at the gate pre-activations
  fx_t gp [3][N];   // dL/d(pre-activation), per gate
  fx_t a_rh [N];

  always_comb begin
    fx_t e [N];
    for (int k = 0; k < N; k++) begin
      e[k] = mask[k] ? fx_sat((acc_t'(z[k]) - acc_t'(meas[k])) <<< 1) : '0;
      a_rh[k] = mulsat(aux_r[k], aux_h[k]);
    end
    for (int k = 0; k < N; k++) begin
      fx_t ephi;
      ephi = mulsat(e[k], aux_phi);
      gp[GATE_C][k] = mulsat(mulsat(ephi, fx_t'(FX_ONE - aux_zg[k])), aux_dc[k]);
      gp[GATE_Z][k] = mulsat(mulsat(fx_t'(-ephi), fx_sat(acc_t'(aux_c[k]) - acc_t'(aux_h[k]))),
                             aux_dz[k]);
    end
    for (int j = 0; j < N; j++) begin
      acc_t s;
      s = '0;
      for (int k = 0; k < N; k++) s += fx_mul(gp[GATE_C][k], w_c[k][j]);
      gp[GATE_R][j] = mulsat(mulsat(fx_sat(s), aux_h[j]), aux_dr[j]);
    end
  end

  logic g1_valid;
  fx_t  g1_gp [3][N];
  fx_t  g1_h  [N];
  fx_t  g1_rh [N];
  fx_t  g1_t;
  fx_t  g1_u  [M];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g1_valid <= 1'b0;
      g1_t     <= '0;
      for (int m = 0; m < M; m++) g1_u[m] <= '0;
      for (int i = 0; i < N; i++) begin
        g1_h[i] <= '0; g1_rh[i] <= '0;
        for (int g = 0; g < 3; g++) g1_gp[g][i] <= '0;
      end
    end else if (en) begin
      g1_valid <= in_valid;
      g1_t     <= aux_t;
      for (int m = 0; m < M; m++) g1_u[m] <= aux_u[m];
      for (int i = 0; i < N; i++) begin
        g1_h[i]  <= aux_h[i];
        g1_rh[i] <= a_rh[i];
        for (int g = 0; g < 3; g++) g1_gp[g][i] <= gp[g][i];
      end
    end
  end

  // ---------------- accumulation of the outer products
  function automatic logic signed [ACC_W-1:0] ext(input acc_t a);
    return ACC_W'(a);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < 3; g++)
        for (int i = 0; i < N; i++) begin
          grad_u[g][i] <= '0;
          grad_b[g][i] <= '0;
          for (int j = 0; j < N; j++) grad_w[g][i][j] <= '0;
          for (int m = 0; m < M; m++) grad_v[g][i][m] <= '0;
        end
    end else if (clear) begin
      for (int g = 0; g < 3; g++)
        for (int i = 0; i < N; i++) begin
          grad_u[g][i] <= '0;
          grad_b[g][i] <= '0;
          for (int j = 0; j < N; j++) grad_w[g][i][j] <= '0;
          for (int m = 0; m < M; m++) grad_v[g][i][m] <= '0;
        end
    end else if (en && g1_valid) begin
      for (int g = 0; g < 3; g++)
        for (int i = 0; i < N; i++) begin
          grad_u[g][i] <= grad_u[g][i] + ext(fx_mul(g1_gp[g][i], g1_t));
          grad_b[g][i] <= grad_b[g][i] + ext(acc_t'(g1_gp[g][i]));
          for (int j = 0; j < N; j++)
            grad_w[g][i][j] <= grad_w[g][i][j]
                             + ext(fx_mul(g1_gp[g][i], (g == int'(GATE_C)) ? g1_rh[j] : g1_h[j]));
          for (int m = 0; m < M; m++)
            grad_v[g][i][m] <= grad_v[g][i][m] + ext(fx_mul(g1_gp[g][i], g1_u[m]));
        end
    end
  end

endmodule
