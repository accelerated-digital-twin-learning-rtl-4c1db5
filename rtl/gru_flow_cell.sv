// gru_flow_cell: GRU-flow layer, the neural-flow replacement of a Neural ODE layer.
//
// Instead of integrating dz/dt = h(z) from 0 to t with an iterative solver, the
// layer evaluates a learned flow F(t, z0) that is z0 at t = 0 and invertible in
// z0. Samples at different t are therefore independent and the layer can take a
// new (z0, t) pair every cycle. The cell follows the GRU flow of the neural-flow
// literature:
//   r  = 0.8 * sigmoid(W_r z0 + U_r t + V_r u + b_r)     (reset gate)
//   zg = 0.4 * sigmoid(W_z z0 + U_z t + V_z u + b_z)     (update gate)
//   c  = tanh(W_c (r .* z0) + U_c t + V_c u + b_c)       (candidate)
//   F  = z0 + tanh(t) .* (1 - zg) .* (c - z0)
// The 0.4 and 0.8 bounds keep F invertible; tanh(t) is the time embedding that
// makes F(0, z0) = z0. u is the external input of the twin at that sample (M
// values, e.g. basal insulin and glucose appearance rate), which conditions the
// gates the way the input of a Neural ODE cell conditions its dynamics.
//
// Interface: h is z0 (N states, Q4.12), t the sample time (Q4.12), ux the
// sample's external input (M values, M >= 1). Weights are indexed
// [gate][row][col] with gate 0 = r, 1 = zg, 2 = c; u holds the time weights, v
// the input weights and b the biases. The weights are inputs held in registers outside,
// so every multiplier reads its own operand (full partitioning).
// Alongside y the cell delivers, aligned with it, the intermediate values that
// backpropagation through the cell needs (aux_*): the gates r and zg, the
// candidate c, tanh(t), the inputs h, t and u, and the local derivatives
// 0.8*sigmoid'(pre_r), 0.4*sigmoid'(pre_z) and tanh'(pre_c).
// Timing: three register stages (gates, candidate, output); latency 3 cycles,
// one new input per cycle. When en is low every stage holds (stall).
// The source names the GRU flow layer and its place in the pipeline; the gate
// equations are taken from the neural-flow work it cites, and the stage split,
// the fixed-point format and tanh(t) as time embedding are this design's choices.
module gru_flow_cell
  import mr_pkg::*;
#(
  parameter int unsigned N = N_STATE,
  parameter int unsigned M = N_INPUT
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic in_valid,
  input  fx_t  h [N],
  input  fx_t  t,
  input  fx_t  ux [M],
  input  fx_t  w [3][N][N],
  input  fx_t  u [3][N],
  input  fx_t  v [3][N][M],
  input  fx_t  b [3][N],
  output logic out_valid,
  output fx_t  y [N],
  // intermediates for backpropagation, aligned with y
  output fx_t  aux_h   [N],
  output fx_t  aux_t,
  output fx_t  aux_u   [M],
  output fx_t  aux_r   [N],
  output fx_t  aux_zg  [N],
  output fx_t  aux_c   [N],
  output fx_t  aux_phi,
  output fx_t  aux_dr  [N],
  output fx_t  aux_dz  [N],
  output fx_t  aux_dc  [N]
);

  // ---------------- stage 1: reset and update gates, time embedding
  fx_t pre_r [N];
  fx_t pre_z [N];
  fx_t sig_r [N];
  fx_t sig_z [N];
  fx_t dsig_r [N];
  fx_t dsig_z [N];
  fx_t phi_c;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      acc_t ar, az;
      ar = fx_mul(u[GATE_R][i], t) + acc_t'(b[GATE_R][i]);
      az = fx_mul(u[GATE_Z][i], t) + acc_t'(b[GATE_Z][i]);
      for (int j = 0; j < N; j++) begin
        ar += fx_mul(w[GATE_R][i][j], h[j]);
        az += fx_mul(w[GATE_Z][i][j], h[j]);
      end
      for (int m = 0; m < M; m++) begin
        ar += fx_mul(v[GATE_R][i][m], ux[m]);
        az += fx_mul(v[GATE_Z][i][m], ux[m]);
      end
      pre_r[i] = fx_sat(ar);
      pre_z[i] = fx_sat(az);
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_gate_act
    pwl_act #(.FUNC(ACT_SIGMOID)) u_sig_r (.x(pre_r[i]), .y(sig_r[i]), .dy(dsig_r[i]));
    pwl_act #(.FUNC(ACT_SIGMOID)) u_sig_z (.x(pre_z[i]), .y(sig_z[i]), .dy(dsig_z[i]));
  end
  // t is an input, not a parameter, so the embedding's slope is not needed.
  pwl_act #(.FUNC(ACT_TANH)) u_phi (.x(t), .y(phi_c), .dy());

  logic s1_valid;
  fx_t  s1_h  [N];
  fx_t  s1_r  [N];
  fx_t  s1_zg [N];
  fx_t  s1_dr [N];
  fx_t  s1_dz [N];
  fx_t  s1_t;
  fx_t  s1_u  [M];
  fx_t  s1_phi;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_t     <= '0;
      s1_phi   <= '0;
      for (int m = 0; m < M; m++) s1_u[m] <= '0;
      for (int i = 0; i < N; i++) begin
        s1_h[i] <= '0; s1_r[i] <= '0; s1_zg[i] <= '0; s1_dr[i] <= '0; s1_dz[i] <= '0;
      end
    end else if (en) begin
      s1_valid <= in_valid;
      s1_t     <= t;
      s1_phi   <= phi_c;
      for (int m = 0; m < M; m++) s1_u[m] <= ux[m];
      for (int i = 0; i < N; i++) begin
        s1_h[i]  <= h[i];
        s1_r[i]  <= fx_sat(fx_mul(BETA_R, sig_r[i]));
        s1_zg[i] <= fx_sat(fx_mul(ALPHA_ZG, sig_z[i]));
        s1_dr[i] <= fx_sat(fx_mul(BETA_R, dsig_r[i]));
        s1_dz[i] <= fx_sat(fx_mul(ALPHA_ZG, dsig_z[i]));
      end
    end
  end

  // ---------------- stage 2: candidate state
  fx_t pre_c [N];
  fx_t cand  [N];
  fx_t dcand [N];

  always_comb begin
    fx_t rh [N];
    for (int j = 0; j < N; j++) rh[j] = fx_sat(fx_mul(s1_r[j], s1_h[j]));
    for (int i = 0; i < N; i++) begin
      acc_t ac;
      ac = fx_mul(u[GATE_C][i], s1_t) + acc_t'(b[GATE_C][i]);
      for (int j = 0; j < N; j++) ac += fx_mul(w[GATE_C][i][j], rh[j]);
      for (int m = 0; m < M; m++) ac += fx_mul(v[GATE_C][i][m], s1_u[m]);
      pre_c[i] = fx_sat(ac);
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_cand_act
    pwl_act #(.FUNC(ACT_TANH)) u_tanh_c (.x(pre_c[i]), .y(cand[i]), .dy(dcand[i]));
  end

  logic s2_valid;
  fx_t  s2_h  [N];
  fx_t  s2_c  [N];
  fx_t  s2_zg [N];
  fx_t  s2_r  [N];
  fx_t  s2_dr [N];
  fx_t  s2_dz [N];
  fx_t  s2_dc [N];
  fx_t  s2_u  [M];
  fx_t  s2_t;
  fx_t  s2_phi;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_phi   <= '0;
      s2_t     <= '0;
      for (int m = 0; m < M; m++) s2_u[m] <= '0;
      for (int i = 0; i < N; i++) begin
        s2_h[i] <= '0; s2_c[i] <= '0; s2_zg[i] <= '0;
        s2_r[i] <= '0; s2_dr[i] <= '0; s2_dz[i] <= '0; s2_dc[i] <= '0;
      end
    end else if (en) begin
      s2_valid <= s1_valid;
      s2_phi   <= s1_phi;
      s2_t     <= s1_t;
      for (int m = 0; m < M; m++) s2_u[m] <= s1_u[m];
      for (int i = 0; i < N; i++) begin
        s2_h[i]  <= s1_h[i];
        s2_c[i]  <= cand[i];
        s2_zg[i] <= s1_zg[i];
        s2_r[i]  <= s1_r[i];
        s2_dr[i] <= s1_dr[i];
        s2_dz[i] <= s1_dz[i];
        s2_dc[i] <= dcand[i];
      end
    end
  end

  // ---------------- stage 3: flow update F = h + phi (1 - zg) (c - h)
  fx_t upd [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      acc_t d, k;
      d = acc_t'(s2_c[i]) - acc_t'(s2_h[i]);
      k = fx_mul(s2_phi, fx_t'(FX_ONE - s2_zg[i]));
      upd[i] = fx_sat(acc_t'(s2_h[i]) + ((k * d) >>> FX_FRAC));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      aux_t     <= '0;
      aux_phi   <= '0;
      for (int m = 0; m < M; m++) aux_u[m] <= '0;
      for (int i = 0; i < N; i++) begin
        y[i] <= '0;
        aux_h[i] <= '0; aux_r[i] <= '0; aux_zg[i] <= '0; aux_c[i] <= '0;
        aux_dr[i] <= '0; aux_dz[i] <= '0; aux_dc[i] <= '0;
      end
    end else if (en) begin
      out_valid <= s2_valid;
      aux_t     <= s2_t;
      aux_phi   <= s2_phi;
      for (int m = 0; m < M; m++) aux_u[m] <= s2_u[m];
      for (int i = 0; i < N; i++) begin
        y[i]      <= upd[i];
        aux_h[i]  <= s2_h[i];
        aux_r[i]  <= s2_r[i];
        aux_zg[i] <= s2_zg[i];
        aux_c[i]  <= s2_c[i];
        aux_dr[i] <= s2_dr[i];
        aux_dz[i] <= s2_dz[i];
        aux_dc[i] <= s2_dc[i];
      end
    end
  end

endmodule
