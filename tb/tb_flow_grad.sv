// tb_flow_grad: checks the backpropagation unit against a real-valued chain-rule
// model of the GRU-flow gradient.
//
// Random samples (states, measurements, masks and the cell intermediates, kept
// in a range where nothing saturates) are fed with random gaps and stalls. The
// model forms, in double precision, e = 2(z - x) on the enabled states and
//   dL/dpc = e phi (1 - zg) dc,  dL/dpz = -e phi (c - h) dz,
//   dL/dpr[j] = (sum_k dL/dpc[k] W_c[k][j]) h[j] dr[j],
// and accumulates their outer products with (r.*h, h, h), t, u and 1, with the
// same two-edge timing as the unit (one local-gradient stage, then the sums).
// After every clock edge every sum is compared with the model within a tolerance
// that grows with the number of accumulated samples (Q4.12 truncation). Also
// checks that clear zeroes the sums, that stalls hold them, and that a fully
// masked sample adds exactly nothing.
module tb_flow_grad;
  import mr_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 3;
  localparam int M = 2;

  logic clk = 0, rst_n = 0, clear = 0, en = 1, in_valid = 0;
  fx_t z [N], meas [N];
  logic [N-1:0] mask = '1;
  fx_t aux_h [N], aux_u [M], aux_r [N], aux_zg [N], aux_c [N];
  fx_t aux_dr [N], aux_dz [N], aux_dc [N];
  fx_t aux_t, aux_phi;
  fx_t w_c [N][N];
  logic signed [47:0] grad_w [3][N][N];
  logic signed [47:0] grad_u [3][N];
  logic signed [47:0] grad_v [3][N][M];
  logic signed [47:0] grad_b [3][N];
  int checks = 0, failures = 0;

  flow_grad #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- model
  real rw [3][N][N], ru [3][N], rv [3][N][M], rb [3][N];
  real p_gp [3][N], p_a [3][N], p_t, p_u [M];   // staged sample
  bit  p_valid;
  int  nacc;

  task automatic local_grads(output real gp [3][N], output real a [3][N]);
    real e [N], s;
    for (int k = 0; k < N; k++)
      e[k] = mask[k] ? 2.0 * (fx2r(z[k]) - fx2r(meas[k])) : 0.0;
    for (int k = 0; k < N; k++) begin
      gp[GATE_C][k] = e[k] * fx2r(aux_phi) * (1.0 - fx2r(aux_zg[k])) * fx2r(aux_dc[k]);
      gp[GATE_Z][k] = -e[k] * fx2r(aux_phi) * (fx2r(aux_c[k]) - fx2r(aux_h[k])) * fx2r(aux_dz[k]);
    end
    for (int j = 0; j < N; j++) begin
      s = 0.0;
      for (int k = 0; k < N; k++) s += gp[GATE_C][k] * fx2r(w_c[k][j]);
      gp[GATE_R][j] = s * fx2r(aux_h[j]) * fx2r(aux_dr[j]);
    end
    for (int j = 0; j < N; j++) begin
      a[GATE_R][j] = fx2r(aux_h[j]);
      a[GATE_Z][j] = fx2r(aux_h[j]);
      a[GATE_C][j] = fx2r(aux_r[j]) * fx2r(aux_h[j]);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (clear) begin
      nacc = 0;
      for (int g = 0; g < 3; g++)
        for (int i = 0; i < N; i++) begin
          ru[g][i] = 0; rb[g][i] = 0;
          for (int j = 0; j < N; j++) rw[g][i][j] = 0;
          for (int m = 0; m < M; m++) rv[g][i][m] = 0;
        end
    end else if (en && p_valid) begin
      nacc++;
      for (int g = 0; g < 3; g++)
        for (int i = 0; i < N; i++) begin
          ru[g][i] += p_gp[g][i] * p_t;
          rb[g][i] += p_gp[g][i];
          for (int j = 0; j < N; j++) rw[g][i][j] += p_gp[g][i] * p_a[g][j];
          for (int m = 0; m < M; m++) rv[g][i][m] += p_gp[g][i] * p_u[m];
        end
    end
    if (en) begin
      p_valid = in_valid;
      local_grads(p_gp, p_a);
      p_t = fx2r(aux_t);
      for (int m = 0; m < M; m++) p_u[m] = fx2r(aux_u[m]);
    end
  end

  function automatic real g2r(input logic signed [47:0] g);
    return real'(g) / 4096.0;
  endfunction

  task automatic compare(input string tag);
    real tol;
    int bad;
    tol = 0.002 + 0.012 * nacc;
    bad = 0;
    for (int g = 0; g < 3; g++)
      for (int i = 0; i < N; i++) begin
        if (abs_r(g2r(grad_u[g][i]) - ru[g][i]) > tol) bad++;
        if (abs_r(g2r(grad_b[g][i]) - rb[g][i]) > tol) bad++;
        for (int j = 0; j < N; j++) if (abs_r(g2r(grad_w[g][i][j]) - rw[g][i][j]) > tol) bad++;
        for (int m = 0; m < M; m++) if (abs_r(g2r(grad_v[g][i][m]) - rv[g][i][m]) > tol) bad++;
      end
    checks++;
    if (bad != 0) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %0d sums off (nacc %0d) e.g. dWc00 %f vs %f, dWr00 %f vs %f",
                 tag, bad, nacc, g2r(grad_w[GATE_C][0][0]), rw[GATE_C][0][0],
                 g2r(grad_w[GATE_R][0][0]), rw[GATE_R][0][0]);
    end
  endtask

  function automatic fx_t rnd(input real lo, input real hi);
    return r2fx(lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0);
  endfunction

  task automatic randomize_sample();
    for (int k = 0; k < N; k++) begin
      z[k]      = rnd(-1.0, 1.0);
      meas[k]   = rnd(-1.0, 1.0);
      aux_h[k]  = rnd(-1.5, 1.5);
      aux_r[k]  = rnd(0.0, 0.8);
      aux_zg[k] = rnd(0.0, 0.4);
      aux_c[k]  = rnd(-1.0, 1.0);
      aux_dr[k] = rnd(0.0, 0.2);
      aux_dz[k] = rnd(0.0, 0.1);
      aux_dc[k] = rnd(0.0, 1.0);
    end
    for (int m = 0; m < M; m++) aux_u[m] = rnd(-1.0, 1.0);
    aux_t   = rnd(0.0, 2.0);
    aux_phi = rnd(0.0, 1.0);
  endtask

  logic signed [47:0] snap_w00;

  initial begin
    randomize_sample();
    for (int k = 0; k < N; k++) for (int j = 0; j < N; j++) w_c[k][j] = rnd(-0.5, 0.5);
    repeat (2) @(negedge clk);
    rst_n = 1;
    clear = 1; @(negedge clk); clear = 0;
    compare("after clear");

    // Single sample: nothing after one edge, all of it after two.
    mask = '1; en = 1; in_valid = 1; randomize_sample();
    @(negedge clk); in_valid = 0;
    compare("one edge");
    @(negedge clk);
    compare("two edges");
    checks++;
    if (grad_b[GATE_C][0] == 0 && grad_b[GATE_C][1] == 0 && grad_b[GATE_C][2] == 0) begin
      failures++; $display("FAIL single sample left no candidate gradient");
    end

    // Long random phases with gaps, stalls and masks, cleared twice.
    for (int run = 0; run < 3; run++) begin
      clear = 1; @(negedge clk); clear = 0;
      compare("clear");
      for (int k = 0; k < 40; k++) begin
        in_valid = $urandom_range(0, 3) != 0;
        en = $urandom_range(0, 4) != 0;
        mask = (run == 0) ? '1 : N'($urandom_range(0, 7));
        randomize_sample();
        snap_w00 = grad_w[GATE_Z][0][0];
        @(negedge clk);
        compare("random");
        if (!en) begin
          checks++;
          if (grad_w[GATE_Z][0][0] != snap_w00) begin
            failures++; $display("FAIL sums moved during a stall");
          end
        end
      end
      en = 1; in_valid = 0;
      repeat (2) @(negedge clk);
      compare("drained");
    end

    // A fully masked sample contributes exactly zero.
    en = 1; in_valid = 0; repeat (2) @(negedge clk);
    snap_w00 = grad_w[GATE_R][1][2];
    begin
      logic signed [47:0] sb;
      sb = grad_b[GATE_C][1];
      mask = '0; in_valid = 1; randomize_sample();
      repeat (3) @(negedge clk);
      in_valid = 0; repeat (2) @(negedge clk);
      checks++;
      if (grad_w[GATE_R][1][2] != snap_w00 || grad_b[GATE_C][1] != sb) begin
        failures++; $display("FAIL masked samples changed the gradient");
      end
    end
    compare("final");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
