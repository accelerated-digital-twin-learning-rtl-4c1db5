// tb_gru_flow_cell: drives random (z0, t) pairs and random weights into the
// GRU-flow cell and compares every result with a double-precision model of
//   F(t, z0) = z0 + tanh(t) (1 - 0.4 sig(Wz z0 + Uz t + Vz u + bz)) (c - z0),
//   c = tanh(Wc (0.8 sig(Wr z0 + Ur t + Vr u + br) .* z0) + Uc t + Vc u + bc).
// Phase 1 streams one input per cycle and checks the 3-cycle latency and the
// throughput of one result per cycle. Phase 2 stalls the cell at random (en low)
// and checks that results come out in order and unchanged. Phase 3 checks the
// flow's initial condition F(0, z0) = z0 exactly. With every result the
// intermediates handed to backpropagation (inputs, gates, candidate, tanh(t)
// and the three local derivatives) are compared with the model as well.
module tb_gru_flow_cell;
  import mr_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 3, M = 2;
  localparam real TOL = 0.012;

  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, out_valid;
  fx_t h [N], y [N], t, ux [M];
  fx_t w [3][N][N], u [3][N], b [3][N], v [3][N][M];
  fx_t aux_h [N], aux_u [M], aux_r [N], aux_zg [N], aux_c [N];
  fx_t aux_dr [N], aux_dz [N], aux_dc [N];
  fx_t aux_t, aux_phi;
  int checks = 0, failures = 0;

  gru_flow_cell #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    real v [N];
    real h [N], r [N], zg [N], c [N], dr [N], dz [N], dc [N], u [M];
    real t, phi;
  } vec_t;
  vec_t exp_q [$];
  int   in_cycle [$];
  int   cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic vec_t model(input fx_t hz [N], input fx_t tt, input fx_t uu [M]);
    vec_t r;
    real hr [N], rg [N], zg [N], c [N], phi, tr;
    tr = fx2r(tt);
    for (int i = 0; i < N; i++) hr[i] = fx2r(hz[i]);
    phi = ref_tanh(tr);
    for (int i = 0; i < N; i++) begin
      real ar, az;
      ar = fx2r(u[0][i]) * tr + fx2r(b[0][i]);
      az = fx2r(u[1][i]) * tr + fx2r(b[1][i]);
      for (int j = 0; j < N; j++) begin
        ar += fx2r(w[0][i][j]) * hr[j];
        az += fx2r(w[1][i][j]) * hr[j];
      end
      for (int m = 0; m < M; m++) begin
        ar += fx2r(v[0][i][m]) * fx2r(uu[m]);
        az += fx2r(v[1][i][m]) * fx2r(uu[m]);
      end
      rg[i] = 0.8 * ref_sigmoid(clip(ar));
      zg[i] = 0.4 * ref_sigmoid(clip(az));
      r.dr[i] = 0.8 * ref_dsigmoid(clip(ar));
      r.dz[i] = 0.4 * ref_dsigmoid(clip(az));
      r.r[i] = rg[i];
      r.zg[i] = zg[i];
      r.h[i] = hr[i];
    end
    for (int i = 0; i < N; i++) begin
      real ac;
      ac = fx2r(u[2][i]) * tr + fx2r(b[2][i]);
      for (int j = 0; j < N; j++) ac += fx2r(w[2][i][j]) * rg[j] * hr[j];
      for (int m = 0; m < M; m++) ac += fx2r(v[2][i][m]) * fx2r(uu[m]);
      c[i] = ref_tanh(clip(ac));
      r.c[i] = c[i];
      r.dc[i] = ref_dtanh(clip(ac));
      r.v[i] = hr[i] + phi * (1.0 - zg[i]) * (c[i] - hr[i]);
    end
    r.t = tr;
    r.phi = phi;
    for (int m = 0; m < M; m++) r.u[m] = fx2r(uu[m]);
    return r;
  endfunction

  // Intermediates: exact for pass-through values, a few LSB for the gates; a
  // slope may differ from the model's only when the pre-activation sits within
  // rounding of a breakpoint, so those are counted and must stay rare.
  int slope_miss = 0, slope_total = 0;
  task automatic check_aux(input vec_t e);
    int bad;
    bad = 0;
    if (fx2r(aux_t) != e.t || abs_r(fx2r(aux_phi) - e.phi) > 2.0/4096.0) bad++;
    for (int m = 0; m < M; m++) if (fx2r(aux_u[m]) != e.u[m]) bad++;
    for (int i = 0; i < N; i++) begin
      if (fx2r(aux_h[i]) != e.h[i]) bad++;
      if (abs_r(fx2r(aux_r[i]) - e.r[i]) > TOL) bad++;
      if (abs_r(fx2r(aux_zg[i]) - e.zg[i]) > TOL) bad++;
      if (abs_r(fx2r(aux_c[i]) - e.c[i]) > TOL) bad++;
      slope_total += 3;
      if (abs_r(fx2r(aux_dr[i]) - e.dr[i]) > 2.0/4096.0) slope_miss++;
      if (abs_r(fx2r(aux_dz[i]) - e.dz[i]) > 2.0/4096.0) slope_miss++;
      if (abs_r(fx2r(aux_dc[i]) - e.dc[i]) > 2.0/4096.0) slope_miss++;
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %0d intermediates differ from the model", bad);
    end
  endtask

  function automatic fx_t rnd(input real lo, input real hi);
    return r2fx(lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0);
  endfunction

  // Scoreboard: inputs are taken on a rising edge with en & in_valid; outputs
  // are consumed on a rising edge with en & out_valid.
  int outs = 0;
  bit check_latency = 0;
  always @(posedge clk) if (rst_n) begin
    if (en && out_valid) begin
      vec_t e;
      int   c0;
      e  = exp_q.pop_front();
      c0 = in_cycle.pop_front();
      outs++;
      check_aux(e);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (abs_r(fx2r(y[i]) - e.v[i]) > TOL) begin
          failures++;
          $display("FAIL out %0d state %0d: got %f want %f", outs, i, fx2r(y[i]), e.v[i]);
        end
      end
      if (check_latency) begin
        checks++;
        if (cyc - c0 != 3) begin
          failures++;
          $display("FAIL latency %0d", cyc - c0);
        end
      end
    end
    if (en && in_valid) begin
      exp_q.push_back(model(h, t, ux));
      in_cycle.push_back(cyc);
    end
  end

  task automatic new_input();
    for (int i = 0; i < N; i++) h[i] = rnd(-2.0, 2.0);
    t = rnd(0.0, 3.0);
    for (int m = 0; m < M; m++) ux[m] = rnd(-1.5, 1.5);
  endtask

  initial begin
    for (int g = 0; g < 3; g++)
      for (int i = 0; i < N; i++) begin
        u[g][i] = rnd(-1.0, 1.0);
        b[g][i] = rnd(-0.5, 0.5);
        for (int j = 0; j < N; j++) w[g][i][j] = rnd(-1.0, 1.0);
        for (int m = 0; m < M; m++) v[g][i][m] = rnd(-1.0, 1.0);
      end
    new_input();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    // Phase 1: one input per cycle, no stall.
    check_latency = 1;
    begin
      int first_out, n_in;
      n_in = 40;
      for (int k = 0; k < n_in; k++) begin
        in_valid = 1;
        new_input();
        @(negedge clk);
      end
      in_valid = 0;
      repeat (5) @(negedge clk);
      checks++;
      if (outs != n_in || exp_q.size() != 0) begin
        failures++;
        $display("FAIL phase 1 outputs %0d", outs);
      end
    end
    // Phase 2: random stalls and gaps.
    check_latency = 0;
    for (int k = 0; k < 300; k++) begin
      en = ($urandom_range(0, 3) != 0);
      in_valid = $urandom_range(0, 1);
      if (in_valid) new_input();
      @(negedge clk);
    end
    in_valid = 0; en = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL phase 2 leftover %0d", exp_q.size());
    end
    // Phase 3: t = 0 gives z0 back exactly.
    for (int k = 0; k < 10; k++) begin
      fx_t hz [N];
      new_input();
      t = '0;
      hz = h;
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      repeat (2) @(negedge clk);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (y[i] != hz[i]) begin
          failures++;
          $display("FAIL F(0,z0) state %0d: %0d vs %0d", i, y[i], hz[i]);
        end
      end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (slope_miss * 50 > slope_total) begin
      failures++;
      $display("FAIL %0d of %0d local derivatives differ from the model", slope_miss, slope_total);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
