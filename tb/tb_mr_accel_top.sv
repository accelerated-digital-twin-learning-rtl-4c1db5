// tb_mr_accel_top: end-to-end test of the accelerator at its default size
// (N = 3 states, NV = 10 library terms, 200-sample buffer), driven only through
// its AXI4-Lite and AXI4-Stream ports, the way the host and its DMA would.
//
// It loads random weights and z0, streams a 200-sample series into the buffer
// with its external inputs (plus extra beats that must be refused), and makes
// four runs:
//   1. II = 1, output always ready: every {z, nu} against a double-precision
//      model, tlast, the loss, and the cycle count 200 + 4.
//   2. II = 2 with random output back-pressure (pipeline stalls).
//   3. II = 3, 50 samples, loss mask = glucose state only.
//   4. After a buffer clear and a 20-sample reload, II = 1 again.
// The loss is checked exactly against the streamed z values and approximately
// against the model. After every run all 63 loss gradients are read and compared
// with a double-precision chain-rule model of the GRU flow. Then the host's
// training loop is played: five times a gradient-descent step (LR shift 6), the
// parameters are read back and checked against p - g/64, and the run repeated;
// the loss must fall. Each mechanism (stall, buffer-full back-pressure, II = 2,
// II = 3, masked loss, clear, training step) is counted and must occur.
module tb_mr_accel_top;
  import mr_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = N_STATE, M = N_INPUT, NV = N_LIB, DEPTH = N_DEPTH;
  localparam real TOL_Z = 0.015, TOL_NU = 0.03;

  logic clk = 0, rst_n = 0;
  logic [11:0] s_axil_awaddr = '0, s_axil_araddr = '0;
  logic s_axil_awvalid = 0, s_axil_wvalid = 0, s_axil_bready = 0;
  logic s_axil_arvalid = 0, s_axil_rready = 0;
  logic s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [31:0] s_axil_wdata = '0, s_axil_rdata;
  logic [3:0] s_axil_wstrb = '1;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic s_axis_tvalid = 0, s_axis_tready;
  logic [(N+M)*16-1:0] s_axis_tdata = '0;
  logic m_axis_tvalid, m_axis_tready = 1, m_axis_tlast, irq;
  logic [(N+NV)*16-1:0] m_axis_tdata;

  mr_accel_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_full = 0, n_ii2 = 0, n_ii3 = 0, n_mask = 0, n_clear = 0, n_step = 0;
  longint unsigned last_loss = 0;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- AXI4-Lite
  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wvalid = 1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 1;
    while (!s_axil_bvalid) @(negedge clk);
    @(negedge clk);
    s_axil_bready = 0;
  endtask

  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk);
    s_axil_arvalid = 0; s_axil_rready = 1;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
    @(negedge clk);
    s_axil_rready = 0;
  endtask

  function automatic logic [31:0] sx(input fx_t v);
    return 32'(signed'(v));
  endfunction

  // ---------------------------------------------------------------- model
  fx_t z0 [N], gw [3][N][N], gu [3][N], gb [3][N], gv [3][N][M], dw [NV][N], db [NV];
  fx_t meas [DEPTH][N], uin [DEPTH][M];

  function automatic fx_t rnd(input real lo, input real hi);
    return r2fx(lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0);
  endfunction

  // Gradient model: the intermediates of one sample, from the same equations.
  real m_rg [N], m_zg [N], m_c [N], m_dr [N], m_dz [N], m_dc [N], m_hr [N], m_phi;

  task automatic model(input int idx, input fx_t t, output real z [N], output real nu [NV]);
    real hr [N], rg [N], zg [N], tr, phi;
    tr = fx2r(t);
    phi = ref_tanh(tr);
    for (int i = 0; i < N; i++) hr[i] = fx2r(z0[i]);
    for (int i = 0; i < N; i++) begin
      real ar, az;
      ar = fx2r(gu[0][i]) * tr + fx2r(gb[0][i]);
      az = fx2r(gu[1][i]) * tr + fx2r(gb[1][i]);
      for (int j = 0; j < N; j++) begin
        ar += fx2r(gw[0][i][j]) * hr[j];
        az += fx2r(gw[1][i][j]) * hr[j];
      end
      for (int m = 0; m < M; m++) begin
        ar += fx2r(gv[0][i][m]) * fx2r(uin[idx][m]);
        az += fx2r(gv[1][i][m]) * fx2r(uin[idx][m]);
      end
      rg[i] = 0.8 * ref_sigmoid(clip(ar));
      zg[i] = 0.4 * ref_sigmoid(clip(az));
      m_dr[i] = 0.8 * ref_dsigmoid(clip(ar));
      m_dz[i] = 0.4 * ref_dsigmoid(clip(az));
    end
    m_rg = rg; m_zg = zg; m_hr = hr; m_phi = phi;
    for (int i = 0; i < N; i++) begin
      real ac;
      ac = fx2r(gu[2][i]) * tr + fx2r(gb[2][i]);
      for (int j = 0; j < N; j++) ac += fx2r(gw[2][i][j]) * rg[j] * hr[j];
      for (int m = 0; m < M; m++) ac += fx2r(gv[2][i][m]) * fx2r(uin[idx][m]);
      z[i] = hr[i] + phi * (1.0 - zg[i]) * (ref_tanh(clip(ac)) - hr[i]);
      m_c[i] = ref_tanh(clip(ac));
      m_dc[i] = ref_dtanh(clip(ac));
    end
    for (int k = 0; k < NV; k++) begin
      real a;
      a = fx2r(db[k]);
      for (int j = 0; j < N; j++) a += fx2r(dw[k][j]) * z[j];
      nu[k] = ref_tanh(clip(a));
    end
  endtask

  // ---------------------------------------------------------------- result sink
  bit          random_ready = 0;
  int          got = 0;
  fx_t         got_z [DEPTH][N];
  fx_t         got_nu [DEPTH][NV];
  bit          got_last [DEPTH];

  always @(negedge clk) m_axis_tready <= random_ready ? ($urandom_range(0, 2) != 0) : 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (m_axis_tvalid && !m_axis_tready) n_stall++;
    if (s_axis_tvalid && !s_axis_tready) n_full++;
    if (m_axis_tvalid && m_axis_tready) begin
      if (got < DEPTH) begin
        for (int i = 0; i < N; i++)  got_z[got][i]  = fx_t'(m_axis_tdata[i*16 +: 16]);
        for (int k = 0; k < NV; k++) got_nu[got][k] = fx_t'(m_axis_tdata[(N+k)*16 +: 16]);
        got_last[got] = m_axis_tlast;
      end
      got++;
    end
  end

  // Loss gradient of one run, in register order: W (3NN), U (3N), B (3N), V (3NM).
  localparam int NG = 3*N*N + 6*N + 3*N*M;
  real ref_g [NG];

  task automatic grad_model(input int n, input logic [N-1:0] mask, input fx_t dt);
    for (int k = 0; k < NG; k++) ref_g[k] = 0.0;
    for (int i = 0; i < n; i++) begin
      real z [N], nu [NV], e [N], gp [3][N], s, tr, a;
      fx_t t;
      t = fx_sat(acc_t'(i) * acc_t'(dt));
      tr = fx2r(t);
      model(i, t, z, nu);
      for (int k = 0; k < N; k++) e[k] = mask[k] ? 2.0 * (z[k] - fx2r(meas[i][k])) : 0.0;
      for (int k = 0; k < N; k++) begin
        gp[2][k] = e[k] * m_phi * (1.0 - m_zg[k]) * m_dc[k];
        gp[1][k] = -e[k] * m_phi * (m_c[k] - m_hr[k]) * m_dz[k];
      end
      for (int j = 0; j < N; j++) begin
        s = 0.0;
        for (int k = 0; k < N; k++) s += gp[2][k] * fx2r(gw[2][k][j]);
        gp[0][j] = s * m_hr[j] * m_dr[j];
      end
      for (int g = 0; g < 3; g++)
        for (int r = 0; r < N; r++) begin
          for (int j = 0; j < N; j++) begin
            a = (g == 2) ? m_rg[j] * m_hr[j] : m_hr[j];
            ref_g[g*N*N + r*N + j] += gp[g][r] * a;
          end
          ref_g[3*N*N + g*N + r] += gp[g][r] * tr;
          ref_g[3*N*N + 3*N + g*N + r] += gp[g][r];
          for (int m = 0; m < M; m++)
            ref_g[3*N*N + 6*N + g*N*M + r*M + m] += gp[g][r] * fx2r(uin[i][m]);
        end
    end
  endtask

  logic [31:0] hw_g [NG];

  task automatic check_gradients(input int n, input logic [N-1:0] mask, input fx_t dt);
    int bad;
    real worst;
    grad_model(n, mask, dt);
    bad = 0; worst = 0.0;
    for (int k = 0; k < NG; k++) begin
      real d;
      rd(12'(12'h600 + 4*k), hw_g[k]);
      d = abs_r(real'(signed'(hw_g[k])) / 4096.0 - ref_g[k]);
      if (d > worst) worst = d;
      if (d > 0.05 * abs_r(ref_g[k]) + 0.01 * n) begin
        bad++;
        if (bad < 4) $display("  gradient %0d: %f vs model %f", k,
                              real'(signed'(hw_g[k])) / 4096.0, ref_g[k]);
      end
    end
    check(bad == 0, $sformatf("%0d of %0d gradients off the model", bad, NG));
    $display("gradients n=%0d: largest difference from model %f", n, worst);
  endtask

  // ---------------------------------------------------------------- helpers
  task automatic load_series(input int n, input int extra);
    int sent;
    sent = 0;
    @(negedge clk);
    while (sent < n + extra) begin
      s_axis_tvalid = 1;
      for (int s = 0; s < N; s++)
        s_axis_tdata[s*16 +: 16] = (sent < n) ? meas[sent][s] : 16'h7777;
      for (int m = 0; m < M; m++)
        s_axis_tdata[(N+m)*16 +: 16] = (sent < n) ? uin[sent][m] : 16'h7777;
      @(posedge clk);
      if (s_axis_tready) sent++;
      else if (sent >= n) sent++;   // refused extra beat: give up on it
      @(negedge clk);
    end
    s_axis_tvalid = 0;
  endtask

  task automatic run(input int n, input int ii, input logic [N-1:0] mask, input fx_t dt,
                     input bit stalls, input int expect_cycles);
    logic [31:0] v, lo, hi, cyc;
    longint unsigned exact;
    real approx;
    int waited;
    wr(12'h008, 32'(n));
    wr(12'h010, 32'(ii));
    wr(12'h014, 32'(mask));
    wr(12'h00C, sx(dt));
    got = 0;
    random_ready = stalls;
    wr(12'h000, 32'h1);
    waited = 0;
    while (!irq && waited < 10000) begin @(negedge clk); waited++; end
    random_ready = 0;
    check(irq, "run finished");
    check(got == n, $sformatf("results %0d of %0d", got, n));
    exact = 0;
    approx = 0.0;
    for (int i = 0; i < n && i < DEPTH; i++) begin
      real z [N], nu [NV];
      model(i, fx_sat(acc_t'(i) * acc_t'(dt)), z, nu);
      for (int s = 0; s < N; s++) begin
        check(abs_r(fx2r(got_z[i][s]) - z[s]) <= TOL_Z,
              $sformatf("z[%0d][%0d] %f vs %f", i, s, fx2r(got_z[i][s]), z[s]));
        if (mask[s]) begin
          longint d;
          d = longint'(got_z[i][s]) - longint'(meas[i][s]);
          exact += longint'(d * d) / 4096;
          approx += (z[s] - fx2r(meas[i][s])) ** 2;
        end
      end
      for (int k = 0; k < NV; k++)
        check(abs_r(fx2r(got_nu[i][k]) - nu[k]) <= TOL_NU,
              $sformatf("nu[%0d][%0d] %f vs %f", i, k, fx2r(got_nu[i][k]), nu[k]));
      check(got_last[i] == (i == n - 1), "tlast");
    end
    rd(12'h018, lo);
    rd(12'h01C, hi);
    check({hi[15:0], lo} == 48'(exact), $sformatf("loss %0d exact %0d", {hi[15:0], lo}, exact));
    check(abs_r(real'({hi[15:0], lo}) / 4096.0 - approx) <= 0.03 * approx + 0.05 * n,
          $sformatf("loss %f vs model %f", real'({hi[15:0], lo}) / 4096.0, approx));
    rd(12'h020, cyc);
    if (expect_cycles > 0) check(cyc == 32'(expect_cycles), $sformatf("cycles %0d want %0d", cyc, expect_cycles));
    rd(12'h004, v);
    check(v[1:0] == 2'b10, "STATUS done");
    $display("run n=%0d ii=%0d mask=%b stalls=%0d cycles=%0d loss=%f", n, ii, mask, stalls, cyc, approx);
    last_loss = {hi[15:0], lo};
    check_gradients(n, mask, dt);
  endtask

  // One training step through CTRL bit 2; the new parameters are read back and
  // checked against p - (g >>> 6) with g the gradient words just read.
  task automatic train_step();
    logic [31:0] v;
    fx_t expw;
    int bad;
    wr(12'h024, 32'd6);
    wr(12'h000, 32'h4);
    n_step++;
    bad = 0;
    for (int g = 0; g < 3; g++)
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N; j++) begin
          expw = fx_sat(acc_t'(gw[g][i][j]) - (acc_t'(signed'(hw_g[g*N*N + i*N + j])) >>> 6));
          rd(12'(12'h100 + 4*(g*N*N + i*N + j)), v);
          gw[g][i][j] = fx_t'(v[15:0]);
          if (gw[g][i][j] != expw) bad++;
        end
        expw = fx_sat(acc_t'(gu[g][i]) - (acc_t'(signed'(hw_g[3*N*N + g*N + i])) >>> 6));
        rd(12'(12'h200 + 4*(g*N + i)), v); gu[g][i] = fx_t'(v[15:0]);
        if (gu[g][i] != expw) bad++;
        expw = fx_sat(acc_t'(gb[g][i]) - (acc_t'(signed'(hw_g[3*N*N + 3*N + g*N + i])) >>> 6));
        rd(12'(12'h280 + 4*(g*N + i)), v); gb[g][i] = fx_t'(v[15:0]);
        if (gb[g][i] != expw) bad++;
        for (int m = 0; m < M; m++) begin
          expw = fx_sat(acc_t'(gv[g][i][m])
                        - (acc_t'(signed'(hw_g[3*N*N + 6*N + g*N*M + i*M + m])) >>> 6));
          rd(12'(12'h500 + 4*(g*N*M + i*M + m)), v); gv[g][i][m] = fx_t'(v[15:0]);
          if (gv[g][i][m] != expw) bad++;
        end
      end
    check(bad == 0, $sformatf("training step: %0d parameters wrong", bad));
  endtask

  // ---------------------------------------------------------------- test
  initial begin
    logic [31:0] v;
    for (int i = 0; i < N; i++) z0[i] = rnd(-1.5, 1.5);
    for (int g = 0; g < 3; g++)
      for (int i = 0; i < N; i++) begin
        gu[g][i] = rnd(-1.0, 1.0);
        gb[g][i] = rnd(-0.5, 0.5);
        for (int j = 0; j < N; j++) gw[g][i][j] = rnd(-1.0, 1.0);
        for (int m = 0; m < M; m++) gv[g][i][m] = rnd(-1.0, 1.0);
      end
    for (int k = 0; k < NV; k++) begin
      db[k] = rnd(-0.5, 0.5);
      for (int j = 0; j < N; j++) dw[k][j] = rnd(-1.5, 1.5);
    end
    // Smooth "measured" series with a little noise.
    for (int i = 0; i < DEPTH; i++)
      for (int s = 0; s < N; s++)
        meas[i][s] = r2fx(0.6 * $sin(0.03 * i + 1.7 * s) + 0.01 * real'($urandom_range(0, 100)) / 100.0);
    // External inputs: a constant basal level and meal-like pulses.
    for (int i = 0; i < DEPTH; i++) begin
      uin[i][0] = r2fx(0.3);
      uin[i][1] = r2fx((i % 50 < 6) ? 1.2 : 0.0);
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) wr(12'(12'h040 + 4*i), sx(z0[i]));
    for (int g = 0; g < 3; g++)
      for (int i = 0; i < N; i++) begin
        wr(12'(12'h200 + 4*(g*N + i)), sx(gu[g][i]));
        wr(12'(12'h280 + 4*(g*N + i)), sx(gb[g][i]));
        for (int j = 0; j < N; j++) wr(12'(12'h100 + 4*(g*N*N + i*N + j)), sx(gw[g][i][j]));
        for (int m = 0; m < M; m++) wr(12'(12'h500 + 4*(g*N*M + i*M + m)), sx(gv[g][i][m]));
      end
    for (int k = 0; k < NV; k++) begin
      wr(12'(12'h400 + 4*k), sx(db[k]));
      for (int j = 0; j < N; j++) wr(12'(12'h300 + 4*(k*N + j)), sx(dw[k][j]));
    end

    load_series(DEPTH, 3);
    rd(12'h004, v);
    check(v[31:16] == DEPTH, "buffer full count");

    run(DEPTH, 1, 3'b111, 16'sd164, 0, (DEPTH - 1) * 1 + 1 + 4);
    run(DEPTH, 2, 3'b111, 16'sd164, 1, 0);
    n_ii2++;
    run(50, 3, 3'b100, 16'sd300, 0, (50 - 1) * 3 + 1 + 4);
    n_ii3++; n_mask++;

    // Clear, load a shorter series, run it.
    wr(12'h000, 32'h2);
    rd(12'h004, v);
    check(v[31:16] == 0, "clear empties buffer");
    n_clear++;
    for (int i = 0; i < 20; i++)
      begin
        for (int s = 0; s < N; s++) meas[i][s] = rnd(-1.0, 1.0);
        for (int m = 0; m < M; m++) uin[i][m] = rnd(-1.0, 1.0);
      end
    load_series(20, 0);
    rd(12'h004, v);
    check(v[31:16] == 20, "reload count");
    run(20, 1, 3'b011, -16'sd200, 1, 0);

    // Training loop on the 20-sample series.
    begin
      longint unsigned first_loss;
      first_loss = last_loss;
      for (int it = 0; it < 5; it++) begin
        train_step();
        run(20, 1, 3'b011, -16'sd200, 0, 0);
      end
      $display("training: loss %f -> %f", real'(first_loss) / 4096.0, real'(last_loss) / 4096.0);
      check(last_loss < first_loss, "training lowers the loss");
    end

    $display("mechanisms: stall=%0d buffer_full=%0d ii2=%0d ii3=%0d mask=%0d clear=%0d step=%0d",
             n_stall, n_full, n_ii2, n_ii3, n_mask, n_clear, n_step);
    check(n_step > 0, "training step");
    check(n_stall > 0, "stall happened");
    check(n_full > 0, "buffer-full back-pressure happened");
    check(n_ii2 > 0 && n_ii3 > 0, "II 2 and 3 runs");
    check(n_mask > 0 && n_clear > 0, "mask and clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
