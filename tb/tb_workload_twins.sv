// tb_workload_twins: runs the two digital-twin workloads end to end on the
// accelerator at its default size, through its AXI4-Lite and AXI4-Stream ports.
//
// The measured series are generated here, since the clinical recordings are not
// part of this repository:
//   * Insulin-glucose twin, 14 series of 200 samples (5-minute steps), made by
//     Euler integration of
//       di/dt  = -n di + p4 u1
//       dis/dt = -p1 dis + p2 (di - ib)
//       dG/dt  = -dis Gb - p3 dG + u2 / VoI
//     with per-series coefficients drawn around a nominal set, basal insulin
//     plus meal boluses as u1 and meal glucose appearance as u2. The states
//     (di, dis, dG) are scaled to [-0.9, 0.9]; the inputs streamed with each
//     sample are u1 and u2. Only glucose enters the loss (MASK = 0b100).
//   * Cardiac twin (ECGSYN), 2 series of 200 samples at 100 Hz: the limit-cycle
//     oscillator (x, y) with angular velocity 2 pi / RR and the five P, Q, R,
//     S, T Gaussian terms driving z, with respiratory baseline wander z0(t).
//     The inputs streamed are omega / 2 pi and z0(t); all three states enter the
//     loss.
// For every series the host sequence is played: clear the buffer, stream the
// series in, load z0 (the series' first sample, standing in for the encoder)
// and a fixed initial set of GRU-flow weights, run at II = 1, then four
// training steps (learning rate 2^-11 for the insulin twin, whose glucose error
// is summed over 200 samples of one state; 2^-9 for the cardiac twin) each
// followed by a run. Checked for every run: 200 results,
// tlast, the cycle count 200 + 4, every z against a double-precision model of
// the flow, and the loss exactly against the streamed z; for every series, that
// training lowered the loss. Counts of series of each twin, runs and training
// steps must reach their targets.
module tb_workload_twins;
  import mr_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = N_STATE, M = N_INPUT, NV = N_LIB, DEPTH = N_DEPTH;
  localparam real TOL_Z = 0.015;
  localparam int  N_AID = 14, N_ECG = 2, STEPS = 4;
  localparam int  LR_AID = 11, LR_ECG = 9;  // learning rates 2^-11 and 2^-9

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
  int n_aid = 0, n_ecg = 0, n_runs = 0, n_steps = 0, n_better = 0;

  initial begin
    repeat (3000000) @(posedge clk);
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

  // ---------------------------------------------------------------- series
  fx_t meas [DEPTH][N], uin [DEPTH][M];
  real st [DEPTH][N], ins [DEPTH][M];

  function automatic real jitter(input real nominal);
    return nominal * (0.7 + 0.6 * real'($urandom_range(0, 1000)) / 1000.0);
  endfunction

  // Scale each state (and each input) to at most 0.9 in magnitude.
  task automatic quantize();
    for (int s = 0; s < N; s++) begin
      real mx;
      mx = 1e-9;
      for (int i = 0; i < DEPTH; i++) if (abs_r(st[i][s]) > mx) mx = abs_r(st[i][s]);
      for (int i = 0; i < DEPTH; i++) meas[i][s] = r2fx(0.9 * st[i][s] / mx);
    end
    for (int m = 0; m < M; m++) begin
      real mx;
      mx = 1e-9;
      for (int i = 0; i < DEPTH; i++) if (abs_r(ins[i][m]) > mx) mx = abs_r(ins[i][m]);
      for (int i = 0; i < DEPTH; i++) uin[i][m] = r2fx(0.9 * ins[i][m] / mx);
    end
  endtask

  task automatic make_aid();
    real n, p1, p2, p3, p4, gb, voi, ib, di, dis, dg, u1, u2;
    int meal [3];
    n = jitter(0.15); p1 = jitter(0.10); p2 = jitter(0.05); p3 = jitter(0.03);
    p4 = jitter(0.5); gb = jitter(0.5); voi = jitter(1.0); ib = jitter(0.2);
    for (int k = 0; k < 3; k++) meal[k] = 10 + 60 * k + $urandom_range(0, 30);
    di = 0.0; dis = 0.0; dg = 0.0;
    for (int i = 0; i < DEPTH; i++) begin
      u1 = ib; u2 = 0.0;
      for (int k = 0; k < 3; k++) begin
        if (i >= meal[k] && i < meal[k] + 2) u1 += 1.0;
        if (i >= meal[k] && i < meal[k] + 6) u2 += 0.8;
      end
      st[i][0] = di; st[i][1] = dis; st[i][2] = dg;
      ins[i][0] = u1; ins[i][1] = u2;
      di  += -n * di + p4 * u1;
      dis += -p1 * dis + p2 * (di - ib);
      dg  += -dis * gb - p3 * dg + u2 / voi;
    end
    quantize();
  endtask

  task automatic make_ecg();
    real th [5], a [5], b [5];
    real x, y, z, rr, w, dth, alpha, t, h, dz, z0t;
    th = '{-1.0472, -0.2618, 0.0, 0.2618, 1.5708};
    a  = '{1.2, -5.0, 30.0, -7.5, 0.75};
    b  = '{0.25, 0.1, 0.1, 0.1, 0.4};
    x = -1.0; y = 0.0; z = 0.0;
    rr = jitter(1.0);
    h = 0.001;                       // 10 Euler steps per 10 ms sample
    for (int i = 0; i < DEPTH; i++) begin
      t = 0.01 * i;
      w = 2.0 * 3.14159265 / (rr * (1.0 + 0.05 * $sin(2.0 * 3.14159265 * 0.1 * t)));
      z0t = 0.15 * $sin(2.0 * 3.14159265 * 0.25 * t);
      st[i][0] = x; st[i][1] = y; st[i][2] = z;
      ins[i][0] = w / (2.0 * 3.14159265); ins[i][1] = z0t;
      for (int k = 0; k < 10; k++) begin
        real xn, yn;
        alpha = 1.0 - $sqrt(x * x + y * y);
        dz = -(z - z0t);
        for (int p = 0; p < 5; p++) begin
          dth = $atan2(y, x) - th[p];
          while (dth > 3.14159265) dth -= 2.0 * 3.14159265;
          while (dth < -3.14159265) dth += 2.0 * 3.14159265;
          dz -= a[p] * dth * $exp(-dth * dth / (2.0 * b[p] * b[p]));
        end
        xn = x + h * (alpha * x - w * y);
        yn = y + h * (alpha * y + w * x);
        x = xn; y = yn; z += h * dz;
      end
    end
    quantize();
  endtask

  // ---------------------------------------------------------------- model
  fx_t z0 [N], gw [3][N][N], gu [3][N], gb [3][N], gv [3][N][M];
  fx_t w_init [3][N][N], u_init [3][N], b_init [3][N], v_init [3][N][M];

  function automatic void model(input int idx, input fx_t t, output real z [N]);
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
    end
    for (int i = 0; i < N; i++) begin
      real ac;
      ac = fx2r(gu[2][i]) * tr + fx2r(gb[2][i]);
      for (int j = 0; j < N; j++) ac += fx2r(gw[2][i][j]) * rg[j] * hr[j];
      for (int m = 0; m < M; m++) ac += fx2r(gv[2][i][m]) * fx2r(uin[idx][m]);
      z[i] = hr[i] + phi * (1.0 - zg[i]) * (ref_tanh(clip(ac)) - hr[i]);
    end
  endfunction

  function automatic fx_t rnd(input real lo, input real hi);
    return r2fx(lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0);
  endfunction

  // ---------------------------------------------------------------- result sink
  int  got = 0;
  fx_t got_z [DEPTH][N];
  bit  got_last [DEPTH];

  always @(posedge clk) if (rst_n) begin
    if (m_axis_tvalid && m_axis_tready) begin
      if (got < DEPTH) begin
        for (int i = 0; i < N; i++) got_z[got][i] = fx_t'(m_axis_tdata[i*16 +: 16]);
        got_last[got] = m_axis_tlast;
      end
      got++;
    end
  end

  // ---------------------------------------------------------------- host steps
  task automatic load_series();
    logic [31:0] v;
    wr(12'h000, 32'h2);
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      s_axis_tvalid = 1;
      for (int s = 0; s < N; s++) s_axis_tdata[s*16 +: 16] = meas[i][s];
      for (int m = 0; m < M; m++) s_axis_tdata[(N+m)*16 +: 16] = uin[i][m];
      do @(posedge clk); while (!s_axis_tready);
      @(negedge clk);
    end
    s_axis_tvalid = 0;
    rd(12'h004, v);
    check(v[31:16] == 16'(DEPTH), "series loaded");
  endtask

  task automatic load_model();
    for (int i = 0; i < N; i++) begin
      z0[i] = meas[0][i];
      wr(12'(12'h040 + 4*i), sx(z0[i]));
    end
    gw = w_init; gu = u_init; gb = b_init; gv = v_init;
    for (int g = 0; g < 3; g++)
      for (int i = 0; i < N; i++) begin
        wr(12'(12'h200 + 4*(g*N + i)), sx(gu[g][i]));
        wr(12'(12'h280 + 4*(g*N + i)), sx(gb[g][i]));
        for (int j = 0; j < N; j++) wr(12'(12'h100 + 4*(g*N*N + i*N + j)), sx(gw[g][i][j]));
        for (int m = 0; m < M; m++) wr(12'(12'h500 + 4*(g*N*M + i*M + m)), sx(gv[g][i][m]));
      end
  endtask

  localparam fx_t DT = 16'sd82;      // t runs from 0 to about 4 over a series

  task automatic run(input logic [N-1:0] mask, output longint unsigned loss);
    logic [31:0] lo, hi, cyc;
    longint unsigned exact;
    int waited, zbad;
    got = 0;
    wr(12'h000, 32'h1);
    waited = 0;
    while (!irq && waited < 5000) begin @(negedge clk); waited++; end
    n_runs++;
    check(irq && got == DEPTH, $sformatf("run ended with %0d results", got));
    exact = 0;
    zbad = 0;
    for (int i = 0; i < DEPTH; i++) begin
      real z [N];
      model(i, fx_sat(acc_t'(i) * acc_t'(DT)), z);
      for (int s = 0; s < N; s++) begin
        if (abs_r(fx2r(got_z[i][s]) - z[s]) > TOL_Z) zbad++;
        if (mask[s]) begin
          longint d;
          d = longint'(got_z[i][s]) - longint'(meas[i][s]);
          exact += longint'(d * d) / 4096;
        end
      end
      if (got_last[i] != (i == DEPTH - 1)) zbad++;
    end
    check(zbad == 0, $sformatf("%0d results differ from the model", zbad));
    rd(12'h018, lo);
    rd(12'h01C, hi);
    loss = 64'({hi[15:0], lo});
    check(loss == exact, $sformatf("loss %0d exact %0d", loss, exact));
    rd(12'h020, cyc);
    check(cyc == DEPTH + 4, $sformatf("cycles %0d", cyc));
  endtask

  task automatic step_and_reload(input int lr);
    logic [31:0] v;
    wr(12'h024, 32'(lr));
    wr(12'h000, 32'h4);
    n_steps++;
    for (int g = 0; g < 3; g++)
      for (int i = 0; i < N; i++) begin
        rd(12'(12'h200 + 4*(g*N + i)), v); gu[g][i] = fx_t'(v[15:0]);
        rd(12'(12'h280 + 4*(g*N + i)), v); gb[g][i] = fx_t'(v[15:0]);
        for (int j = 0; j < N; j++) begin
          rd(12'(12'h100 + 4*(g*N*N + i*N + j)), v); gw[g][i][j] = fx_t'(v[15:0]);
        end
        for (int m = 0; m < M; m++) begin
          rd(12'(12'h500 + 4*(g*N*M + i*M + m)), v); gv[g][i][m] = fx_t'(v[15:0]);
        end
      end
  endtask

  task automatic fit(input string name, input logic [N-1:0] mask, input int lr);
    longint unsigned first, loss;
    load_series();
    load_model();
    run(mask, first);
    loss = first;
    for (int k = 0; k < STEPS; k++) begin
      step_and_reload(lr);
      run(mask, loss);
    end
    $display("%s: loss %f -> %f after %0d steps", name, real'(first) / 4096.0,
             real'(loss) / 4096.0, STEPS);
    check(loss < first, {name, ": training lowers the loss"});
    if (loss < first) n_better++;
  endtask

  // ---------------------------------------------------------------- test
  initial begin
    for (int g = 0; g < 3; g++)
      for (int i = 0; i < N; i++) begin
        u_init[g][i] = rnd(-0.5, 0.5);
        b_init[g][i] = rnd(-0.3, 0.3);
        for (int j = 0; j < N; j++) w_init[g][i][j] = rnd(-0.5, 0.5);
        for (int m = 0; m < M; m++) v_init[g][i][m] = rnd(-0.5, 0.5);
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(12'h008, 32'(DEPTH));
    wr(12'h00C, sx(DT));
    wr(12'h010, 32'd1);
    for (int k = 0; k < N_AID; k++) begin
      make_aid();
      wr(12'h014, 32'b100);
      fit($sformatf("insulin-glucose series %0d", k), 3'b100, LR_AID);
      n_aid++;
    end
    for (int k = 0; k < N_ECG; k++) begin
      make_ecg();
      wr(12'h014, 32'b111);
      fit($sformatf("ECG series %0d", k), 3'b111, LR_ECG);
      n_ecg++;
    end
    $display("workloads: insulin-glucose series=%0d ECG series=%0d runs=%0d steps=%0d improved=%0d",
             n_aid, n_ecg, n_runs, n_steps, n_better);
    check(n_aid == N_AID && n_ecg == N_ECG, "all series run");
    check(n_runs == (N_AID + N_ECG) * (STEPS + 1) && n_steps == (N_AID + N_ECG) * STEPS,
          "runs and steps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
