// tb_mr_ctrl: runs the sequencer against a model pipeline of fixed latency
// (4 stages, stalled with the same en as the controller) for II = 1, 2 and 3,
// with and without random stalls. Checks that sample indices issue in order,
// every II un-stalled cycles, with t_i = i*dt; that issue_last marks the last
// sample; that done follows the last retire; and, without stalls, that a run of
// n samples takes (n-1)*II + 1 + 4 cycles (last issue, then 4 pipeline stages).
module tb_mr_ctrl;
  import mr_pkg::*;
  import tb_ref_pkg::*;

  localparam int DEPTH = 200, LAT = 4;
  localparam int AW = $clog2(DEPTH), CW = $clog2(DEPTH + 1);

  logic clk = 0, rst_n = 0, start = 0, en, retire;
  logic [CW-1:0] nsamp;
  fx_t dt;
  logic [1:0] ii;
  logic issue_valid, issue_last, busy, done;
  logic [AW-1:0] issue_idx;
  fx_t issue_t;
  logic [31:0] cycles;
  int checks = 0, failures = 0;

  mr_ctrl #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // Model pipeline: valid bits only, output stage stalls when the sink is busy.
  logic [LAT-1:0] pv;
  logic sink_ready;
  assign en     = !pv[LAT-1] || sink_ready;
  assign retire = pv[LAT-1] && sink_ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pv <= '0;
    else if (en) pv <= {pv[LAT-2:0], issue_valid};

  int next_idx, last_issue_cyc, cyc, unstalled_since_issue, lasts;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && busy) begin
    if (en) unstalled_since_issue++;
    if (en && issue_valid) begin
      check(int'(issue_idx) == next_idx, $sformatf("idx %0d want %0d", issue_idx, next_idx));
      check(issue_t == fx_sat(acc_t'(next_idx) * acc_t'(dt)), $sformatf("t at %0d", next_idx));
      if (next_idx > 0)
        check(unstalled_since_issue == ((ii == 0) ? 1 : int'(ii)),
              $sformatf("spacing %0d ii %0d", unstalled_since_issue, ii));
      check(issue_last == (next_idx == int'(nsamp) - 1), "issue_last");
      if (issue_last) lasts++;
      next_idx++;
      unstalled_since_issue = 0;
    end
  end

  task automatic run(input int n, input int iiv, input bit stalls, input fx_t dtv);
    int iie, t0;
    nsamp = CW'(n); ii = 2'(iiv); dt = dtv;
    iie = (iiv == 0) ? 1 : iiv;
    next_idx = 0; lasts = 0; unstalled_since_issue = 0;
    sink_ready = 1;
    start = 1; @(negedge clk); start = 0;
    check(busy, "busy after start");
    while (!done) begin
      sink_ready = stalls ? ($urandom_range(0, 2) != 0) : 1'b1;
      @(negedge clk);
    end
    check(next_idx == n, $sformatf("issued %0d of %0d", next_idx, n));
    check(lasts == 1, "one last");
    check(!busy, "not busy when done");
    if (!stalls)
      check(cycles == 32'((n - 1) * iie + 1 + LAT),
            $sformatf("cycles %0d want %0d (ii %0d)", cycles, (n - 1) * iie + 1 + LAT, iie));
    repeat (2) @(negedge clk);
  endtask

  initial begin
    sink_ready = 1; nsamp = '0; dt = '0; ii = 2'd1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && !done, "idle after reset");
    run(200, 1, 0, 16'sd164);
    run(200, 2, 0, 16'sd164);
    run(50, 3, 0, 16'sd300);
    run(37, 0, 0, 16'sd41);
    run(200, 1, 1, 16'sd164);
    run(60, 2, 1, -16'sd100);
    run(60, 3, 1, 16'sd1000);   // t saturates at the top of the range
    run(1, 1, 0, 16'sd5);
    // nsamp = 0 finishes at once.
    nsamp = '0; start = 1; @(negedge clk); start = 0;
    check(done && !busy, "empty run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
