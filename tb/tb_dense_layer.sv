// tb_dense_layer: random weights and inputs through the dense (analytical
// inverse) layer, compared with nu_k = tanh(sum_j w_kj x_j + b_k) in double
// precision. Checks the 1-cycle latency, one result per cycle, and that a stall
// (en low) holds the output.
module tb_dense_layer;
  import mr_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 3, NV = 10;
  localparam real TOL = 0.006;

  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, out_valid;
  fx_t x [N], w [NV][N], b [NV], y [NV];
  int checks = 0, failures = 0;

  dense_layer #(.N(N), .NV(NV)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fx_t rnd(input real lo, input real hi);
    return r2fx(lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0);
  endfunction

  task automatic expect_y(input fx_t xs [N]);
    for (int k = 0; k < NV; k++) begin
      real a;
      a = fx2r(b[k]);
      for (int j = 0; j < N; j++) a += fx2r(w[k][j]) * fx2r(xs[j]);
      checks++;
      if (abs_r(fx2r(y[k]) - ref_tanh(clip(a))) > TOL) begin
        failures++;
        $display("FAIL nu[%0d] got %f want %f", k, fx2r(y[k]), ref_tanh(clip(a)));
      end
    end
  endtask

  initial begin
    fx_t prev [N], held [NV];
    for (int k = 0; k < NV; k++) begin
      b[k] = rnd(-0.5, 0.5);
      for (int j = 0; j < N; j++) w[k][j] = rnd(-1.5, 1.5);
    end
    for (int j = 0; j < N; j++) x[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Back-to-back inputs: each result is valid one cycle after its input.
    for (int n = 0; n < 50; n++) begin
      in_valid = 1;
      for (int j = 0; j < N; j++) x[j] = rnd(-3.0, 3.0);
      prev = x;
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid"); end
      expect_y(prev);
    end
    // Stall: output must hold while en is low.
    held = y;
    en = 0;
    for (int j = 0; j < N; j++) x[j] = rnd(-3.0, 3.0);
    repeat (3) @(negedge clk);
    for (int k = 0; k < NV; k++) begin
      checks++;
      if (y[k] != held[k]) begin failures++; $display("FAIL stall hold"); end
    end
    en = 1;
    in_valid = 0;
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL valid after idle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
