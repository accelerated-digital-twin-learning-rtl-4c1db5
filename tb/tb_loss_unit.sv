// tb_loss_unit: feeds random predicted and measured states with random masks,
// gaps and stalls, and compares the running loss with an integer model:
// sum over accepted samples and unmasked states of floor((p - m)^2 / 4096).
// Checks that clear zeroes the sum and wins over a simultaneous sample, and
// that the largest possible error does not overflow.
module tb_loss_unit;
  import mr_pkg::*;

  localparam int N = 3;

  logic clk = 0, rst_n = 0, clear = 0, en = 1, in_valid = 0;
  fx_t pred [N], meas [N];
  logic [N-1:0] mask = '1;
  logic [47:0] loss;
  int checks = 0, failures = 0;
  longint unsigned model = 0;

  loss_unit #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (clear) model <= 0;
    else if (en && in_valid) begin
      longint unsigned add;
      add = 0;
      for (int i = 0; i < N; i++) if (mask[i]) begin
        longint d;
        d = longint'(pred[i]) - longint'(meas[i]);
        add += longint'(d * d) / 4096;
      end
      model <= model + add;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin pred[i] = '0; meas[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      in_valid = $urandom_range(0, 3) != 0;
      en = $urandom_range(0, 4) != 0;
      mask = N'($urandom_range(0, 7));
      clear = (k == 200) || (k == 250);
      for (int i = 0; i < N; i++) begin
        pred[i] = 16'($urandom);
        meas[i] = 16'($urandom);
      end
      @(negedge clk);
      checks++;
      if (loss != 48'(model)) begin
        failures++;
        $display("FAIL step %0d loss %0d model %0d", k, loss, model);
      end
    end
    // Worst case error, many times.
    clear = 1; @(negedge clk); clear = 0;
    in_valid = 1; en = 1; mask = '1;
    for (int i = 0; i < N; i++) begin pred[i] = 16'sh7FFF; meas[i] = -16'sh8000; end
    repeat (1000) @(negedge clk);
    checks++;
    if (loss != 48'(model) || model != 64'd1000 * 3 * ((64'd65535 * 64'd65535) / 4096)) begin
      failures++;
      $display("FAIL worst case %0d %0d", loss, model);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
