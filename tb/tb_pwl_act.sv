// tb_pwl_act: sweeps the piecewise-linear sigmoid and tanh over the whole Q4.12
// range (every 7th code) and compares each with the double-precision reference
// (tolerance 2 LSB) and with the exact function (tolerance 0.02 for sigmoid,
// 0.045 for tanh). The derivative outputs are compared exactly with the slope
// of the reference segment, and with a central difference of the exact function
// within 0.1 (sigmoid) and 0.45 (tanh). Also checks odd symmetry of tanh and
// saturation at the ends.
module tb_pwl_act;
  import mr_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  fx_t x, ys, yt, dys, dyt;

  pwl_act #(.FUNC(ACT_SIGMOID)) dut_s (.x(x), .y(ys), .dy(dys));
  pwl_act #(.FUNC(ACT_TANH))    dut_t (.x(x), .y(yt), .dy(dyt));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s x=%0d ys=%0d yt=%0d", what, x, ys, yt);
    end
  endtask

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -32768; v < 32768; v += 7) begin
      real xr;
      x = 16'(v);
      #1;
      xr = fx2r(x);
      check(abs_r(fx2r(ys) - ref_sigmoid(xr)) <= 2.0/4096.0, "sigmoid vs PLAN");
      check(abs_r(fx2r(yt) - ref_tanh(xr))    <= 3.0/4096.0, "tanh vs PLAN");
      check(abs_r(fx2r(ys) - exact_sigmoid(xr)) <= 0.02, "sigmoid vs exact");
      check(abs_r(fx2r(yt) - $tanh(xr)) <= 0.045, "tanh vs exact");
      check(fx2r(dys) == ref_dsigmoid(xr), "sigmoid slope");
      check(fx2r(dyt) == ref_dtanh(xr), "tanh slope");
      check(abs_r(fx2r(dys) - exact_sigmoid(xr) * (1.0 - exact_sigmoid(xr))) <= 0.1,
            "sigmoid slope vs exact");
      check(abs_r(fx2r(dyt) - (1.0 - $tanh(xr) * $tanh(xr))) <= 0.45, "tanh slope vs exact");
    end
    for (int v = 1; v < 32768; v += 97) begin
      fx_t a, b;
      x = 16'(v);  #1; a = yt;
      x = 16'(-v); #1; b = yt;
      check(a == -b, "tanh odd");
    end
    x = 16'sh7FFF; #1; check(ys == 16'sd4096 && yt == 16'sd4096, "top saturation");
    x = -16'sh8000; #1; check(ys == 16'sd0 && yt == -16'sd4096, "bottom saturation");
    x = 16'sd0; #1; check(ys == 16'sd2048 && yt == 16'sd0, "zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
