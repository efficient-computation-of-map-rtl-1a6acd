// tb_exp_pwl: sweeps x over [-1, 9] in steps of 1/256 and checks the
// piecewise-linear e^{-x} against $exp: within 3 % plus 3 LSB inside
// [0, 8] (the relative error the source design reports is +-3 %), the
// value at 0 and 8 for inputs outside, and that the result is never
// negative.
module tb_exp_pwl;
  import fcmi_pkg::*;
  fx_t x, y;
  exp_pwl dut (.x(x), .y(y));
  int checks = 0, failures = 0;
  real worst = 0.0;
  initial begin
    for (int i = -256; i <= 9 * 256; i++) begin
      real xr, want, err;
      x = fx_t'(i * 16);
      #1;
      xr = (i < 0) ? 0.0 : (i > 2048 ? 8.0 : i / 256.0);
      want = $exp(-xr);
      err = real'(y) / 4096.0 - want;
      if (err < 0) err = -err;
      checks++;
      if (y < 0 || err > 0.03 * want + 3.0 / 4096.0) begin
        failures++;
        if (failures < 10) $display("x=%f y=%0d want %f", xr, y, want * 4096);
      end
      if (xr < 4.0 && err / want > worst) worst = err / want;
    end
    $display("worst relative error for x < 4: %f", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
