// tb_exp_unit: e^(s*scale/log2 e) against (1) the base-2 approximation
// 2^floor(y) (1 + frac(y)) of the truncated product y, computed with reals,
// and (2) the true exponential within the 6.2 % error of that approximation
// (plus truncation).
module tb_exp_unit;
  import opal_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  bf16_t s, scale, e;

  exp_unit dut (.s, .scale, .e);

  initial begin
    scale = r2bf(1.4426950408889634 / $sqrt(128.0));   // log2(e)/sqrt(128)
    for (int n = 0; n < 3000; n++) begin
      real y, fl, approx, truth, got;
      s = (n == 0) ? 16'h0000 : rand_bf(110, 133);
      #1;
      y      = bf2r(r2bf(bf2r(s) * bf2r(scale)));
      fl     = $floor(y);
      approx = pow2(int'(fl)) * (1.0 + $floor((y - fl) * 128.0) / 128.0);
      truth  = $exp(y * 0.6931471805599453);
      got    = bf2r(e);
      checks += 2;
      if (rabs(got - approx) > approx / 64.0) begin
        failures++;
        if (failures < 10) $display("FAIL s=%f got %g approx %g", bf2r(s), got, approx);
      end
      if (rabs(got - truth) > truth * 0.075) begin
        failures++;
        if (failures < 10) $display("FAIL s=%f got %g true %g", bf2r(s), got, truth);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
