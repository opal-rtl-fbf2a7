// tb_outlier_fp_units: sum of four enabled bfloat16 products against real
// arithmetic, within the error of truncating bfloat16 units (2^-5 of the sum
// of product magnitudes).
module tb_outlier_fp_units;
  import opal_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  bf16_t [3:0] a, b;
  logic  [3:0] en;
  bf16_t       sum;

  outlier_fp_units #(.N(4)) dut (.a, .b, .en, .sum);

  initial begin
    for (int n = 0; n < 3000; n++) begin
      real exact, mag;
      exact = 0.0; mag = 0.0;
      for (int i = 0; i < 4; i++) begin
        a[i] = rand_bf(120, 134);
        b[i] = rand_bf(115, 130);
      end
      en = (n < 1000) ? 4'hF : 4'($urandom);
      #1;
      for (int i = 0; i < 4; i++) if (en[i]) begin
        exact += bf2r(a[i]) * bf2r(b[i]);
        mag   += rabs(bf2r(a[i]) * bf2r(b[i]));
      end
      checks++;
      if (rabs(bf2r(sum) - exact) > mag / 32.0 + 1e-30) begin
        failures++;
        if (failures < 10) $display("FAIL got %f exp %f", bf2r(sum), exact);
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
