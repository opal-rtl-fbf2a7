// tb_fp_adder_tree: eight bfloat16 inputs against a real sum, within the error
// of three levels of truncating adds (2^-5 of the sum of magnitudes); also
// exact small-integer sums, which bfloat16 represents exactly.
module tb_fp_adder_tree;
  import opal_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  bf16_t in [8];
  bf16_t sum;

  fp_adder_tree #(.N(8)) dut (.in, .sum);

  initial begin
    for (int n = 0; n < 3000; n++) begin
      real exact, mag;
      exact = 0.0; mag = 0.0;
      for (int i = 0; i < 8; i++) begin
        if (n < 500) in[i] = r2bf(real'(int'($urandom_range(20, 0)) - 10));
        else         in[i] = rand_bf(118, 130);
        exact += bf2r(in[i]);
        mag   += rabs(bf2r(in[i]));
      end
      #1;
      checks++;
      if ((n < 500) ? (bf2r(sum) != exact) : (rabs(bf2r(sum) - exact) > mag / 32.0)) begin
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
