// tb_int_to_fp: integer x 2^(lsb_exp-127) against real arithmetic. The result
// must equal the exact value truncated to bfloat16.
module tb_int_to_fp;
  import opal_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic signed [ACC_W-1:0] v;
  logic signed [11:0]      lsb_exp;
  bf16_t                   f;

  int_to_fp #(.W(ACC_W)) dut (.v, .lsb_exp, .f);

  initial begin
    for (int n = 0; n < 3000; n++) begin
      real exact;
      v = (n < 4) ? ACC_W'(n) : ((n & 1) ? ACC_W'($urandom) : ACC_W'($urandom_range(300, 0)) - ACC_W'(150));
      if (n % 7 == 0) v = -v;
      lsb_exp = 12'($urandom_range(140, 90));
      #1;
      exact = real'(int'(v)) * pow2(int'(lsb_exp) - 127);
      checks++;
      if (f !== r2bf(exact)) begin
        failures++;
        if (failures < 10) $display("FAIL v=%0d e=%0d got %h exp %h", v, lsb_exp, f, r2bf(exact));
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
