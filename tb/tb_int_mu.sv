// tb_int_mu: checks the three INT MU modes against integer products.
// Low-low: each of the four products; low-high: each pair of partial products
// sums to the 5-bit x 3-bit product; high-high: the four partial products sum
// to the 5-bit x 5-bit product. Random operands.
module tb_int_mu;
  import opal_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  mu_mode_e mode;
  logic [MU_MULS-1:0][CODE_W-1:0] a, b;
  logic signed [PP_W-1:0] pp [MU_MULS];

  int_mu dut (.mode, .a, .b, .pp);

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int n = 0; n < 3000; n++) begin
      mode = mu_mode_e'(n % 3);
      for (int i = 0; i < MU_MULS; i++) begin
        a[i] = rand_code(mode == MODE_LL ? CW : 2*CW);
        b[i] = rand_code(mode == MODE_HH ? 2*CW : CW);
      end
      #1;
      case (mode)
        MODE_LL: for (int i = 0; i < MU_MULS; i++) chk(int'(pp[i]), code_val(a[i]) * code_val(b[i]), "LL");
        MODE_LH: for (int p = 0; p < 2; p++)
                   chk(int'(pp[2*p]) + int'(pp[2*p+1]), code_val(a[p]) * code_val(b[p]), "LH");
        default: chk(int'(pp[0]) + int'(pp[1]) + int'(pp[2]) + int'(pp[3]),
                     code_val(a[0]) * code_val(b[0]), "HH");
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
