// tb_int_adder_tree: 128-input tree against a plain loop sum, random and
// extreme (all max / all min) inputs.
module tb_int_adder_tree;
  localparam int N = 128, IN_W = 9, OUT_W = IN_W + 7;
  int checks = 0, failures = 0;
  logic signed [IN_W-1:0]  in [N];
  logic signed [OUT_W-1:0] sum;

  int_adder_tree #(.N(N), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.in, .sum);

  initial begin
    for (int n = 0; n < 500; n++) begin
      int ref_sum;
      ref_sum = 0;
      for (int i = 0; i < N; i++) begin
        case (n)
          0: in[i] = 9'sd255;
          1: in[i] = -9'sd256;
          default: in[i] = 9'($urandom);
        endcase
        ref_sum += int'(in[i]);
      end
      #1;
      checks++;
      if (int'(sum) != ref_sum) begin
        failures++;
        if (failures < 10) $display("FAIL sum %0d exp %0d", sum, ref_sum);
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
