// tb_compute_lane: drives the lane's feed directly with 200 random blocks in
// random modes (1, 2 or 4 phases each, sometimes with idle cycles between
// phases) and compares each block result with
//   sum(a*b) * 2^(lsb_exp-127) + sum(outlier products)
// computed with reals, within the truncation error of the bfloat16 steps.
// Also checks that out_valid pulses exactly one cycle after each last phase.
module tb_compute_lane;
  import opal_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  lane_feed_t feed;
  logic  out_valid, out_grp_last;
  bf16_t out_data;

  compute_lane dut (.clk, .rst_n, .feed, .out_valid, .out_grp_last, .out_data);
  always #5 clk = ~clk;

  real exp_val, exp_mag;
  bit  exp_last, expect_out = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    feed = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      mu_mode_e md;
      int P, used, mba, mbb;
      longint dot;
      real fp, fpm, iv;
      bf16_t fa [N_OL], fb [N_OL];
      logic  fe [N_OL];
      md = mu_mode_e'($urandom_range(2, 0));
      P = int'(phases(md)); used = 4 / P;
      mba = mag_bits_a(md); mbb = mag_bits_b(md);
      dot = 0; fp = 0.0; fpm = 0.0;
      for (int p = 0; p < P; p++) begin
        @(negedge clk);
        feed = '0;
        feed.valid = 1; feed.first = (p == 0); feed.last = (p == P-1);
        feed.grp_last = n[0]; feed.mode = md;
        feed.lsb_exp = 12'(100 + (n % 25));
        for (int m = 0; m < N_MU; m++)
          for (int s = 0; s < used; s++) begin
            feed.a[m][s] = rand_code(mba);
            feed.b[m][s] = rand_code(mbb);
            dot += longint'(code_val(feed.a[m][s]) * code_val(feed.b[m][s]));
          end
        // the outlier pairs stay the same over the phases of a block
        for (int j = 0; j < N_OL; j++) begin
          if (p == 0) begin
            fa[j] = rand_bf(118, 126); fb[j] = rand_bf(118, 126); fe[j] = 1'($urandom);
            if (fe[j]) begin
              fp  += bf2r(fa[j]) * bf2r(fb[j]);
              fpm += rabs(bf2r(fa[j]) * bf2r(fb[j]));
            end
          end
          feed.fp_a[j] = fa[j]; feed.fp_b[j] = fb[j]; feed.fp_en[j] = fe[j];
        end
        if (p == P-1) begin
          iv = real'(dot) * pow2(100 + (n % 25) - 127);
          exp_val = iv + fp; exp_mag = rabs(iv) + fpm; exp_last = n[0];
        end
        if ($urandom_range(3, 0) == 0 && p != P-1) begin
          @(negedge clk); feed.valid = 0;   // idle cycle inside a block
        end
      end
      @(negedge clk); feed = '0;
    end
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // timing and value monitor
  always @(posedge clk) if (rst_n) begin
    chk(out_valid == expect_out, "out_valid timing");
    if (out_valid && expect_out) begin
      chk(rabs(bf2r(out_data) - exp_val) <= exp_mag / 32.0 + 1e-30,
          $sformatf("value got %g exp %g mag %g", bf2r(out_data), exp_val, exp_mag));
      chk(out_grp_last == exp_last, "grp_last");
    end
    expect_out = feed.valid && feed.last;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
