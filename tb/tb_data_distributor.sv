// tb_data_distributor: streams 60 random block pairs in mixed modes with
// in_valid held high. For each block it checks that the INT operands handed to
// the MUs over its phases give the dot product of the non-outlier channels,
// that the phase count is 1/2/4 for low-low/low-high/high-high, that the FP
// pairs hold the activation outliers and the right weights (B's own outlier,
// or its INT code converted), the LSB exponent, and that the stream has no
// bubbles (total cycles = total phases).
module tb_data_distributor;
  import opal_pkg::*;
  import tb_util_pkg::*;
  localparam int NB = 60;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  mu_mode_e   mode;
  logic [7:0] a_global, b_global;
  logic       in_valid, in_ready, in_last;
  mx_block_t  a_blk, b_blk;
  lane_feed_t feed;

  data_distributor dut (.clk, .rst_n, .mode, .a_global, .b_global, .in_valid, .in_ready,
                        .in_last, .a_blk, .b_blk, .feed);
  always #5 clk = ~clk;

  mx_block_t  A [NB], Bw [NB];
  mu_mode_e   M [NB];
  longint     exp_dot [NB];
  bf16_t      exp_fpb [NB][N_OL];
  int         exp_lsb [NB];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    a_global = 8'd118; b_global = 8'd120;
    for (int n = 0; n < NB; n++) begin
      logic [K_BLK-1:0] skip;
      int mba, mbb, b_lsb;
      M[n] = mu_mode_e'($urandom_range(2, 0));
      mba = mag_bits_a(M[n]); mbb = mag_bits_b(M[n]);
      A[n] = '0; Bw[n] = '0;
      for (int i = 0; i < K_BLK; i++) begin
        A[n].code[i]  = rand_code(mba);
        Bw[n].code[i] = rand_code(mbb);
      end
      A[n].offset = 4'($urandom); Bw[n].offset = 4'($urandom_range(3, 0));
      // four distinct activation outlier positions
      for (int j = 0; j < N_OL; j++) begin
        bit dup;
        do begin
          A[n].ol_idx[j] = 7'($urandom); dup = 0;
          for (int k = 0; k < j; k++) if (A[n].ol_idx[k] == A[n].ol_idx[j]) dup = 1;
        end while (dup);
        A[n].ol_val[j] = rand_bf(125, 135);
        A[n].ol_valid[j] = 1'b1;
      end
      // weight outliers: at A's slot 0 and 2, one elsewhere (slot 3), slot 1 unused
      Bw[n].ol_idx[0] = A[n].ol_idx[0]; Bw[n].ol_valid[0] = 1; Bw[n].ol_val[0] = rand_bf(115, 125);
      Bw[n].ol_idx[1] = A[n].ol_idx[2]; Bw[n].ol_valid[1] = 1; Bw[n].ol_val[1] = rand_bf(115, 125);
      Bw[n].ol_idx[2] = 7'($urandom);   Bw[n].ol_valid[2] = ($urandom_range(1, 0) == 1);
      Bw[n].ol_val[2] = rand_bf(115, 125);
      skip = '0;
      for (int j = 0; j < N_OL; j++) begin
        skip[A[n].ol_idx[j]] = 1'b1;
        if (Bw[n].ol_valid[j]) skip[Bw[n].ol_idx[j]] = 1'b1;
      end
      exp_dot[n] = 0;
      for (int i = 0; i < K_BLK; i++)
        if (!skip[i]) exp_dot[n] += longint'(code_val(A[n].code[i]) * code_val(Bw[n].code[i]));
      b_lsb = int'(b_global) + int'(Bw[n].offset) - mbb + 1;
      exp_lsb[n] = int'(a_global) + int'(A[n].offset) - mba + 1 + b_lsb - 127;
      for (int j = 0; j < N_OL; j++) begin
        exp_fpb[n][j] = r2bf(real'(code_val(Bw[n].code[A[n].ol_idx[j]])) * pow2(b_lsb - 127));
        for (int k = 0; k < N_OL; k++)
          if (Bw[n].ol_valid[k] && Bw[n].ol_idx[k] == A[n].ol_idx[j]) exp_fpb[n][j] = Bw[n].ol_val[k];
      end
    end

    in_valid = 0; in_last = 0; mode = MODE_LL; a_blk = '0; b_blk = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < NB; n++) begin
      in_valid = 1; mode = M[n]; a_blk = A[n]; b_blk = Bw[n]; in_last = n[0];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
  end

  // monitor
  int     blk = 0, ph_cnt = 0, cyc = 0, phases_total = 0;
  longint dot = 0;
  always @(posedge clk) if (rst_n) begin
    if (feed.valid) begin
      cyc++;
      if (feed.first) begin dot = 0; ph_cnt = 0; end
      for (int m = 0; m < N_MU; m++)
        for (int s = 0; s < MU_MULS; s++)
          dot += longint'(code_val(feed.a[m][s]) * code_val(feed.b[m][s]));
      ph_cnt++;
      if (feed.last) begin
        chk(dot == exp_dot[blk], $sformatf("dot blk %0d got %0d exp %0d", blk, dot, exp_dot[blk]));
        chk(ph_cnt == int'(phases(M[blk])), $sformatf("phases blk %0d = %0d", blk, ph_cnt));
        chk(feed.mode == M[blk], "mode");
        chk(feed.grp_last == blk[0], "grp_last");
        chk(int'(feed.lsb_exp) == exp_lsb[blk], $sformatf("lsb blk %0d", blk));
        for (int j = 0; j < N_OL; j++) begin
          chk(feed.fp_a[j] == A[blk].ol_val[j] && feed.fp_en[j], "fp_a");
          chk(feed.fp_b[j] == exp_fpb[blk][j], $sformatf("fp_b blk %0d slot %0d %h/%h", blk, j, feed.fp_b[j], exp_fpb[blk][j]));
        end
        phases_total += int'(phases(M[blk]));
        blk++;
        if (blk == NB) begin
          chk(cyc == phases_total, $sformatf("cycles %0d phases %0d", cyc, phases_total));
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
