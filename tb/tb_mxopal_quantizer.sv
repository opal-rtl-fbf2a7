// tb_mxopal_quantizer: 12 blocks of 128 bfloat16 values with a few large
// outliers, streamed with random gaps, in low-bit and high-bit mode and with
// global scales that give an in-range offset, an offset clipped at 15 (so
// elements saturate) and one clipped at 0. The reference sorts the block by
// magnitude, takes the four largest as outliers and the 5th's exponent as the
// shared exponent, and quantizes the rest with real arithmetic:
//   code = min(floor(|x| / 2^(Es-127-(MB-1))), 2^MB - 1), with the sign of x.
// Also checks out_valid comes exactly one cycle after the 128th value.
module tb_mxopal_quantizer;
  import opal_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic       high;
  logic [7:0] global_scale;
  logic       in_valid;
  bf16_t      in_data;
  logic       out_valid;
  mx_block_t  out_blk;

  mxopal_quantizer dut (.clk, .rst_n, .high, .global_scale, .in_valid, .in_data,
                        .out_valid, .out_blk);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  bf16_t x [K_BLK];
  int    clip_hi = 0, clip_lo = 0;

  initial begin
    in_valid = 0; in_data = 0; high = 0; global_scale = 8'd115;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 12; n++) begin
      int order [K_BLK];
      int es, off, mb, e5;
      high = n[0];
      global_scale = (n % 4 == 2) ? 8'd100 : (n % 4 == 3) ? 8'd130 : 8'd115;
      for (int i = 0; i < K_BLK; i++) x[i] = (i % 37 == 5) ? 16'h0000 : rand_bf(112, 126);
      for (int j = 0; j < 3 + n % 4; j++) x[$urandom_range(K_BLK-1, 0)] = rand_bf(128, 136);
      // reference: order by magnitude (descending), earlier index first on ties
      for (int i = 0; i < K_BLK; i++) order[i] = i;
      for (int i = 0; i < N_OL + 1; i++)
        for (int k = i + 1; k < K_BLK; k++)
          if (x[order[k]][14:0] > x[order[i]][14:0] ||
              (x[order[k]][14:0] == x[order[i]][14:0] && order[k] < order[i])) begin
            int t; t = order[i]; order[i] = order[k]; order[k] = t;
          end
      e5  = int'(x[order[N_OL]][14:7]);
      off = e5 - int'(global_scale);
      if (off > 15) begin off = 15; clip_hi++; end
      if (off < 0)  begin off = 0;  clip_lo++; end
      es  = int'(global_scale) + off;
      mb  = high ? 2*CW : CW;
      // stream it
      for (int i = 0; i < K_BLK; i++) begin
        @(negedge clk);
        in_valid = 1; in_data = x[i];
        if ($urandom_range(3, 0) == 0 && i != K_BLK-1) begin
          @(negedge clk); in_valid = 0;
        end
      end
      @(negedge clk); in_valid = 0;
      chk(out_valid, $sformatf("out_valid one cycle after the last value, block %0d", n));
      chk(out_blk.offset == 4'(off), $sformatf("offset %0d exp %0d", out_blk.offset, off));
      for (int j = 0; j < N_OL; j++) begin
        chk(int'(out_blk.ol_idx[j]) == order[j] && out_blk.ol_valid[j], $sformatf("ol_idx %0d", j));
        chk(out_blk.ol_val[j] == x[order[j]], "ol_val");
      end
      for (int i = 0; i < K_BLK; i++) begin
        bit is_ol;
        int q;
        logic [CODE_W-1:0] c;
        is_ol = 0;
        for (int j = 0; j < N_OL; j++) if (order[j] == i) is_ol = 1;
        q = is_ol ? 0 : int'($floor(rabs(bf2r(x[i])) / pow2(es - 127 - (mb - 1))));
        if (q > (1 << mb) - 1) q = (1 << mb) - 1;
        c = {x[i][15] && (q != 0), (CODE_W-1)'(q)};
        chk(out_blk.code[i] == c, $sformatf("blk %0d code %0d got %h exp %h", n, i, out_blk.code[i], c));
      end
      @(negedge clk);
      chk(!out_valid, "out_valid is a single pulse");
    end
    chk(clip_hi > 0 && clip_lo > 0, "offset clipping exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
