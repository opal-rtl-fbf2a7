// tb_opal_core: end-to-end test of the OPAL core at its default size.
//
//  A. Low-low MxV: 128 output elements (every fourth one spans two beats, so
//     beats are accumulated), bfloat16 results checked against a real-valued
//     dot product; the 128 results are quantized to a high-bit MX-OPAL block,
//     checked against a reference quantization of the observed results.
//  B. Low-high MxV that uses the block from A as the activation of lane 0:
//     each block takes two phases, so the source is stalled.
//  C. Q x K^T in high-high mode for 16 tokens routed to the softmax unit
//     (scores checked), then Attn x V for 128 output dimensions through the
//     output mux, checked against Eq. 3 evaluated on the observed scores, and
//     quantized to a low-bit block (checked).
// Mechanisms counted (each must occur): the three INT MU modes, mode switches,
// stalls, multi-beat accumulation, outlier FP pairs, weight outliers taken in
// place of converted INT weights, softmax routing, Attn x V outputs, Attn_Q
// clipping, quantized blocks from both mux inputs.
module tb_opal_core;
  import opal_pkg::*;
  import tb_util_pkg::*;
  localparam int L = 8, VN = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  mu_mode_e   mode;
  logic       to_softmax, sm_clear, q_en, q_high;
  logic [7:0] a_global, b_global, q_global;
  bf16_t      exp_scale;
  logic       in_valid, in_ready, in_last;
  mx_block_t  a_blk [L], b_blk [L];
  logic       v_valid, v_last;
  bf16_t [VN-1:0] v_data;
  logic       y_valid, q_valid;
  bf16_t      y_data;
  mx_block_t  q_blk;
  logic [10:0] sm_n_tok;
  logic [VN-1:0] sm_aq_clip;

  opal_core dut (
    .clk, .rst_n, .mode, .to_softmax, .a_global, .b_global, .exp_scale, .sm_clear,
    .q_en, .q_high, .q_global, .in_valid, .in_ready, .in_last, .a_blk, .b_blk,
    .v_valid, .v_last, .v_data, .y_valid, .y_data, .q_valid, .q_blk,
    .sm_n_tok, .sm_aq_clip);
  always #5 clk = ~clk;

  // mechanism counters
  int n_stall = 0, n_ll = 0, n_lh = 0, n_hh = 0, n_switch = 0, n_multibeat = 0;
  int n_fp_pairs = 0, n_w_outlier = 0, n_scores = 0, n_z = 0, n_clip = 0, n_qblk = 0;
  mu_mode_e last_mode = MODE_LL;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) n_stall++;
    if (|sm_aq_clip) n_clip++;
    if (q_valid) n_qblk++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- operand generation and reference ----------------
  function automatic mx_block_t gen_blk(int mag_bits, bit with_ol, int ol_elo, int ol_ehi);
    mx_block_t b;
    b = '0;
    for (int i = 0; i < K_BLK; i++) b.code[i] = rand_code(mag_bits);
    b.offset = 4'($urandom_range(12, 4));
    if (with_ol)
      for (int j = 0; j < N_OL; j++) begin
        b.ol_idx[j]   = 7'(j * 29 + $urandom_range(28, 0));   // distinct by construction
        b.ol_val[j]   = rand_bf(ol_elo, ol_ehi);
        b.ol_valid[j] = 1'b1;
      end
    return b;
  endfunction

  // real value of A.B for one lane, and a magnitude bound for the tolerance
  task automatic lane_ref(input mx_block_t A, input mx_block_t B, input mu_mode_e md,
                          output real val, output real mag);
    int a_lsb, b_lsb;
    logic [K_BLK-1:0] skip;
    real sc, iv, im;
    a_lsb = int'(a_global) + int'(A.offset) - int'(mag_bits_a(md)) + 1;
    b_lsb = int'(b_global) + int'(B.offset) - int'(mag_bits_b(md)) + 1;
    sc = pow2(a_lsb - 127) * pow2(b_lsb - 127);
    skip = '0;
    for (int j = 0; j < N_OL; j++) begin
      if (A.ol_valid[j]) skip[A.ol_idx[j]] = 1'b1;
      if (B.ol_valid[j]) skip[B.ol_idx[j]] = 1'b1;
    end
    iv = 0.0;
    for (int i = 0; i < K_BLK; i++)
      if (!skip[i]) iv += real'(code_val(A.code[i]) * code_val(B.code[i]));
    val = iv * sc; mag = rabs(iv * sc); im = 0.0;
    for (int j = 0; j < N_OL; j++) if (A.ol_valid[j]) begin
      real bv;
      bv = real'(code_val(B.code[A.ol_idx[j]])) * pow2(b_lsb - 127);
      for (int k = 0; k < N_OL; k++)
        if (B.ol_valid[k] && B.ol_idx[k] == A.ol_idx[j]) bv = bf2r(B.ol_val[k]);
      val += bf2r(A.ol_val[j]) * bv;
      mag += rabs(bf2r(A.ol_val[j]) * bv);
    end
  endtask

  // one beat: 8 lanes, wait for acceptance
  task automatic send_beat(input mu_mode_e md, input bit last);
    @(negedge clk);
    if (md != last_mode) n_switch++;
    last_mode = md;
    case (md) MODE_LL: n_ll++; MODE_LH: n_lh++; default: n_hh++; endcase
    for (int l = 0; l < L; l++) begin
      for (int j = 0; j < N_OL; j++) begin
        if (a_blk[l].ol_valid[j]) n_fp_pairs++;
        for (int k = 0; k < N_OL; k++)
          if (a_blk[l].ol_valid[j] && b_blk[l].ol_valid[k] && b_blk[l].ol_idx[k] == a_blk[l].ol_idx[j])
            n_w_outlier++;
      end
    end
    mode = md; in_valid = 1; in_last = last;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0; in_last = 0;
  endtask

  // reference quantization (same rules as the quantizer's own testbench)
  task automatic check_quant(input bf16_t x [K_BLK], input mx_block_t q, input bit hi,
                             input logic [7:0] glob, input string tag);
    int order [K_BLK];
    int off, es, mb;
    for (int i = 0; i < K_BLK; i++) order[i] = i;
    for (int i = 0; i < N_OL + 1; i++)
      for (int k = i + 1; k < K_BLK; k++)
        if (x[order[k]][14:0] > x[order[i]][14:0] ||
            (x[order[k]][14:0] == x[order[i]][14:0] && order[k] < order[i])) begin
          int t; t = order[i]; order[i] = order[k]; order[k] = t;
        end
    off = int'(x[order[N_OL]][14:7]) - int'(glob);
    if (off > 15) off = 15;
    if (off < 0) off = 0;
    es = int'(glob) + off;
    mb = hi ? 2*CW : CW;
    chk(q.offset == 4'(off), {tag, " offset"});
    for (int j = 0; j < N_OL; j++)
      chk(int'(q.ol_idx[j]) == order[j] && q.ol_val[j] == x[order[j]], {tag, " outlier"});
    for (int i = 0; i < K_BLK; i++) begin
      bit is_ol;
      int v;
      is_ol = 0;
      for (int j = 0; j < N_OL; j++) if (order[j] == i) is_ol = 1;
      v = is_ol ? 0 : int'($floor(rabs(bf2r(x[i])) / pow2(es - 127 - (mb - 1))));
      if (v > (1 << mb) - 1) v = (1 << mb) - 1;
      chk(q.code[i] == {x[i][15] && v != 0, (CODE_W-1)'(v)}, $sformatf("%s code %0d", tag, i));
    end
  endtask

  // ---------------- output capture ----------------
  bf16_t     ys [$];
  mx_block_t qs [$];
  bf16_t     scores [$];
  always @(posedge clk) if (rst_n) begin
    if (y_valid) ys.push_back(y_data);
    if (q_valid) qs.push_back(q_blk);
    if (dut.u_softmax.s_valid) begin scores.push_back(dut.u_softmax.s_data); n_scores++; end
  end

  function automatic real exp_model(bf16_t s, bf16_t sc);
    real y, fl;
    y  = bf2r(r2bf(bf2r(s) * bf2r(sc)));
    fl = $floor(y);
    return pow2(int'(fl)) * (1.0 + $floor((y - fl) * 128.0) / 128.0);
  endfunction
  function automatic int aq_ref(real e, real S);
    bf16_t be, bs;
    int dE, dm, aq;
    be = r2bf(e); bs = r2bf(S);
    dE = int'(be[14:7]) - int'(bs[14:7]);
    dm = int'(be[6:0]) - int'(bs[6:0]);
    aq = -(dE + ((dm >= 64) ? 1 : (dm <= -64) ? -1 : 0));
    if (aq < 0) aq = 0;
    if (aq > 15) aq = 15;
    return aq;
  endfunction

  // ---------------- test ----------------
  real exp_y [$], mag_y [$];
  initial begin
    mode = MODE_LL; to_softmax = 0; sm_clear = 0; q_en = 1; q_high = 1; q_global = 8'd110;
    a_global = 8'd118; b_global = 8'd121; exp_scale = r2bf(1.4426950408889634 / $sqrt(128.0));
    in_valid = 0; in_last = 0; v_valid = 0; v_last = 0; v_data = '0;
    for (int l = 0; l < L; l++) begin a_blk[l] = '0; b_blk[l] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- A: low-low MxV, 128 elements ----
    for (int k = 0; k < 128; k++) begin
      int nb;
      real v, m;
      nb = (k % 4 == 0) ? 2 : 1;
      if (nb == 2) n_multibeat++;
      v = 0.0; m = 0.0;
      for (int bt = 0; bt < nb; bt++) begin
        for (int l = 0; l < L; l++) begin
          real lv, lm;
          a_blk[l] = gen_blk(CW, 1, 124, 130);
          b_blk[l] = gen_blk(CW, 0, 0, 0);
          if (l % 2 == 0) begin   // an OWQ weight outlier at an activation outlier channel
            b_blk[l].ol_idx[0] = a_blk[l].ol_idx[1]; b_blk[l].ol_valid[0] = 1;
            b_blk[l].ol_val[0] = rand_bf(118, 123);
          end
          lane_ref(a_blk[l], b_blk[l], MODE_LL, lv, lm);
          v += lv; m += lm;
        end
        send_beat(MODE_LL, bt == nb - 1);
      end
      exp_y.push_back(v); mag_y.push_back(m);
    end
    repeat (6) @(negedge clk);
    chk(ys.size() == 128, $sformatf("A: %0d results", ys.size()));
    chk(qs.size() == 1, "A: one quantized block");
    begin
      bf16_t x [K_BLK];
      for (int k = 0; k < K_BLK && k < ys.size(); k++) begin
        x[k] = ys[k];
        chk(rabs(bf2r(ys[k]) - exp_y[k]) <= mag_y[k] / 16.0,
            $sformatf("A: y[%0d] got %g exp %g", k, bf2r(ys[k]), exp_y[k]));
      end
      if (qs.size() > 0) check_quant(x, qs[0], 1'b1, q_global, "A");
    end

    // ---- B: low-high MxV on the block from A ----
    ys.delete(); exp_y.delete(); mag_y.delete();
    begin
      logic [7:0] ag_save;
      ag_save = a_global;
      a_global = q_global;
      q_en = 0;                    // these results bypass the quantizer
      for (int k = 0; k < 8; k++) begin
        real v, m;
        v = 0.0; m = 0.0;
        for (int l = 0; l < L; l++) begin
          real lv, lm;
          a_blk[l] = (l == 0 && qs.size() > 0) ? qs[0] : gen_blk(2*CW, 1, 120, 126);
          b_blk[l] = gen_blk(CW, 0, 0, 0);
          lane_ref(a_blk[l], b_blk[l], MODE_LH, lv, lm);
          v += lv; m += lm;
        end
        send_beat(MODE_LH, 1'b1);
        exp_y.push_back(v); mag_y.push_back(m);
      end
      repeat (6) @(negedge clk);
      chk(ys.size() == 8, "B: 8 results");
      for (int k = 0; k < 8 && k < ys.size(); k++)
        chk(rabs(bf2r(ys[k]) - exp_y[k]) <= mag_y[k] / 16.0,
            $sformatf("B: y[%0d] got %g exp %g", k, bf2r(ys[k]), exp_y[k]));
      a_global = ag_save;
      q_en = 1;
    end

    // ---- C: Q x K^T -> softmax, then Attn x V ----
    ys.delete(); exp_y.delete(); mag_y.delete(); qs.delete();
    to_softmax = 1; q_high = 0; q_global = 8'd112;
    @(negedge clk); sm_clear = 1;
    @(negedge clk); sm_clear = 0;
    begin
      mx_block_t qb [L];
      real e [16], S;
      int  a1 [16], a2 [16];
      for (int l = 0; l < L; l++) qb[l] = gen_blk(2*CW, 1, 120, 123);
      for (int t = 0; t < 16; t++) begin
        real v, m;
        v = 0.0; m = 0.0;
        for (int l = 0; l < L; l++) begin
          real lv, lm;
          a_blk[l] = qb[l];
          b_blk[l] = gen_blk(2*CW, 0, 0, 0);
          if (t == 5) for (int i = 0; i < K_BLK; i++)   // strongly negative score: Aq clips
            b_blk[l].code[i] = {~a_blk[l].code[i][CODE_W-1], {(CODE_W-1){1'b1}}};
          lane_ref(a_blk[l], b_blk[l], MODE_HH, lv, lm);
          v += lv; m += lm;
        end
        send_beat(MODE_HH, 1'b1);
        exp_y.push_back(v); mag_y.push_back(m);
      end
      repeat (6) @(negedge clk);
      to_softmax = 0;
      chk(ys.size() == 0, "C: scores do not reach the output");
      chk(scores.size() == 16 && int'(sm_n_tok) == 16, "C: 16 scores in the softmax unit");
      S = 0.0;
      for (int t = 0; t < 16 && t < scores.size(); t++) begin
        chk(rabs(bf2r(scores[t]) - exp_y[t]) <= mag_y[t] / 16.0,
            $sformatf("C: score[%0d] got %g exp %g", t, bf2r(scores[t]), exp_y[t]));
        e[t] = exp_model(scores[t], exp_scale);
        S += e[t];
      end
      for (int t = 0; t < 16; t++) begin
        a1[t] = aq_ref(e[t], S);
        a2[t] = aq_ref(e[t], S * (1.0 - 1.0 / 64.0));
      end
      // Attn x V for 128 dimensions, two groups of 8 tokens each
      exp_y.delete(); mag_y.delete();
      for (int d = 0; d < 128; d++) begin
        real zr, zm;
        zr = 0.0; zm = 0.0;
        for (int g = 0; g < 2; g++) begin
          @(negedge clk);
          v_valid = 1; v_last = (g == 1);
          for (int i = 0; i < VN; i++) begin
            real vv;
            v_data[i] = rand_bf(122, 129);
            vv = bf2r(v_data[i]);
            zr += vv * pow2(-a1[g*VN + i]);
            zm += rabs(vv * pow2(-a1[g*VN + i]));
            if (a1[g*VN + i] != a2[g*VN + i]) zm += 16.0 * rabs(vv * pow2(-a2[g*VN + i]));
          end
        end
        @(negedge clk); v_valid = 0; v_last = 0;
        exp_y.push_back(zr); mag_y.push_back(zm);
      end
      repeat (6) @(negedge clk);
      n_z = ys.size();
      chk(ys.size() == 128, $sformatf("C: %0d Attn x V results", ys.size()));
      chk(qs.size() == 1, "C: one quantized block");
      begin
        bf16_t x [K_BLK];
        for (int k = 0; k < K_BLK && k < ys.size(); k++) begin
          x[k] = ys[k];
          chk(rabs(bf2r(ys[k]) - exp_y[k]) <= mag_y[k] / 16.0,
              $sformatf("C: z[%0d] got %g exp %g", k, bf2r(ys[k]), exp_y[k]));
        end
        if (qs.size() > 0) check_quant(x, qs[0], 1'b0, q_global, "C");
      end
    end

    $display("mechanisms: LL=%0d LH=%0d HH=%0d switches=%0d stalls=%0d multibeat=%0d fp_pairs=%0d w_outliers=%0d scores=%0d z=%0d clip=%0d qblocks=%0d",
             n_ll, n_lh, n_hh, n_switch, n_stall, n_multibeat, n_fp_pairs, n_w_outlier, n_scores, n_z, n_clip, n_qblk);
    chk(n_ll > 0, "low-low mode used");
    chk(n_lh > 0, "low-high mode used");
    chk(n_hh > 0, "high-high mode used");
    chk(n_switch >= 2, "mode switches");
    chk(n_stall > 0, "stalls");
    chk(n_multibeat > 0, "multi-beat accumulation");
    chk(n_fp_pairs > 0, "outlier FP path");
    chk(n_w_outlier > 0, "weight outliers");
    chk(n_scores > 0, "softmax routing");
    chk(n_z > 0, "Attn x V through the mux");
    chk(n_clip > 0, "Attn_Q clipping");
    chk(n_qblk >= 2, "quantized blocks from both mux inputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
