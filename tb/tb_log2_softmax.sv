// tb_log2_softmax: two attention rows (20 and 9 scores, clear in between).
// 1. For every token, a V column that is 1.0 at that token and 0 elsewhere
//    (all padding lanes nonzero garbage) makes the output 2^-Aq_t. Aq_t is
//    compared with Eq. 3 evaluated by the testbench with reals on its own
//    model of the exponentials (2^floor(y) (1 + frac y)) and of the sum S; the
//    sum may be truncated by the hardware, so the Aq for S (1 - 2^-6) is
//    accepted too.
// 2. Random V columns: Z must equal sum_t 2^-Aq_t V_t (Aq from step 1) within
//    bfloat16 adder-tree truncation.
// One score is made very small so Aq is clipped at 2^AQ_W - 1 (counted).
module tb_log2_softmax;
  import opal_pkg::*;
  import tb_util_pkg::*;
  localparam int VN = 8, AQ_W = 4, TOK_MAX = 1024;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic clear, s_valid, v_valid, v_last;
  bf16_t scale, s_data, z_data;
  bf16_t [VN-1:0] v_data;
  logic z_valid;
  logic [$clog2(TOK_MAX):0] n_tok;
  logic [VN-1:0] aq_clip;
  int clip_seen = 0;

  log2_softmax #(.TOK_MAX(TOK_MAX), .VN(VN), .AQ_W(AQ_W)) dut (
    .clk, .rst_n, .clear, .exp_scale(scale), .s_valid, .s_data,
    .v_valid, .v_last, .v_data, .z_valid, .z_data, .n_tok, .aq_clip);
  always #5 clk = ~clk;
  always @(posedge clk) if (|aq_clip) clip_seen++;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  function automatic real exp_model(bf16_t s, bf16_t sc);
    real y, fl;
    y  = bf2r(r2bf(bf2r(s) * bf2r(sc)));
    fl = $floor(y);
    return pow2(int'(fl)) * (1.0 + $floor((y - fl) * 128.0) / 128.0);
  endfunction

  function automatic int aq_ref(real e, real S);
    bf16_t be, bs;
    int dE, dm, l, aq;
    be = r2bf(e); bs = r2bf(S);
    dE = int'(be[14:7]) - int'(bs[14:7]);
    dm = int'(be[6:0]) - int'(bs[6:0]);
    l  = dE + ((dm >= 64) ? 1 : (dm <= -64) ? -1 : 0);
    aq = -l;
    if (aq < 0) aq = 0;
    if (aq > (1 << AQ_W) - 1) aq = (1 << AQ_W) - 1;
    return aq;
  endfunction

  // run one V column (ng groups), return Z
  task automatic run_v(input bf16_t col [], input int ntok, output bf16_t z);
    int ng;
    ng = (ntok + VN - 1) / VN;
    for (int g = 0; g < ng; g++) begin
      @(negedge clk);
      v_valid = 1; v_last = (g == ng - 1);
      for (int i = 0; i < VN; i++)
        v_data[i] = (g*VN + i < ntok) ? col[g*VN + i] : rand_bf(120, 130);
    end
    @(negedge clk); v_valid = 0; v_last = 0;
    chk(z_valid, "z_valid one cycle after v_last");
    z = z_data;
  endtask

  initial begin
    clear = 0; s_valid = 0; v_valid = 0; v_last = 0; s_data = 0; v_data = '0;
    scale = r2bf(1.4426950408889634 / $sqrt(128.0));
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int row = 0; row < 2; row++) begin
      int    ntok;
      bf16_t sc [];
      real   e [], S;
      int    aq_hw [];
      ntok = (row == 0) ? 20 : 9;
      sc = new[ntok]; e = new[ntok]; aq_hw = new[ntok];
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      S = 0.0;
      for (int t = 0; t < ntok; t++) begin
        sc[t] = r2bf(real'($urandom_range(100, 0)) - 50.0 + real'($urandom_range(99, 0)) / 100.0);
        if (t == 3) sc[t] = r2bf(-130.0);               // tiny weight: Aq clips
        e[t] = exp_model(sc[t], scale);
        S += e[t];
        @(negedge clk); s_valid = 1; s_data = sc[t];
      end
      @(negedge clk); s_valid = 0;
      chk(int'(n_tok) == ntok, "token count");
      // 1: one-hot columns give 2^-Aq
      for (int t = 0; t < ntok; t++) begin
        bf16_t col [];
        bf16_t z;
        int a1, a2, ahw;
        col = new[ntok];
        foreach (col[i]) col[i] = (i == t) ? 16'h3F80 : 16'h0000;
        run_v(col, ntok, z);
        ahw = 127 - int'(z[14:7]);
        aq_hw[t] = ahw;
        a1 = aq_ref(e[t], S);
        a2 = aq_ref(e[t], S * (1.0 - 1.0 / 64.0));
        chk(z[6:0] == 7'd0 && z[15] == 1'b0, "one-hot output is a power of two");
        chk(ahw == a1 || ahw == a2, $sformatf("row %0d tok %0d Aq hw %0d ref %0d/%0d", row, t, ahw, a1, a2));
      end
      // 2: random columns
      for (int d = 0; d < 6; d++) begin
        bf16_t col [];
        bf16_t z;
        real ref_z, mag;
        col = new[ntok];
        ref_z = 0.0; mag = 0.0;
        foreach (col[i]) begin
          col[i] = rand_bf(122, 130);
          ref_z += bf2r(col[i]) * pow2(-aq_hw[i]);
          mag   += rabs(bf2r(col[i]) * pow2(-aq_hw[i]));
        end
        run_v(col, ntok, z);
        chk(rabs(bf2r(z) - ref_z) <= mag / 16.0, $sformatf("Z got %g exp %g", bf2r(z), ref_z));
      end
    end
    chk(clip_seen > 0, "Aq clipping exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
