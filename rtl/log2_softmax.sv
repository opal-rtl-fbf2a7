// log2_softmax: log2-based softmax and shift-based Attn x V (Fig. 6(c)).
//
// Score phase: each s_valid brings one score s = q.k of the current attention
// row. Exp gives e_t = e^(s/sqrt(d_k)) (see exp_unit), which is written to the
// softmax buffer at position t, and the running sum S = sum e_t is kept in a
// register (the Sum box with its feedback mux). clear starts a new row.
//
// V phase: each v_valid brings VN = 8 values V[t][d] of one output dimension d
// for tokens t = 8g .. 8g+7, g counting beats since the last v_last. For each
// token the exponent subtractor and mantissa comparator give, per Eq. 3 of
// the paper,
//   l_t   = (E_t - E_S) + c_t,  c_t = +1 if M_t - M_S >= 0.5,
//                                   -1 if M_S - M_t >= 0.5, else 0
//   Aq_t  = clip(-l_t, 0, 2^AQ_W - 1)
// so that e_t / S ~ 2^-Aq_t. A second exponent subtractor divides V[t][d] by
// 2^Aq_t by lowering its exponent, the eight results go through an adder tree
// and are accumulated over the beats. On v_last the sum Z[d] = sum_t
// 2^-Aq_t V[t][d] is output (z_valid one cycle later). Tokens beyond the
// number of scores received contribute zero.
// Follows the paper: Eq. 3, the Exp/Sum/subtractor/comparator/adder tree/Sum
// chain and the 2 KB buffer. Own choices: AQ_W = 4 (the paper leaves b open),
// eight V values per cycle (read from the "V[7:0]" label), V in bfloat16,
// one score per cycle, no stall.
module log2_softmax
  import opal_pkg::*;
#(
  parameter int TOK_MAX = 1024,
  parameter int VN      = 8,
  parameter int AQ_W    = 4,
  localparam int TW     = $clog2(TOK_MAX) + 1,
  localparam int GW     = $clog2(TOK_MAX / VN)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  bf16_t           exp_scale,   // log2(e) / sqrt(d_k)
  input  logic            s_valid,
  input  bf16_t           s_data,
  input  logic            v_valid,
  input  logic            v_last,
  input  bf16_t [VN-1:0]  v_data,
  output logic            z_valid,
  output bf16_t           z_data,
  output logic [TW-1:0]   n_tok,
  output logic [VN-1:0]   aq_clip      // Aq of a live token hit 2^AQ_W - 1 this beat
);
  localparam int AQ_MAX = (1 << AQ_W) - 1;

  bf16_t          e_new, sum_q;
  logic [GW-1:0]  grp;
  bf16_t [VN-1:0] e_row;
  bf16_t          scaled [VN];
  bf16_t          tree, zacc, znext;

  exp_unit u_exp (.s(s_data), .scale(exp_scale), .e(e_new));

  softmax_buffer #(.DEPTH(TOK_MAX), .RD_N(VN)) u_buf (
    .clk(clk), .we(s_valid), .waddr(n_tok[TW-2:0]), .wdata(e_new),
    .raddr(grp), .rdata(e_row));

  // exponent subtractor + mantissa comparator + V exponent subtractor
  always_comb begin
    for (int i = 0; i < VN; i++) begin
      int dE, dm, l, aq, ve;
      logic live;
      live = (int'(grp) * VN + i < int'(n_tok)) && (e_row[i][14:7] != 8'd0);
      dE = int'(e_row[i][14:7]) - int'(sum_q[14:7]);
      dm = int'(e_row[i][6:0]) - int'(sum_q[6:0]);
      l  = dE + ((dm >= 64) ? 1 : (dm <= -64) ? -1 : 0);
      aq = -l;
      if (aq < 0)      aq = 0;
      if (aq > AQ_MAX) aq = AQ_MAX;
      aq_clip[i] = live && v_valid && (aq == AQ_MAX);
      ve = int'(v_data[i][14:7]) - aq;
      if (!live || v_data[i][14:7] == 8'd0 || ve <= 0) scaled[i] = 16'h0000;
      else scaled[i] = {v_data[i][15], ve[7:0], v_data[i][6:0]};
    end
  end

  fp_adder_tree #(.N(VN)) u_tree (.in(scaled), .sum(tree));
  assign znext = (grp == '0) ? tree : bf16_add(zacc, tree);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_tok <= '0; sum_q <= '0; grp <= '0; zacc <= '0;
      z_valid <= 1'b0; z_data <= '0;
    end else begin
      z_valid <= 1'b0;
      if (clear) begin
        n_tok <= '0; sum_q <= '0; grp <= '0; zacc <= '0;
      end else begin
        if (s_valid) begin
          n_tok <= n_tok + 1'b1;
          sum_q <= (n_tok == '0) ? e_new : bf16_add(sum_q, e_new);
        end
        if (v_valid) begin
          if (v_last) begin
            z_valid <= 1'b1; z_data <= znext; grp <= '0; zacc <= '0;
          end else begin
            zacc <= znext; grp <= grp + 1'b1;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) s_valid |-> n_tok < TW'(TOK_MAX))
    else $error("softmax buffer overflow");
endmodule
