// compute_lane: one of the eight MxV lanes of the OPAL core.
//
// 32 INT MUs take one phase of a block from the data distributor; their 128
// shifted partial products are added by the INT adder tree and accumulated
// over the 1, 2 or 4 phases of the block. In the block's last phase the sum is
// turned into bfloat16 with the block's LSB exponent (Int to FP) and added to
// the sum of the four outlier FP units. The result, the block's partial dot
// product, is registered: out_valid pulses one cycle after the last phase.
// The structure (32 INT MUs, INT adder tree, Int to FP, four outlier FP
// units, final add) follows Fig. 6(a) of the paper; the single-cycle
// combinational path and the accumulate-over-phases register are this
// design's choices.
module compute_lane
  import opal_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  lane_feed_t feed,
  output logic       out_valid,
  output logic       out_grp_last,
  output bf16_t      out_data
);
  localparam int NPP = N_MU * MU_MULS;

  logic signed [PP_W-1:0]  pp [NPP];
  logic signed [ACC_W-1:0] tree_sum, acc, acc_next;
  bf16_t                   int_part, fp_part;

  for (genvar m = 0; m < N_MU; m++) begin : g_mu
    logic signed [PP_W-1:0] mu_pp [MU_MULS];
    int_mu u_mu (.mode(feed.mode), .a(feed.a[m]), .b(feed.b[m]), .pp(mu_pp));
    for (genvar s = 0; s < MU_MULS; s++) begin : g_pp
      assign pp[MU_MULS*m + s] = mu_pp[s];
    end
  end

  int_adder_tree #(.N(NPP), .IN_W(PP_W), .OUT_W(ACC_W)) u_tree (.in(pp), .sum(tree_sum));

  assign acc_next = (feed.first ? '0 : acc) + tree_sum;

  int_to_fp #(.W(ACC_W)) u_i2f (.v(acc_next), .lsb_exp(feed.lsb_exp), .f(int_part));

  outlier_fp_units #(.N(N_OL)) u_fpu (.a(feed.fp_a), .b(feed.fp_b), .en(feed.fp_en), .sum(fp_part));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; out_valid <= 1'b0; out_grp_last <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= feed.valid && feed.last;
      if (feed.valid) acc <= acc_next;
      if (feed.valid && feed.last) begin
        out_data     <= bf16_add(int_part, fp_part);
        out_grp_last <= feed.grp_last;
      end
    end
  end
endmodule
