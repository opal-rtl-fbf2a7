// data_distributor: splits one MX-OPAL block pair into INT and FP work.
//
// On a handshake (in_valid & in_ready) it takes a 128-element activation
// block A and the matching 128-element weight slice B (for Q x K^T: the Q and
// K blocks) and registers:
//  * the INT codes of both, with every outlier position of either operand
//    zeroed, for the lane's 32 INT MUs;
//  * for each of the four activation outliers, the bfloat16 pair sent to the
//    FP units: the activation outlier and the weight of the same channel. That
//    weight is B's own bfloat16 outlier when B has one at that position,
//    otherwise its INT code converted to bfloat16 ("Int to FP" in Fig. 6(a),
//    the blue box of Fig. 6(b));
//  * the exponent of one product LSB, from the global scales and block offsets.
// It then presents the block to the lane in 1, 2 or 4 phases (low-low,
// low-high, high-high). In phase ph, INT MU m gets pairs
//   low-low : 4m .. 4m+3         low-high: 64ph + 2m, 64ph + 2m + 1
//   high-high: 32ph + m
// in_ready is high while idle and in the last phase, so blocks stream back to
// back; in the 2- and 4-phase modes in_ready drops, stalling the source.
// Latency: phase 0 appears the cycle after the handshake.
// What follows the paper: the outlier/non-outlier split, the INT->BF16 weight
// conversion at activation-outlier channels, four FP slots. Own choices: the
// phase order, the handshake, and that B outliers are expected only at A's
// outlier positions (a B outlier elsewhere is dropped, there is no FP unit
// left for it).
module data_distributor
  import opal_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  mu_mode_e   mode,       // sampled with the block
  input  logic [7:0] a_global,   // tensor-wise global scale of A
  input  logic [7:0] b_global,   // global scale of B (per-row weight exponent)
  input  logic       in_valid,
  output logic       in_ready,
  input  logic       in_last,    // this block closes an output element
  input  mx_block_t  a_blk,
  input  mx_block_t  b_blk,
  output lane_feed_t feed
);
  logic                         busy;
  logic [1:0]                   ph;
  mu_mode_e                     mode_q;
  logic                         last_q;
  logic [K_BLK-1:0][CODE_W-1:0] a_q, b_q;
  bf16_t [N_OL-1:0]             fpa_q, fpb_q;
  logic  [N_OL-1:0]             fpen_q;
  logic signed [11:0]           lsb_q;

  logic [1:0] ph_end;
  assign ph_end   = 2'(phases(mode_q) - 1);
  assign in_ready = !busy || (ph == ph_end);
  wire   load     = in_valid && in_ready;

  // --- block preparation (combinational, registered on load) ---
  logic [K_BLK-1:0][CODE_W-1:0] a_m, b_m;
  bf16_t [N_OL-1:0]             fpa_d, fpb_d;
  logic signed [11:0]           lsb_d;

  always_comb begin
    int a_lsb, b_lsb;
    a_lsb = int'(a_global) + int'(a_blk.offset) - int'(mag_bits_a(mode)) + 1;
    b_lsb = int'(b_global) + int'(b_blk.offset) - int'(mag_bits_b(mode)) + 1;
    lsb_d = 12'(a_lsb + b_lsb - 127);
    a_m = a_blk.code;
    b_m = b_blk.code;
    for (int j = 0; j < N_OL; j++) begin
      if (a_blk.ol_valid[j]) a_m[a_blk.ol_idx[j]] = '0;
      if (b_blk.ol_valid[j]) b_m[b_blk.ol_idx[j]] = '0;
    end
    for (int j = 0; j < N_OL; j++) begin
      fpa_d[j] = a_blk.ol_val[j];
      fpb_d[j] = code_to_bf16(b_blk.code[a_blk.ol_idx[j]], b_lsb);
      for (int k = 0; k < N_OL; k++)
        if (b_blk.ol_valid[k] && b_blk.ol_idx[k] == a_blk.ol_idx[j]) fpb_d[j] = b_blk.ol_val[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; ph <= '0; mode_q <= MODE_LL; last_q <= 1'b0;
      a_q <= '0; b_q <= '0; fpa_q <= '0; fpb_q <= '0; fpen_q <= '0; lsb_q <= '0;
    end else if (load) begin
      busy <= 1'b1; ph <= '0; mode_q <= mode; last_q <= in_last;
      a_q <= a_m; b_q <= b_m; fpa_q <= fpa_d; fpb_q <= fpb_d;
      fpen_q <= a_blk.ol_valid; lsb_q <= lsb_d;
    end else if (busy) begin
      if (ph == ph_end) busy <= 1'b0;
      else              ph   <= ph + 2'd1;
    end
  end

  // --- phase routing to the INT MUs ---
  always_comb begin
    feed          = '0;
    feed.valid    = busy;
    feed.first    = busy && (ph == 2'd0);
    feed.last     = busy && (ph == ph_end);
    feed.grp_last = last_q;
    feed.mode     = mode_q;
    feed.fp_a     = fpa_q;
    feed.fp_b     = fpb_q;
    feed.fp_en    = fpen_q;
    feed.lsb_exp  = lsb_q;
    for (int m = 0; m < N_MU; m++) begin
      unique case (mode_q)
        MODE_LL:
          for (int s = 0; s < 4; s++) begin
            feed.a[m][s] = a_q[4*m + s];
            feed.b[m][s] = b_q[4*m + s];
          end
        MODE_LH:
          for (int s = 0; s < 2; s++) begin
            feed.a[m][s] = a_q[64*int'(ph[0]) + 2*m + s];
            feed.b[m][s] = b_q[64*int'(ph[0]) + 2*m + s];
          end
        default: begin
          feed.a[m][0] = a_q[32*int'(ph) + m];
          feed.b[m][0] = b_q[32*int'(ph) + m];
        end
      endcase
    end
  end
endmodule
