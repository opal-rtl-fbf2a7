// opal_core: the OPAL core (Fig. 6(a) of the paper), top of this design.
//
// Datapath: LANES = 8 data distributors feed 8 compute lanes. Per beat
// (in_valid & in_ready) every lane receives one 128-element activation block
// (MX-OPAL) and the matching 128-element weight slice, so a beat covers
// 8 x 128 = 1024 input channels of one output element. Each lane returns one
// bfloat16 partial dot product per block after 1 (low-low), 2 (low-high) or
// 4 (high-high) phases; in the 2- and 4-phase modes in_ready drops to stall
// the source. The FP adder tree adds the 8 lane results; successive beats are
// accumulated until a beat marked in_last, which completes the output element.
//
// Routing: with to_softmax = 0 the element goes through the output mux to the
// bfloat16 output y and to the MX-OPAL quantizer. With to_softmax = 1 (Q x K^T)
// it is an attention score and goes to the log2-based softmax unit, which
// stores e^x in its 2 KB buffer. Afterwards Attn x V is run by streaming V
// (v_valid, eight bfloat16 values of one output dimension per beat, v_last
// on the last token group); its results take the other input of the mux.
// With q_en set, the quantizer groups 128 mux outputs into one MX-OPAL block
// (q_valid); results meant only for the bfloat16 output leave q_en low.
//
// Peak MACs per cycle: 8 lanes x 32 INT MUs x 4/2/1 = 1024/512/256, as in the
// paper. Timing: a lane result appears 1 cycle after its block's last phase,
// the element 1 cycle later, y / quantizer input in the same cycle, a
// quantized block 1 cycle after its 128th element.
// The configuration inputs (mode, scales, to_softmax, q_high) must be stable
// while an operation is in flight; mode is sampled per block. The accumulation
// of beats into one element, the handshake and the mux priority (softmax
// output first; both at once is flagged by an assertion) are this design's
// own choices. SRAMs, LN and the activation function are outside the core.
module opal_core
  import opal_pkg::*;
#(
  parameter int LANES   = 8,
  parameter int TOK_MAX = 1024,
  parameter int VN      = 8,
  parameter int AQ_W    = 4
) (
  input  logic           clk,
  input  logic           rst_n,
  // configuration
  input  mu_mode_e       mode,
  input  logic           to_softmax,
  input  logic [7:0]     a_global,      // global scale of the activation (or Q) tensor
  input  logic [7:0]     b_global,      // weight exponent (or global scale of K)
  input  bf16_t          exp_scale,     // log2(e)/sqrt(d_k)
  input  logic           sm_clear,      // start a new attention row
  input  logic           q_en,          // results enter the MX-OPAL quantizer
  input  logic           q_high,        // quantizer output width: 1 = high-bit
  input  logic [7:0]     q_global,      // global scale of the output tensor
  // operand blocks
  input  logic           in_valid,
  output logic           in_ready,
  input  logic           in_last,
  input  mx_block_t      a_blk [LANES],
  input  mx_block_t      b_blk [LANES],
  // V for Attn x V
  input  logic           v_valid,
  input  logic           v_last,
  input  bf16_t [VN-1:0] v_data,
  // results
  output logic           y_valid,
  output bf16_t          y_data,
  output logic           q_valid,
  output mx_block_t      q_blk,
  // status
  output logic [$clog2(TOK_MAX):0] sm_n_tok,   // scores held by the softmax unit
  output logic [VN-1:0]            sm_aq_clip  // Attn_Q clipped at 2^AQ_W-1 this beat
);
  lane_feed_t feed     [LANES];
  logic       rdy      [LANES];
  logic       l_valid  [LANES];
  logic       l_last   [LANES];
  bf16_t      l_data   [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    data_distributor u_dist (
      .clk, .rst_n, .mode, .a_global, .b_global,
      .in_valid, .in_ready(rdy[l]), .in_last,
      .a_blk(a_blk[l]), .b_blk(b_blk[l]), .feed(feed[l]));
    compute_lane u_lane (
      .clk, .rst_n, .feed(feed[l]),
      .out_valid(l_valid[l]), .out_grp_last(l_last[l]), .out_data(l_data[l]));
  end
  assign in_ready = rdy[0];   // all distributors run in lockstep

  // FP adder tree over the lanes, then accumulation over beats
  bf16_t lane_sum, gacc, gnext;
  logic  gopen, e_valid;
  bf16_t e_data;

  fp_adder_tree #(.N(LANES)) u_fptree (.in(l_data), .sum(lane_sum));
  assign gnext = gopen ? bf16_add(gacc, lane_sum) : lane_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gacc <= '0; gopen <= 1'b0; e_valid <= 1'b0; e_data <= '0;
    end else begin
      e_valid <= 1'b0;
      if (l_valid[0]) begin
        if (l_last[0]) begin
          e_valid <= 1'b1; e_data <= gnext; gopen <= 1'b0;
        end else begin
          gacc <= gnext; gopen <= 1'b1;
        end
      end
    end
  end

  // log2-based softmax unit
  logic                      z_valid;
  bf16_t                     z_data;

  log2_softmax #(.TOK_MAX(TOK_MAX), .VN(VN), .AQ_W(AQ_W)) u_softmax (
    .clk, .rst_n, .clear(sm_clear), .exp_scale,
    .s_valid(e_valid && to_softmax), .s_data(e_data),
    .v_valid, .v_last, .v_data,
    .z_valid, .z_data, .n_tok(sm_n_tok), .aq_clip(sm_aq_clip));

  // output mux: softmax (Attn x V) result or MxV result
  always_comb begin
    if (z_valid) begin
      y_valid = 1'b1;            y_data = z_data;
    end else begin
      y_valid = e_valid && !to_softmax; y_data = e_data;
    end
  end

  mxopal_quantizer u_quant (
    .clk, .rst_n, .high(q_high), .global_scale(q_global),
    .in_valid(y_valid && q_en), .in_data(y_data), .out_valid(q_valid), .out_blk(q_blk));

  assert property (@(posedge clk) disable iff (!rst_n) !(z_valid && e_valid && !to_softmax))
    else $error("MxV result and Attn x V result collide at the output mux");
endmodule
