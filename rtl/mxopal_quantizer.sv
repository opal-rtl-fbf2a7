// mxopal_quantizer: shift-based bfloat16 -> MX-OPAL converter.
//
// Collects K_BLK = 128 bfloat16 values, one per in_valid, into a block. While
// they arrive it keeps a sorted list of the N_OL + 1 = 5 largest magnitudes
// (|x| compared as the 15-bit exponent:mantissa field, earlier element first
// on a tie). When the 128th value arrives it emits, registered, one
// mx_block_t (out_valid for one cycle):
//  * the 4 largest values as bfloat16 outliers with their positions;
//  * the shared exponent E = exponent of the 5th largest value, coded as
//    offset = clip(E - global, 0, 15) over the tensor-wise global scale, so
//    the exponent used is Es = global + offset;
//  * every other element as sign + MB magnitude bits, MB = CW (low) or 2*CW
//    (high): the significand 1.m is shifted right by Es - e and truncated to
//    MB bits whose top bit weighs 2^(Es-127) (Fig. 2(c) of the paper); an
//    element above 2^(Es+1) (only possible when the offset is clipped at 15)
//    saturates; outlier slots get code 0.
// Follows the paper: top-4 outliers in bfloat16, (n+1)-th exponent as shared
// scale, 8-bit global + 4-bit block offset, shift-only conversion. Own
// choices: how the global scale is obtained (an input, set per tensor),
// clipping of the offset, truncation, a streaming top-5 list.
module mxopal_quantizer
  import opal_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       high,       // 1: high-bit codes (2*CW magnitude bits)
  input  logic [7:0] global_scale,
  input  logic       in_valid,
  input  bf16_t      in_data,
  output logic       out_valid,
  output mx_block_t  out_blk
);
  localparam int NT = N_OL + 1;

  bf16_t            buf_q [K_BLK];
  logic [IDX_W-1:0] cnt;
  logic [14:0]      t_mag [NT];
  logic [IDX_W-1:0] t_idx [NT];
  bf16_t            t_val [NT];
  logic [NT-1:0]    t_vld;

  // insertion of the incoming element into the sorted top list
  logic [14:0]      n_mag [NT];
  logic [IDX_W-1:0] n_idx [NT];
  bf16_t            n_val [NT];
  logic [NT-1:0]    n_vld;
  logic [NT-1:0]    gt;    // incoming element ranks above entry i

  always_comb begin
    for (int i = 0; i < NT; i++) gt[i] = !t_vld[i] || (in_data[14:0] > t_mag[i]);
    for (int i = 0; i < NT; i++) begin
      if (!gt[i]) begin
        n_mag[i] = t_mag[i]; n_idx[i] = t_idx[i]; n_val[i] = t_val[i]; n_vld[i] = t_vld[i];
      end else if (i == 0 || !gt[i-1]) begin
        n_mag[i] = in_data[14:0]; n_idx[i] = cnt; n_val[i] = in_data; n_vld[i] = 1'b1;
      end else begin
        n_mag[i] = t_mag[i-1]; n_idx[i] = t_idx[i-1]; n_val[i] = t_val[i-1]; n_vld[i] = t_vld[i-1];
      end
    end
  end

  // conversion of the complete block (used when the last element arrives)
  mx_block_t blk_d;
  always_comb begin
    int    es, off, mb, e, sh;
    bf16_t x;
    logic [K_BLK-1:0] is_ol;
    logic [CODE_W-2:0] mag;
    sh  = 0;
    mb  = high ? 2*CW : CW;
    off = int'(n_mag[NT-1][14:7]) - int'(global_scale);
    if (off < 0)  off = 0;
    if (off > 15) off = 15;
    es  = int'(global_scale) + off;
    is_ol = '0;
    for (int j = 0; j < N_OL; j++) is_ol[n_idx[j]] = 1'b1;
    blk_d = '0;
    blk_d.offset = off[3:0];
    for (int j = 0; j < N_OL; j++) begin
      blk_d.ol_idx[j]   = n_idx[j];
      blk_d.ol_val[j]   = n_val[j];
      blk_d.ol_valid[j] = 1'b1;
    end
    for (int i = 0; i < K_BLK; i++) begin
      x = (i == K_BLK-1) ? in_data : buf_q[i];
      e = int'(x[14:7]);
      if (is_ol[i] || e == 0) begin
        mag = '0;
      end else if (e > es) begin
        mag = (CODE_W-1)'((1 << mb) - 1);
      end else begin
        sh  = es - e + 8 - mb;
        mag = (sh >= 8) ? '0 : (CODE_W-1)'({1'b1, x[6:0]} >> sh);
      end
      blk_d.code[i] = {x[15] & (mag != '0), mag};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; t_vld <= '0; out_valid <= 1'b0; out_blk <= '0;
      for (int i = 0; i < NT; i++) begin t_mag[i] <= '0; t_idx[i] <= '0; t_val[i] <= '0; end
      for (int i = 0; i < K_BLK; i++) buf_q[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        buf_q[cnt] <= in_data;
        cnt        <= cnt + 1'b1;
        if (cnt == IDX_W'(K_BLK-1)) begin
          out_valid <= 1'b1;
          out_blk   <= blk_d;
          t_vld     <= '0;
        end else begin
          for (int i = 0; i < NT; i++) begin
            t_mag[i] <= n_mag[i]; t_idx[i] <= n_idx[i]; t_val[i] <= n_val[i];
          end
          t_vld <= n_vld;
        end
      end
    end
  end
endmodule
