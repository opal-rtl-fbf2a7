// exp_unit: e^(s * scale) in bfloat16 for one attention score per cycle.
//
// scale is a run-time bfloat16 constant, log2(e)/sqrt(d_k), so the score is
// first turned into a base-2 argument y = s * log2(e) / sqrt(d_k). y is
// converted to fixed point with 7 fraction bits, split into its integer part I
// (floor) and fraction f, and 2^y is approximated as 2^I * (1 + f): I becomes
// the exponent, f the mantissa. |y| >= 256 saturates (positive) or gives
// zero (negative). The paper only names the Exp box of Fig. 6(c) and divides
// by sqrt(d_k) in Eq. 2; this base-2 method and the run-time scale are this
// design's choices. Combinational. The sign bit of e is constant 0, as e^x
// is never negative; it is kept so that e is an ordinary bfloat16 value.
module exp_unit
  import opal_pkg::*;
(
  input  bf16_t s,
  input  bf16_t scale,
  output bf16_t e
);
  always_comb begin
    bf16_t              y;
    int                 ey;
    logic [23:0]        mag;    // |y| * 2^7
    logic signed [24:0] yfix;
    int                 ipart;
    mag = '0; yfix = '0; ipart = 0;
    y  = bf16_mul(s, scale);
    ey = int'(y[14:7]) - 127;
    if (y[14:7] == 8'd0) begin
      e = 16'h3F80;                                   // 2^0
    end else if (ey >= 8) begin
      e = y[15] ? 16'h0000 : 16'h7F7F;
    end else begin
      if (ey >= 0) mag = {16'd0, 1'b1, y[6:0]} << ey;
      else         mag = {16'd0, 1'b1, y[6:0]} >> (-ey);
      yfix  = y[15] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
      ipart = int'(yfix) >>> 7;
      e     = bf16_pack(1'b0, ipart + 127, yfix[6:0]);
    end
  end
endmodule
