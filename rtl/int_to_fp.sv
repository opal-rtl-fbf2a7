// int_to_fp: signed integer times a power of two -> bfloat16.
//
// The lane's integer dot product is v x 2^(lsb_exp - 127), where lsb_exp is
// the biased exponent of one LSB, formed from the shared scales of both
// operands. The unit finds the leading one of |v|, sets the exponent to
// lsb_exp plus its position and keeps the next 7 bits (truncation). Results
// below the normal range flush to zero, above it saturate. Combinational.
module int_to_fp
  import opal_pkg::*;
#(
  parameter int W = ACC_W
) (
  input  logic signed [W-1:0] v,
  input  logic signed [11:0]  lsb_exp,
  output bf16_t               f
);
  always_comb begin
    logic [W-1:0]  mag;
    logic [W+6:0]  norm;
    int            p;
    mag = v[W-1] ? W'(-v) : W'(v);
    p = 0;
    for (int i = 0; i < W; i++) if (mag[i]) p = i;
    norm = {mag, 7'd0} >> p;                  // leading one lands on bit 7
    if (mag == '0) f = 16'h0000;
    else           f = bf16_pack(v[W-1], int'(lsb_exp) + p, norm[6:0]);
  end
endmodule
