// opal_pkg: types, sizes and bfloat16 arithmetic shared by the OPAL core.
//
// MX-OPAL blocks hold K_BLK = 128 elements. Non-outliers are sign-magnitude
// integer codes; the N_OL = 4 largest-magnitude elements are kept as bfloat16
// outliers with their 7-bit position. A block carries a 4-bit offset that is
// added to an 8-bit tensor-wise global scale to give the block's shared
// exponent. These numbers follow the paper.
//
// The INT multiply units work on chunks of CW magnitude bits. CW = 2 gives the
// 3-bit (low) / 5-bit (high) formats the paper draws (sign + 2 or 4 magnitude
// bits); CW = 3 gives its 4/7-bit variant. Every code field is CODE_W = 1+2*CW
// bits wide: the sign is the top bit, a low-bit code only uses the lowest CW
// magnitude bits.
//
// The bfloat16 functions are this design's own simple units: no subnormals
// (exponent 0 reads as zero), no infinities or NaN (exponent 255 is treated as
// an ordinary large number and results saturate to the largest finite value),
// and results are truncated, not rounded.
package opal_pkg;

  localparam int K_BLK   = 128;          // elements per MX-OPAL block
  localparam int N_OL    = 4;            // preserved outliers per block
  localparam int IDX_W   = $clog2(K_BLK);
  localparam int CW      = 2;            // magnitude bits of one multiplier chunk
  localparam int CODE_W  = 1 + 2*CW;     // sign + high-bit magnitude
  localparam int MU_MULS = 4;            // INT multipliers per INT MU
  localparam int N_MU    = 32;           // INT MUs per compute lane
  localparam int PP_W    = 4*CW + 1;     // signed shifted partial product
  localparam int ACC_W   = 4*CW + 10;    // lane accumulator: 128 products x 4 phases

  typedef logic [15:0] bf16_t;

  // INT MU operating modes (Fig. 7 of the paper): pairs per INT MU 4 / 2 / 1.
  typedef enum logic [1:0] {
    MODE_LL = 2'd0,   // low-bit weight  x low-bit activation
    MODE_LH = 2'd1,   // low-bit weight  x high-bit activation
    MODE_HH = 2'd2    // high-bit operand x high-bit operand (Q x K^T)
  } mu_mode_e;

  // One MX-OPAL block (or an OWQ weight row slice in the same layout).
  typedef struct packed {
    logic [K_BLK-1:0][CODE_W-1:0] code;     // sign-magnitude codes, outlier slots ignored
    logic [3:0]                   offset;   // block offset to the global scale
    logic [N_OL-1:0][IDX_W-1:0]   ol_idx;   // outlier positions
    bf16_t [N_OL-1:0]             ol_val;   // outlier values
    logic [N_OL-1:0]              ol_valid; // outlier slot in use
  } mx_block_t;

  // What a data distributor hands its compute lane each cycle: the INT
  // operands of all 32 INT MUs for one phase, and the outlier operand pairs.
  typedef struct packed {
    logic                                     valid;    // a phase is presented
    logic                                     first;    // first phase of a block
    logic                                     last;     // last phase of a block
    logic                                     grp_last; // block closes an output element
    mu_mode_e                                 mode;
    logic [N_MU-1:0][MU_MULS-1:0][CODE_W-1:0] a;
    logic [N_MU-1:0][MU_MULS-1:0][CODE_W-1:0] b;
    bf16_t [N_OL-1:0]                         fp_a;     // outlier activations
    bf16_t [N_OL-1:0]                         fp_b;     // matching weights
    logic  [N_OL-1:0]                         fp_en;
    logic signed [11:0]                       lsb_exp;  // biased exponent of one product LSB
  } lane_feed_t;

  // Phases a 128-element block needs in each mode (128 / (32 MUs x pairs per MU)).
  function automatic int unsigned phases(mu_mode_e m);
    case (m)
      MODE_LL: return 1;
      MODE_LH: return 2;
      default: return 4;
    endcase
  endfunction

  // Magnitude bits of operand A (activation / Q) and operand B (weight / K).
  function automatic int unsigned mag_bits_a(mu_mode_e m);
    return (m == MODE_LL) ? CW : 2*CW;
  endfunction
  function automatic int unsigned mag_bits_b(mu_mode_e m);
    return (m == MODE_HH) ? 2*CW : CW;
  endfunction

  // Pack sign, biased exponent and 7 mantissa bits; flushes to zero below the
  // normal range and saturates above it.
  function automatic bf16_t bf16_pack(logic s, int e, logic [6:0] m);
    bf16_t r;
    if (e <= 0)        r = 16'h0000;
    else if (e >= 255) r = {s, 8'hFE, 7'h7F};
    else               r = {s, e[7:0], m};
    return r;
  endfunction

  function automatic bf16_t bf16_mul(bf16_t a, bf16_t b);
    logic [15:0] p;
    int          e;
    bf16_t       r;
    p = {8'd0, 1'b1, a[6:0]} * {8'd0, 1'b1, b[6:0]};
    e = int'(a[14:7]) + int'(b[14:7]) - 127;
    if (a[14:7] == 8'd0 || b[14:7] == 8'd0) r = 16'h0000;
    else if (p[15])                        r = bf16_pack(a[15] ^ b[15], e + 1, p[14:8]);
    else                                   r = bf16_pack(a[15] ^ b[15], e, p[13:7]);
    return r;
  endfunction

  // Adds with three guard bits kept after alignment, then truncates.
  function automatic bf16_t bf16_add(bf16_t a, bf16_t b);
    bf16_t       x, y, r;
    logic [11:0] mx, my, sum, dif, nrm;
    int          d, e, lz;
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d   = int'(x[14:7]) - int'(y[14:7]);
    mx  = {1'b0, 1'b1, x[6:0], 3'b000};
    my  = (d > 11 || y[14:7] == 8'd0) ? 12'd0 : ({1'b0, 1'b1, y[6:0], 3'b000} >> d);
    e   = int'(x[14:7]);
    sum = mx + my;
    dif = mx - my;
    lz  = 11;
    for (int i = 0; i <= 10; i++) if (dif[i]) lz = 10 - i;
    nrm = dif << lz;
    if (x[14:7] == 8'd0)     r = 16'h0000;           // both operands zero
    else if (x[15] == y[15]) r = sum[11] ? bf16_pack(x[15], e + 1, sum[10:4])
                                         : bf16_pack(x[15], e, sum[9:3]);
    else if (dif == 12'd0)   r = 16'h0000;
    else                     r = bf16_pack(x[15], e - lz, nrm[9:3]);
    return r;
  endfunction

  // Value of a sign-magnitude code times 2^(lsb_exp - 127) as bfloat16.
  function automatic bf16_t code_to_bf16(logic [CODE_W-1:0] c, int lsb_exp);
    logic [CODE_W-2:0] mag;
    logic [7:0]        norm;
    int                p;
    bf16_t             r;
    mag = c[CODE_W-2:0];
    p = 0;
    for (int i = 0; i < CODE_W-1; i++) if (mag[i]) p = i;
    norm = 8'(mag) << (7 - p);
    if (mag == '0) r = 16'h0000;
    else           r = bf16_pack(c[CODE_W-1], lsb_exp + p, norm[6:0]);
    return r;
  endfunction

endpackage
