// int_mu: reconfigurable INT multiply unit (one of 32 per compute lane).
//
// Four unsigned CW x CW multipliers, each with a sign XOR, are grouped by the
// mode (Fig. 7 of the paper):
//   MODE_LL  four independent products a[i] x b[i], i = 0..3, no shifts.
//   MODE_LH  two products a[p] x b[p], p = 0..1; a is high-bit: multiplier 2p
//            takes its low chunk, 2p+1 its high chunk shifted left by CW.
//   MODE_HH  one product a[0] x b[0] of two high-bit codes: lo*lo, hi*lo<<CW,
//            lo*hi<<CW and hi*hi<<2CW.
// The four signed, shifted partial products go to the lane's INT adder tree,
// which adds them; so the unit delivers 4, 2 or 1 MACs per cycle.
// Codes are sign-magnitude (sign in the top bit). With CW = 2 this is the
// paper's 3/5-bit unit with shift-by-2; CW = 3 would give its 4/7-bit variant.
// Purely combinational.
module int_mu
  import opal_pkg::*;
(
  input  mu_mode_e                           mode,
  input  logic     [MU_MULS-1:0][CODE_W-1:0] a,   // activation (or Q) codes
  input  logic     [MU_MULS-1:0][CODE_W-1:0] b,   // weight (or K) codes
  output logic signed [PP_W-1:0]             pp [MU_MULS]
);
  localparam int S = CODE_W - 1;   // sign bit position

  always_comb begin
    logic [CW-1:0]   x, y;
    logic            neg;
    int unsigned     sh;
    logic [PP_W-1:0] mag;
    for (int i = 0; i < MU_MULS; i++) begin
      unique case (mode)
        MODE_LL: begin                       // a[i] x b[i]
          x = a[i][CW-1:0]; y = b[i][CW-1:0]; sh = 0;
          neg = a[i][S] ^ b[i][S];
        end
        MODE_LH: begin                       // pair i/2: low chunk, then high chunk << CW
          x   = (i % 2 == 0) ? a[i/2][CW-1:0] : a[i/2][2*CW-1:CW];
          y   = b[i/2][CW-1:0];
          sh  = (i % 2 == 0) ? 0 : CW;
          neg = a[i/2][S] ^ b[i/2][S];
        end
        default: begin                       // lo*lo, hi*lo, lo*hi, hi*hi
          x   = (i % 2 == 0) ? a[0][CW-1:0] : a[0][2*CW-1:CW];
          y   = (i < 2)      ? b[0][CW-1:0] : b[0][2*CW-1:CW];
          sh  = (i == 0) ? 0 : (i == 3) ? 2*CW : CW;
          neg = a[0][S] ^ b[0][S];
        end
      endcase
      mag   = PP_W'(x * y) << sh;
      pp[i] = neg ? -$signed(mag) : $signed(mag);
    end
  end
endmodule
