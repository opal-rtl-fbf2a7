// tb_util_pkg: reference helpers shared by the testbenches.
//
// bfloat16 <-> real conversion written with real arithmetic (independent of
// the bit-level units in the design), a truncating real -> bfloat16 rounder,
// the value of a sign-magnitude code, and a tolerance compare.
package tb_util_pkg;
  import opal_pkg::*;

  function automatic real pow2(int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real bf2r(logic [15:0] b);
    real m;
    if (b[14:7] == 8'd0) return 0.0;
    m = 1.0 + real'(b[6:0]) / 128.0;
    m = m * pow2(int'(b[14:7]) - 127);
    return b[15] ? -m : m;
  endfunction

  // truncate a real to bfloat16 (toward zero); no subnormals
  function automatic logic [15:0] r2bf(real x);
    real a, m;
    int  e;
    logic s;
    s = (x < 0.0);
    a = s ? -x : x;
    if (a == 0.0) return 16'h0000;
    e = 0;
    m = a;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    if (e + 127 <= 0)  return 16'h0000;
    if (e + 127 >= 255) return {s, 15'h7F7F};
    return {s, 8'(e + 127), 7'($rtoi((m - 1.0) * 128.0))};
  endfunction

  function automatic int code_val(logic [CODE_W-1:0] c);
    int m;
    m = int'(c[CODE_W-2:0]);
    return c[CODE_W-1] ? -m : m;
  endfunction

  function automatic real rabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  function automatic logic [CODE_W-1:0] rand_code(int mag_bits);
    logic [CODE_W-1:0] c;
    c = '0;
    c[CODE_W-2:0] = (CODE_W-1)'($urandom_range((1 << mag_bits) - 1, 0));
    c[CODE_W-1]   = 1'($urandom);
    return c;
  endfunction

  // random bfloat16 with exponent in [elo, ehi]
  function automatic logic [15:0] rand_bf(int elo, int ehi);
    return {1'($urandom), 8'($urandom_range(ehi, elo)), 7'($urandom)};
  endfunction
endpackage
