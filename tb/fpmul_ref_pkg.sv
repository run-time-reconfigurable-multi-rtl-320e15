// fpmul_ref_pkg -- reference arithmetic for the testbenches of the
// multi-precision floating point multiplier.
//
// The functions here compute the expected results straight from the number
// values, with wide integer products and explicit exponent arithmetic, and
// share no code with the design:
//   ref_round(w, mw)    a double word rounded to an mw-bit mantissa
//                       (nearest, ties away from zero; infinities and NaNs
//                       truncated, a NaN kept a NaN)
//   ref_mul(a, b, mw)   the product of two words whose mantissas are used to
//                       mw bits, truncated to mw bits, in double layout
//   ref_auto_w(man)     the mantissa width the auto mode needs for one operand
//   ref_flags(w)        {zero, infinity, nan, denormal} of a double word
package fpmul_ref_pkg;

  function automatic int unsigned ref_mode_w(int unsigned code);
    case (code)
      1: return 8;
      2: return 16;
      3: return 23;
      4: return 36;
      default: return 52;
    endcase
  endfunction

  function automatic logic [63:0] ref_round(logic [63:0] w, int unsigned mw);
    logic [10:0] e;
    logic [52:0] k;  // kept bits, one spare bit on top
    e = w[62:52];
    if (mw >= 52) return w;
    k = 53'(w[51:0] >> (52 - mw));
    if (e == 11'h7ff) begin
      if (w[51:0] != 0 && k == 0) k = 1;
    end else begin
      k = k + 53'(w[51 - mw]);
      if (k == (53'(1) << mw)) begin
        k = 0;
        e = e + 1;
      end
    end
    return {w[63], e, 52'(k << (52 - mw))};
  endfunction

  function automatic logic [63:0] ref_mul(logic [63:0] a, logic [63:0] b, int unsigned mw);
    logic        s;
    int          ea, eb, E, L, sh;
    logic [52:0] ma, mb;
    logic [105:0] prod, frac;
    logic [51:0] man;
    logic        a_nan, b_nan, a_inf, b_inf, a_z, b_z;
    s  = a[63] ^ b[63];
    ea = int'(a[62:52]);
    eb = int'(b[62:52]);
    ma = 53'(a[51:0] >> (52 - mw));
    mb = 53'(b[51:0] >> (52 - mw));
    a_nan = (ea == 2047) && (ma != 0);
    b_nan = (eb == 2047) && (mb != 0);
    a_inf = (ea == 2047) && (ma == 0);
    b_inf = (eb == 2047) && (mb == 0);
    a_z   = (ea == 0) && (ma == 0);
    b_z   = (eb == 0) && (mb == 0);
    if (a_nan || b_nan || (a_inf && b_z) || (b_inf && a_z))
      return {s, 11'h7ff, 52'(53'(1) << (mw - 1)) << (52 - mw)};
    if (a_inf || b_inf) return {s, 11'h7ff, 52'd0};
    if (ea != 0) ma = ma | (53'(1) << mw); else ea = 1;
    if (eb != 0) mb = mb | (53'(1) << mw); else eb = 1;
    prod = 106'(ma) * 106'(mb);
    if (prod == 0) return {s, 63'd0};
    L = 0;
    for (int i = 0; i < 106; i++) if (prod[i]) L = i;
    E = ea + eb - 1023 + L - 2 * int'(mw);
    if (E >= 2047) return {s, 11'h7ff, 52'd0};
    if (E >= 1) begin
      frac = prod - (106'(1) << L);
      if (L >= int'(mw)) frac = frac >> (L - int'(mw));
      else               frac = frac << (int'(mw) - L);
      man = 52'(frac);
      return {s, 11'(E), man << (52 - mw)};
    end
    sh = ea + eb - 1024 - int'(mw);  // denormal: stored value = prod * 2^sh
    if (sh >= 0) frac = prod << sh;
    else if (-sh >= 106) frac = 0;
    else frac = prod >> (-sh);
    man = 52'(frac);
    return {s, 11'd0, man << (52 - mw)};
  endfunction

  // Width needed by one mantissa under the auto-mode rule.
  function automatic int unsigned ref_auto_w(logic [51:0] man);
    int p;
    bit ok;
    p = -1;
    for (int i = 51; i >= 0; i--) begin
      if (man[i]) begin
        ok = 1;
        for (int j = 1; j <= 6; j++) if (i - j >= 0 && man[i-j]) ok = 0;
        if (ok) begin
          p = 51 - i;
          break;
        end
      end
    end
    if (p < 8) return 8;
    if (p < 16) return 16;
    if (p < 23) return 23;
    if (p < 36) return 36;
    return 52;
  endfunction

  function automatic int unsigned ref_w_code(int unsigned w);
    case (w)
      8: return 1;
      16: return 2;
      23: return 3;
      36: return 4;
      default: return 5;
    endcase
  endfunction

  function automatic logic [3:0] ref_flags(logic [63:0] w);
    logic ez, eo, mz;
    ez = (w[62:52] == 0);
    eo = (w[62:52] == 11'h7ff);
    mz = (w[51:0] == 0);
    return {ez & mz, eo & mz, eo & ~mz, ez & ~mz};
  endfunction

  // A random double word, biased towards the interesting corners.
  function automatic logic [63:0] rand_word();
    logic [63:0] w;
    int unsigned k;
    w = {$urandom, $urandom};
    k = $urandom_range(0, 15);
    case (k)
      0: w[62:52] = 0;                               // denormal / zero
      1: w[62:52] = 11'h7ff;                         // inf / NaN
      2: w[51:0] = 0;                                // exact power of two
      3: w[62:52] = 11'($urandom_range(1, 40));      // tiny: underflow
      4: w[62:52] = 11'($urandom_range(2000, 2046)); // huge: overflow
      5: w[51:0] = {8'($urandom_range(0, 255)), 44'd0};  // short mantissa
      6: w[51:0] = '1;                               // rounds up
      7: w = 64'd0;
      8: w[62:0] = {11'h7ff, 52'd0};                 // infinity
      default: w[62:52] = 11'($urandom_range(900, 1150));
    endcase
    return w;
  endfunction

endpackage
