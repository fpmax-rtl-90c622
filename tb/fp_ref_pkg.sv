// fp_ref_pkg: reference model of R = A + B * C for IEEE-754 binary formats
// (EW exponent bits, MW fraction bits, given at run time) with one
// round-to-nearest-even rounding, used by the testbenches.
//
// It works differently from the RTL on purpose: both terms are written as
// exact integers in one very wide fixed-point number whose LSB is the
// smallest product weight, 2^(2*(1-BIAS-MW)); the signed sum is formed
// exactly and rounded by locating its MSB. No alignment window, no sticky
// bit tricks. Operands and result sit in the low EW+MW+1 bits of 64.
package fp_ref_pkg;
  localparam int BW = 2 * (2047 + 52) + 8;   // wide enough for double precision

  function automatic logic [63:0] fma_ref(int EW, int MW, logic [63:0] a, logic [63:0] b, logic [63:0] c);
    logic [BW-1:0] pv, av, mv, q, low;
    logic [63:0]   fm, r, qnan;
    logic          sp, sa, sb, sc, s, rb, st;
    int            P, BIAS, EMAX, k, lsb, e, ea, eb, ec;
    logic [63:0]   fa, fb, fc;
    logic          nan_a, nan_b, nan_c, inf_a, inf_b, inf_c, z_a, z_b, z_c;
    P = MW + 1; BIAS = (1 << (EW - 1)) - 1; EMAX = (1 << EW) - 1;
    fm = (64'd1 << MW) - 1;
    fa = a & fm; fb = b & fm; fc = c & fm;
    ea = int'((a >> MW) & 64'(EMAX)); eb = int'((b >> MW) & 64'(EMAX)); ec = int'((c >> MW) & 64'(EMAX));
    sa = a[EW+MW]; sb = b[EW+MW]; sc = c[EW+MW];
    sp = sb ^ sc;
    nan_a = (ea == EMAX) && fa != 0; nan_b = (eb == EMAX) && fb != 0; nan_c = (ec == EMAX) && fc != 0;
    inf_a = (ea == EMAX) && fa == 0; inf_b = (eb == EMAX) && fb == 0; inf_c = (ec == EMAX) && fc == 0;
    z_a = (ea == 0) && fa == 0; z_b = (eb == 0) && fb == 0; z_c = (ec == 0) && fc == 0;
    qnan = (64'(EMAX) << MW) | (64'd1 << (MW - 1));
    if (nan_a || nan_b || nan_c || (inf_b && z_c) || (z_b && inf_c) ||
        ((inf_b || inf_c) && inf_a && sp != sa))
      return qnan;
    if (inf_b || inf_c) return (64'(sp) << (EW + MW)) | (64'(EMAX) << MW);
    if (inf_a)          return (64'(sa) << (EW + MW)) | (64'(EMAX) << MW);
    // significands with hidden bit; subnormals use exponent 1
    if (eb != 0) fb |= 64'd1 << MW; else eb = 1;
    if (ec != 0) fc |= 64'd1 << MW; else ec = 1;
    if (ea != 0) fa |= 64'd1 << MW; else ea = 1;
    // product weight 2^(eb+ec-2*BIAS-2*MW) -> bit position eb+ec-2
    pv = (BW'(fb) * BW'(fc)) << (eb + ec - 2);
    // addend weight 2^(ea-BIAS-MW) -> bit position ea+BIAS+MW-2
    av = BW'(fa) << (ea + BIAS + MW - 2);
    if (sp == sa)      begin mv = pv + av; s = sp; end
    else if (pv >= av) begin mv = pv - av; s = sp; end
    else               begin mv = av - pv; s = sa; end
    if (mv == 0) begin
      s = (z_a && (z_b || z_c)) ? (sp & sa) : 1'b0;
      return 64'(s) << (EW + MW);
    end
    k = 0;
    for (int i = BW - 1; i >= 0; i--) if (mv[i]) begin k = i; break; end
    lsb = k - MW;
    if (lsb < BIAS + MW - 1) lsb = BIAS + MW - 1;   // subnormal range
    q   = mv >> lsb;
    rb  = mv[lsb-1];
    low = mv & ((BW'(1) << (lsb - 1)) - 1);
    st  = (low != 0);
    if (rb && (st || q[0])) q = q + 1;
    if (q[P]) begin q = q >> 1; lsb = lsb + 1; end
    if (!q[MW]) e = 0;
    else        e = lsb + 2 - BIAS - MW;
    if (e >= EMAX) return (64'(s) << (EW + MW)) | (64'(EMAX) << MW);
    r = (64'(s) << (EW + MW)) | (64'(e) << MW) | (q[63:0] & fm);
    return r;
  endfunction
endpackage
