// rapid_ref_pkg: bit-exact reference models of the RAPID multiplier and
// divider, written as plain integer arithmetic for the testbenches.
//
// The models follow the algorithm directly (leading-one search by a loop,
// one full-width ternary sum, Mitchell's anti-log formulas) and share nothing
// with the RTL's slice, shifter or pipeline structure; they only read the
// coefficient values and partition maps of rapid_pkg, which are the
// specification data. Also here: exact-value helpers for accuracy checks.
package rapid_ref_pkg;
  import rapid_pkg::*;

  function automatic int unsigned msb_pos(input longint unsigned v);
    int unsigned k = 0;
    for (int unsigned i = 0; i < 64; i++) if (v[i]) k = i;
    return k;
  endfunction

  // Region (0-based) of a fraction-prefix pair for a scheme.
  function automatic int unsigned region_of(input bit is_div, input int unsigned ncoef,
                                            input int unsigned p1, input int unsigned p2);
    map_row_t row;
    if (!is_div)          row = (ncoef == 3) ? MUL3_MAP[p1] : (ncoef == 10) ? MUL10_MAP[p1]
                                                                : MUL5_MAP[p1];
    else if (ncoef == 3)  row = DIV3_MAP[p1];
    else if (ncoef == 5)  row = DIV5_MAP[p1];
    else                  row = DIV9_MAP[p1];
    return int'((row >> (4 * p2)) & 64'hF);
  endfunction

  function automatic longint unsigned coef_of(input bit is_div, input int unsigned ncoef,
                                              input int unsigned r, input int unsigned fw);
    longint unsigned c;
    int unsigned ref_fw;
    ref_fw = is_div ? 16 : (ncoef == 3) ? 14 : 15;   // LSB weight of the stored values
    if (!is_div)          c = (ncoef == 3)  ? longint'(MUL3_COEF[r])
                            : (ncoef == 10) ? longint'(MUL10_COEF[r]) : longint'(MUL5_COEF[r]);
    else if (ncoef == 3)  c = longint'(DIV3_COEF[r]);
    else if (ncoef == 5)  c = longint'(DIV5_COEF[r]);
    else                  c = longint'(DIV9_COEF[r]);
    if (fw >= ref_fw) return c << (fw - ref_fw);
    return c >> (ref_fw - fw);
  endfunction

  // Approximate product of two N-bit operands (N <= 32); use_coef = 0 gives
  // plain Mitchell (for comparison). Saturates at 2^(2N) - 1.
  function automatic longint unsigned ref_mul(input longint unsigned a, input longint unsigned b,
                                              input int unsigned n, input int unsigned ncoef,
                                              input bit use_coef = 1'b1);
    int unsigned fw = n - 1, k1, k2;
    longint unsigned x1, x2, c, s;
    logic [127:0] m, p;
    if (a == 0 || b == 0) return 0;
    k1 = msb_pos(a); k2 = msb_pos(b);
    x1 = (a - (64'd1 << k1)) << (fw - k1);
    x2 = (b - (64'd1 << k2)) << (fw - k2);
    c  = use_coef ? coef_of(1'b0, ncoef, region_of(1'b0, ncoef, int'(x1 >> (fw - 4)),
                                                   int'(x2 >> (fw - 4))), fw) : 0;
    s  = x1 + x2 + c;
    if (s >= (64'd1 << fw)) m = 128'(s) << 1;
    else                    m = 128'(s) + (128'd1 << fw);
    p  = (m << (k1 + k2)) >> fw;
    if (p >= (128'd1 << (2 * n))) p = (128'd1 << (2 * n)) - 1;
    return 64'(p);
  endfunction

  // Approximate quotient of a 2N-bit dividend by an N-bit divisor, as a
  // fixed-point number with qfrac fraction bits.
  function automatic longint unsigned ref_div(input longint unsigned a, input longint unsigned b,
                                              input int unsigned n, input int unsigned ncoef,
                                              input int unsigned qfrac, input bit use_coef = 1'b1);
    int unsigned fw = 2 * n - 1, k1, k2, qw = n + qfrac;
    longint unsigned x1, x2, c, m, full, maxq;
    longint signed d;
    int signed e;
    maxq = (64'd1 << qw) - 1;
    if (b == 0) return maxq;
    if (a == 0) return 0;
    k1 = msb_pos(a); k2 = msb_pos(b);
    x1 = (a - (64'd1 << k1)) << (fw - k1);
    x2 = (b - (64'd1 << k2)) << (fw - k2);
    c  = use_coef ? coef_of(1'b1, ncoef, region_of(1'b1, ncoef, int'(x1 >> (fw - 4)),
                                                   int'(x2 >> (fw - 4))), fw) : 0;
    d  = longint'(x1) - longint'(x2) - longint'(c);
    if (d >= 0) begin m = (64'd1 << fw) + longint'(d);       e = int'(k1) - int'(k2);     end
    else        begin m = (64'd1 << (fw + 1)) + longint'(d); e = int'(k1) - int'(k2) - 1; end
    // q = m * 2^(e + qfrac) / 2^fw, truncated
    if (e + int'(qfrac) - int'(fw) >= 0) full = m << (e + int'(qfrac) - int'(fw));
    else                                 full = m >> (int'(fw) - e - int'(qfrac));
    if (full > maxq) return maxq;
    return full;
  endfunction

endpackage
