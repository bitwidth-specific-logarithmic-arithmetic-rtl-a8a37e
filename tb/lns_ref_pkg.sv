// lns_ref_pkg: reference model of the QAA-LNS arithmetic for the testbenches.
//
// Written independently of the RTL: words are handled as integers, the bin
// search is a linear scan, shifts are done as real multiplications by 2^k
// followed by floor.  Only the coefficient tables are shared with the RTL
// (lns_pkg), since they are the specification of the approximation.  Real-
// valued helpers convert between linear values and LNS words (round to
// nearest, clip to the T-bit range) so tests can also measure accuracy
// against exact arithmetic.
package lns_ref_pkg;
  import lns_pkg::*;

  typedef struct {
    bit zero;
    bit sign;
    int mag;
  } ref_lns_t;

  function automatic longint pack(input ref_lns_t v, input int t);
    longint m = (longint'(v.mag) & ((64'sd1 <<< t) - 1));
    return (longint'(v.zero) <<< (t+1)) | (longint'(v.sign) <<< t) | m;
  endfunction

  function automatic ref_lns_t unpack(input longint w, input int t);
    ref_lns_t v;
    longint m = w & ((64'sd1 <<< t) - 1);
    if (m >= (64'sd1 <<< (t-1))) m = m - (64'sd1 <<< t);
    v.zero = w[t+1];
    v.sign = w[t];
    v.mag  = int'(m);
    return v;
  endfunction

  function automatic int sat(input longint v, input int t);
    longint mx = (64'sd1 <<< (t-1)) - 1;
    longint mn = -(64'sd1 <<< (t-1));
    if (v > mx) return int'(mx);
    if (v < mn) return int'(mn);
    return int'(v);
  endfunction

  function automatic ref_lns_t zero_word();
    ref_lns_t v;
    v.zero = 1; v.sign = 0; v.mag = 0;
    return v;
  endfunction

  function automatic ref_lns_t ref_mul(input ref_lns_t a, input ref_lns_t b, input int t);
    ref_lns_t p;
    if (a.zero || b.zero) return zero_word();
    p.zero = 0;
    p.sign = a.sign != b.sign;
    p.mag  = sat(longint'(a.mag) + longint'(b.mag), t);
    return p;
  endfunction

  // Delta in units of 2^-F for integer distance d >= 0
  function automatic int ref_delta(input int d, input bit sub, input int f);
    pwl_tab_t tab = pwl_table(f, sub);
    int seg = 0;
    real prod;
    int term;
    if (d >= 12 * (1 << f)) return 0;
    for (int i = 0; i < 16; i++)
      if (d >= int'(tab[i].lo)) seg = i;
    prod = $floor(real'(d) * (2.0 ** real'(int'(tab[seg].k))));
    term = int'(prod) * int'(tab[seg].sgn);
    return term + int'(tab[seg].off);
  endfunction

  function automatic ref_lns_t ref_add(input ref_lns_t x, input ref_lns_t y, input int t, input int f);
    ref_lns_t z;
    int d, mx;
    if (x.zero) return y;
    if (y.zero) return x;
    d  = (x.mag >= y.mag) ? x.mag - y.mag : y.mag - x.mag;
    mx = (x.mag >= y.mag) ? x.mag : y.mag;
    if (x.sign != y.sign && d == 0) return zero_word();
    z.zero = 0;
    z.sign = (x.mag >= y.mag) ? x.sign : y.sign;
    z.mag  = sat(longint'(mx) + longint'(ref_delta(d, x.sign != y.sign, f)), t);
    return z;
  endfunction

  // linear value -> LNS word (Eq. 2 with T-bit clipping)
  function automatic ref_lns_t from_real(input real x, input int t, input int f);
    ref_lns_t v;
    real l;
    if (x == 0.0) return zero_word();
    l = $ln(x < 0 ? -x : x) / $ln(2.0) * (2.0 ** f);
    v.zero = 0;
    v.sign = x < 0;
    v.mag  = sat(longint'($floor(l + 0.5)), t);
    return v;
  endfunction

  function automatic real to_real(input ref_lns_t v, input int f);
    real m;
    if (v.zero) return 0.0;
    m = 2.0 ** (real'(v.mag) / (2.0 ** f));
    return v.sign ? -m : m;
  endfunction

  // exact Delta+/- in log2 units
  function automatic real true_delta(input real d, input bit sub);
    if (sub) return $ln(1.0 - 2.0 ** (-d)) / $ln(2.0);
    return $ln(1.0 + 2.0 ** (-d)) / $ln(2.0);
  endfunction
endpackage
