// posit_ref_pkg: reference model of posit<16,2> for the testbenches.
//
// It works on real numbers and on the definitions of the posit standard, not
// on the shift-based datapath of the RTL:
//  * to_real decodes an n-bit posit bit by bit (regime run, two exponent bits,
//    fraction) into a real.
//  * from_real rounds a real to posit16 as the standard defines it: find the
//    two neighbouring posits u < x < w by a binary search over the ordered
//    encodings, then compare x with the value of the 17-bit posit that lies
//    between them; ties go to the even encoding. Values beyond maxpos give
//    maxpos and values between zero and minpos give minpos.
// All posit16 values and the results of add, mul, div and sqrt on them are
// exact enough in double precision for this rounding to be decided correctly.
package posit_ref_pkg;

  localparam int N = 16;

  function automatic bit is_nar(logic [N-1:0] p);
    return p == 16'h8000;
  endfunction

  // value of an n-bit posit (n <= 17) given in the low n bits of p
  function automatic real to_real(logic [16:0] p, int n);
    logic [16:0] v;
    bit   s, r0;
    int   k, i, e, m;
    real  f, val;
    v = p & ((17'd1 << n) - 1);
    if (v == 0) return 0.0;
    s = v[n-1];
    if (s) v = ((~v) + 1) & ((17'd1 << n) - 1);
    i  = n - 2;
    r0 = v[i];
    k  = 0;
    while (i >= 0 && v[i] == r0) begin k++; i--; end
    i--;                                   // skip the terminating bit
    e = 0;
    for (int j = 0; j < 2; j++) begin
      e = e * 2;
      if (i >= 0) begin e += int'(v[i]); i--; end
    end
    f = 0.0; m = 0;
    while (i >= 0) begin f = f * 2.0 + real'(v[i]); m++; i--; end
    f = 1.0 + f / (2.0 ** m);
    val = f * (2.0 ** ((r0 ? k - 1 : -k) * 4 + e));
    return s ? -val : val;
  endfunction

  function automatic logic [N-1:0] from_real(real x);
    real ax, mid, lo_v;
    int  lo, hi, md;
    logic [N-1:0] u, r;
    if (x == 0.0) return '0;
    ax = (x < 0.0) ? -x : x;
    if (ax >= to_real(17'h7fff, N)) u = 16'h7fff;
    else if (ax <= to_real(17'h0001, N)) u = 16'h0001;
    else begin
      lo = 1; hi = 32'h7fff;              // to_real(lo) <= ax < to_real(hi)
      while (hi - lo > 1) begin
        md = (lo + hi) / 2;
        if (to_real(17'(md), N) <= ax) lo = md; else hi = md;
      end
      lo_v = to_real(17'(lo), N);
      if (lo_v == ax) u = 16'(lo);
      else begin
        mid = to_real({16'(lo), 1'b1}, N + 1);
        if (ax < mid)      u = 16'(lo);
        else if (ax > mid) u = 16'(lo + 1);
        else               u = (lo % 2 == 0) ? 16'(lo) : 16'(lo + 1);
      end
    end
    r = (x < 0.0) ? (~u + 1'b1) : u;
    return r;
  endfunction

  function automatic logic [N-1:0] neg(logic [N-1:0] p);
    return ~p + 1'b1;
  endfunction

  function automatic logic [N-1:0] ref_add(logic [N-1:0] a, logic [N-1:0] b);
    if (is_nar(a) || is_nar(b)) return 16'h8000;
    return from_real(to_real(17'(a), N) + to_real(17'(b), N));
  endfunction

  function automatic logic [N-1:0] ref_mul(logic [N-1:0] a, logic [N-1:0] b);
    if (is_nar(a) || is_nar(b)) return 16'h8000;
    return from_real(to_real(17'(a), N) * to_real(17'(b), N));
  endfunction

  function automatic logic [N-1:0] ref_div(logic [N-1:0] a, logic [N-1:0] b);
    if (is_nar(a) || is_nar(b) || b == 0) return 16'h8000;
    return from_real(to_real(17'(a), N) / to_real(17'(b), N));
  endfunction

  function automatic logic [N-1:0] ref_sqrt(logic [N-1:0] a);
    if (is_nar(a) || a[N-1]) return 16'h8000;
    return from_real($sqrt(to_real(17'(a), N)));
  endfunction

  // round a real to the nearest integer, ties to even
  function automatic real round_even(real v);
    real fl, d;
    fl = $floor(v);
    d  = v - fl;
    if (d > 0.5) return fl + 1.0;
    if (d < 0.5) return fl;
    return ($floor(fl / 2.0) * 2.0 == fl) ? fl : fl + 1.0;
  endfunction

  function automatic logic [31:0] ref_p2i(logic [N-1:0] a, bit uns);
    real v;
    if (is_nar(a)) return 32'h8000_0000;
    v = round_even(to_real(17'(a), N));
    if (uns) begin
      if (v <= 0.0) return 32'h0;
      if (v >= 4294967295.0) return 32'hffff_ffff;
      return 32'(longint'(v));
    end
    if (v >= 2147483647.0) return 32'h7fff_ffff;
    if (v <= -2147483648.0) return 32'h8000_0000;
    return 32'(longint'(v));
  endfunction

  function automatic logic [N-1:0] ref_i2p(logic [31:0] x, bit uns);
    real v;
    v = uns ? real'(longint'({32'h0, x})) : real'(longint'($signed(x)));
    return from_real(v);
  endfunction

  // posit to 64-bit integer: round to nearest even, saturate, NaR -> 0x8000...0
  function automatic logic [63:0] ref_p2l(logic [N-1:0] a, bit uns);
    real v;
    if (is_nar(a)) return 64'h8000_0000_0000_0000;
    v = round_even(to_real(17'(a), N));
    if (uns) begin
      if (v <= 0.0) return 64'h0;
      if (v >= 18446744073709551616.0) return '1;
      return 64'(longint'(v));
    end
    if (v >= 9223372036854775808.0) return 64'h7fff_ffff_ffff_ffff;
    if (v <= -9223372036854775808.0) return 64'h8000_0000_0000_0000;
    return 64'(longint'(v));
  endfunction

  // 64-bit integer to posit. The magnitude is first cut to 53 bits with the
  // dropped bits ORed into the last one (round to odd), which a real holds
  // exactly; the single rounding to the posit is then still correct.
  function automatic logic [N-1:0] ref_l2p(logic [63:0] x, bit uns);
    bit          s;
    logic [63:0] m, m2;
    int          k;
    real         v;
    s  = !uns && x[63];
    m  = s ? (~x + 64'd1) : x;
    k  = 0;
    while ((m >> k) >= (64'd1 << 53)) k++;
    m2 = m >> k;
    if (k > 0 && (m & ((64'd1 << k) - 64'd1)) != 64'd0) m2 = m2 | 64'd1;
    v  = real'(longint'(m2)) * (2.0 ** k);
    return from_real(s ? -v : v);
  endfunction

  // random posit with a bias towards the special values
  function automatic logic [N-1:0] rand_posit();
    int unsigned r;
    r = $urandom_range(0, 31);
    case (r)
      0: return 16'h0000;
      1: return 16'h8000;
      2: return 16'h7fff;
      3: return 16'h0001;
      4: return 16'h8001;
      5: return 16'h4000;
      default: return 16'($urandom);
    endcase
  endfunction

endpackage
