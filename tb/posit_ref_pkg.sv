// posit_ref_pkg: reference model for testbenches, independent of the RTL.
//
// Converts between IEEE doubles and n-bit posits (es = 2) by writing the
// regime, exponent and mantissa bits one at a time into a bit list and
// rounding the list to nearest, ties to even. Results are exact whenever the
// value is exactly a double, which the testbenches arrange by using operands
// with short significands. Also provides helpers to draw random posits.
package posit_ref_pkg;

  localparam int N = 64;

  function automatic logic [N-1:0] nar();
    return {1'b1, {(N-1){1'b0}}};
  endfunction

  function automatic logic [N-1:0] maxpos();
    return {1'b0, {(N-1){1'b1}}};
  endfunction

  function automatic logic [N-1:0] minpos();
    return {{(N-1){1'b0}}, 1'b1};
  endfunction

  // 2^k as a double, by repeated doubling or halving.
  function automatic real pow2(int k);
    real v = 1.0;
    if (k >= 0) repeat (k) v = v * 2.0;
    else        repeat (-k) v = v / 2.0;
    return v;
  endfunction

  // Round a double to the nearest posit (ties to even, no underflow to zero).
  function automatic logic [N-1:0] from_real(real x);
    logic [63:0] bits;
    int          ex, r, e, idx, maxs;
    logic        s, guard, sticky;
    logic [51:0] man;
    bit          lst[$];
    logic [N-2:0] body;
    if (x == 0.0) return '0;
    s    = (x < 0.0);
    bits = $realtobits(s ? -x : x);
    ex   = int'(bits[62:52]) - 1023;
    man  = bits[51:0];
    maxs = 4 * (N - 2);
    if (ex >= maxs) return s ? -maxpos() : maxpos();
    if (ex < -maxs) return s ? -minpos() : minpos();
    r = (ex >= 0) ? ex / 4 : -((-ex + 3) / 4);
    e = ex - 4 * r;
    if (r >= 0) begin
      repeat (r + 1) lst.push_back(1'b1);
      lst.push_back(1'b0);
    end else begin
      repeat (-r) lst.push_back(1'b0);
      lst.push_back(1'b1);
    end
    lst.push_back(e[1]);
    lst.push_back(e[0]);
    for (int i = 51; i >= 0; i--) lst.push_back(man[i]);
    while (lst.size() < N + 1) lst.push_back(1'b0);
    body = '0;
    for (idx = 0; idx < N - 1; idx++) body = {body[N-3:0], lst[idx]};
    guard  = lst[N-1];
    sticky = 1'b0;
    for (idx = N; idx < lst.size(); idx++) sticky |= lst[idx];
    if (guard && (sticky || body[0])) body = body + 1;
    return s ? -{1'b0, body} : {1'b0, body};
  endfunction

  // Value of a posit as a double (exact for posits with <= 53 significant bits).
  function automatic real to_real(logic [N-1:0] p);
    logic [N-1:0] m;
    int  i, k, r, e;
    real f, w;
    logic r0;
    if (p == '0) return 0.0;
    m  = p[N-1] ? -p : p;
    r0 = m[N-2];
    k  = 0;
    i  = N - 2;
    while (i >= 0 && m[i] == r0) begin k++; i--; end
    i--;                                 // skip the terminating bit
    r = r0 ? k - 1 : -k;
    e = 0;
    repeat (2) begin
      e = e * 2 + ((i >= 0) ? int'(m[i]) : 0);
      i--;
    end
    f = 1.0;
    w = 0.5;
    while (i >= 0) begin
      if (m[i]) f += w;
      w /= 2.0;
      i--;
    end
    return (p[N-1] ? -f : f) * pow2(4 * r + e);
  endfunction

  // Random double with a MB-bit significand and exponent in [-emax, emax].
  function automatic real rand_real(int mb, int emax);
    real v;
    int  ex;
    longint unsigned fr;
    fr = {$urandom, $urandom};
    fr = fr >> (65 - mb);                // mb-1 random fraction bits, mb <= 53
    v  = 1.0 + real'(fr) / pow2(mb - 1);
    ex = int'($urandom_range(2 * emax, 0)) - emax;
    v  = v * pow2(ex);
    return ($urandom_range(1, 0) == 1) ? -v : v;
  endfunction

  function automatic logic [N-1:0] rand_posit(int mb, int emax);
    return from_real(rand_real(mb, emax));
  endfunction

  // Mitchell logarithm of |v|: e + f where |v| = 2^e (1 + f), 0 <= f < 1.
  function automatic real mlog(real v);
    int e = 0;
    if (v < 0.0) v = -v;
    while (v >= 2.0) begin v = v / 2.0; e++; end
    while (v < 1.0)  begin v = v * 2.0; e--; end
    return real'(e) + (v - 1.0);
  endfunction

  // Mitchell antilogarithm: 2^k (1 + x) with k = floor(l), x = l - k.
  function automatic real mexp(real l);
    real k;
    k = $floor(l);
    return pow2(int'(k)) * (1.0 + (l - k));
  endfunction

  // |a - b| as integers, for checks with an ulp tolerance.
  function automatic longint unsigned ulp_dist(logic [N-1:0] a, logic [N-1:0] b);
    return ($signed(a) > $signed(b)) ? a - b : b - a;
  endfunction

  // p is a faithful rounding of the double x: within one posit ulp of the
  // reference rounding where posits carry <= 52 fraction bits, or within a
  // relative 2^-51 of x where they carry more than a double does.
  function automatic bit close(logic [N-1:0] p, real x);
    real d, ax;
    if (ulp_dist(p, from_real(x)) <= 1) return 1'b1;
    d  = to_real(p) - x;
    ax = (x < 0.0) ? -x : x;
    return ((d < 0.0) ? -d : d) <= ax * pow2(-51);
  endfunction

  // Quire for n = 64: 1024-bit 2's complement, LSB weighs 2^-496.
  localparam int QW = 16 * N;
  localparam int QF = 8 * (N - 2);

  // Exact quire image of a double whose bits all lie at or above 2^-496.
  function automatic logic [QW-1:0] quire_of(real x);
    logic [63:0]   bits;
    logic [QW-1:0] q;
    int            ex;
    if (x == 0.0) return '0;
    bits = $realtobits(x);
    ex   = int'(bits[62:52]) - 1023;
    q    = QW'({1'b1, bits[51:0]});
    if (ex - 52 + QF >= 0) q = q << (ex - 52 + QF);
    else                   q = q >> (52 - QF - ex);
    return bits[63] ? -q : q;
  endfunction

endpackage
