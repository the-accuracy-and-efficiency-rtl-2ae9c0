// posit_ref_pkg: reference model for the testbenches.
//
// Independent of the RTL's algorithms: a posit is decoded by walking its
// bits, operations are done exactly on wide integers (value = sig * 2^lsb),
// and the exact result is rounded by writing out the posit bit string
// (regime, exponent, fraction) and rounding it to nearest, ties to even,
// with saturation to maxpos/minpos.  Posits of up to 64 bits are held in
// 64-bit containers.
package posit_ref_pkg;

  typedef logic [511:0] big_t;

  function automatic logic [63:0] pmask(input int ps);
    return (ps >= 64) ? '1 : ((64'd1 << ps) - 64'd1);
  endfunction

  function automatic logic [63:0] nar_of(input int ps);
    return 64'd1 << (ps - 1);
  endfunction

  function automatic logic [63:0] pneg(input logic [63:0] p, input int ps);
    return (~p + 64'd1) & pmask(ps);
  endfunction

  // value = (-1)^neg * sig * 2^(scale - fb), sig has its top bit at fb
  function automatic void ref_decode(input logic [63:0] p, input int ps, input int es,
                                     output bit zero, output bit nar, output bit neg,
                                     output int scale, output longint unsigned sig,
                                     output int fb);
    logic [63:0] x;
    int i, run, k, e;
    bit first;
    x    = p & pmask(ps);
    zero = (x == 0);
    nar  = (x == nar_of(ps));
    neg  = x[ps-1];
    if (neg) x = pneg(x, ps);
    i = ps - 2;
    first = x[i];
    run = 0;
    while (i >= 0 && x[i] == first) begin run++; i--; end
    i--;
    k = first ? run - 1 : -run;
    e = 0;
    for (int j = 0; j < es; j++) begin
      e = e * 2;
      if (i >= 0) begin e += int'(x[i]); i--; end
    end
    fb    = (i >= 0) ? i + 1 : 0;
    sig   = (64'd1 << fb) | (x & ((64'd1 << fb) - 64'd1));
    scale = k * (1 << es) + e;
  endfunction

  // Round (-1)^neg * sig * 2^lsb (+ a sticky fraction below) to a posit.
  function automatic logic [63:0] ref_round(input bit neg, input big_t sig, input int lsb,
                                            input bit sticky, input int ps, input int es);
    int msb, scale, k, e;
    bit str[$];
    logic [63:0] body;
    bit guard, st;
    if (sig == '0) return 64'd0;
    msb = 0;
    for (int i = 0; i < 512; i++) if (sig[i]) msb = i;
    scale = lsb + msb;
    k = scale >>> es;
    e = scale - k * (1 << es);
    if (k >= ps - 2) body = (64'd1 << (ps - 1)) - 64'd1;
    else if (k < -(ps - 2)) body = 64'd1;
    else begin
      if (k >= 0) begin
        repeat (k + 1) str.push_back(1'b1);
        str.push_back(1'b0);
      end else begin
        repeat (-k) str.push_back(1'b0);
        str.push_back(1'b1);
      end
      for (int j = es - 1; j >= 0; j--) str.push_back(e[j]);
      for (int j = msb - 1; j >= 0; j--) str.push_back(sig[j]);
      while (str.size() < ps + 1) str.push_back(1'b0);
      body = 0;
      for (int j = 0; j < ps - 1; j++) body = (body << 1) | 64'(str[j]);
      guard = str[ps - 1];
      st = sticky;
      for (int j = ps; j < str.size(); j++) st |= str[j];
      if (guard && (st || body[0])) body++;
    end
    return neg ? pneg(body, ps) : body;
  endfunction

  function automatic logic [63:0] ref_add(input logic [63:0] a, input logic [63:0] b,
                                          input bit sub, input int ps, input int es);
    bit za, na, sa, zb, nb, sb;
    int ca, cb, fa, fb, la, lb, lm;
    longint unsigned ga, gb;
    big_t x, y, s;
    bit neg;
    ref_decode(a, ps, es, za, na, sa, ca, ga, fa);
    ref_decode(b, ps, es, zb, nb, sb, cb, gb, fb);
    if (na || nb) return nar_of(ps);
    if (sub) sb = !sb;
    if (zb) return a & pmask(ps);
    if (za) return sub ? pneg(b, ps) : (b & pmask(ps));
    la = ca - fa;
    lb = cb - fb;
    if (la - lb > 300 || lb - la > 300) begin
      // one term is far below the other's last bit
      if (ca > cb) begin
        x = big_t'(ga) << 8;
        if (sa != sb) x = x - 1;
        return ref_round(sa, x, la - 8, 1'b1, ps, es);
      end else begin
        y = big_t'(gb) << 8;
        if (sa != sb) y = y - 1;
        return ref_round(sb, y, lb - 8, 1'b1, ps, es);
      end
    end
    lm = (la < lb) ? la : lb;
    x = big_t'(ga) << (la - lm);
    y = big_t'(gb) << (lb - lm);
    if (sa == sb) begin s = x + y; neg = sa; end
    else if (x >= y) begin s = x - y; neg = sa; end
    else begin s = y - x; neg = sb; end
    if (s == '0) return 64'd0;
    return ref_round(neg, s, lm, 1'b0, ps, es);
  endfunction

  function automatic logic [63:0] ref_mul(input logic [63:0] a, input logic [63:0] b,
                                          input int ps, input int es);
    bit za, na, sa, zb, nb, sb;
    int ca, cb, fa, fb;
    longint unsigned ga, gb;
    ref_decode(a, ps, es, za, na, sa, ca, ga, fa);
    ref_decode(b, ps, es, zb, nb, sb, cb, gb, fb);
    if (na || nb) return nar_of(ps);
    if (za || zb) return 64'd0;
    return ref_round(sa ^ sb, big_t'(ga) * big_t'(gb), (ca - fa) + (cb - fb), 1'b0, ps, es);
  endfunction

  function automatic logic [63:0] ref_div(input logic [63:0] a, input logic [63:0] b,
                                          input int ps, input int es);
    bit za, na, sa, zb, nb, sb;
    int ca, cb, fa, fb;
    longint unsigned ga, gb;
    big_t n, q, r;
    ref_decode(a, ps, es, za, na, sa, ca, ga, fa);
    ref_decode(b, ps, es, zb, nb, sb, cb, gb, fb);
    if (na || nb || zb) return nar_of(ps);
    if (za) return 64'd0;
    n = big_t'(ga) << 200;
    q = n / big_t'(gb);
    r = n % big_t'(gb);
    return ref_round(sa ^ sb, q, (ca - fa) - 200 - (cb - fb), r != '0, ps, es);
  endfunction

  function automatic logic [63:0] ref_sqrt(input logic [63:0] a, input int ps, input int es);
    bit za, na, sa;
    int ca, fa, l;
    longint unsigned ga;
    big_t d, q, t;
    ref_decode(a, ps, es, za, na, sa, ca, ga, fa);
    if (na || sa) return nar_of(ps);
    if (za) return 64'd0;
    d = big_t'(ga);
    l = ca - fa;
    if (l % 2 != 0) begin d = d << 1; l = l - 1; end
    d = d << 128;
    l = l - 128;
    q = '0;
    for (int i = 200; i >= 0; i--) begin
      t = q | (big_t'(1) << i);
      if (t * t <= d) q = t;
    end
    return ref_round(1'b0, q, l / 2, (q * q) != d, ps, es);
  endfunction

  function automatic logic [63:0] ref_from_int(input logic [31:0] x, input bit is_signed,
                                               input int ps, input int es);
    bit neg;
    logic [31:0] m;
    neg = is_signed && x[31];
    m   = neg ? -x : x;
    if (x == 0) return 64'd0;
    return ref_round(neg, big_t'(m), 0, 1'b0, ps, es);
  endfunction

  function automatic logic [31:0] ref_to_int(input logic [63:0] p, input bit to_unsigned,
                                             input bit rtz, input int ps, input int es);
    bit z, n, s;
    int c, fb, l;
    longint unsigned g;
    big_t v, ip, fr, half;
    ref_decode(p, ps, es, z, n, s, c, g, fb);
    if (n) return 32'h8000_0000;
    if (z) return 32'd0;
    if (c >= 32) begin
      if (s) return to_unsigned ? 32'd0 : 32'h8000_0000;
      return to_unsigned ? 32'hFFFF_FFFF : 32'h7FFF_FFFF;
    end
    l = c - fb;
    v = big_t'(g) << (l + 300);
    ip = v >> 300;
    fr = v & ((big_t'(1) << 300) - 1);
    half = big_t'(1) << 299;
    if (!rtz && (fr > half || (fr == half && ip[0]))) ip = ip + 1;
    if (to_unsigned) begin
      if (s) return 32'd0;
      if (ip > big_t'(32'hFFFF_FFFF)) return 32'hFFFF_FFFF;
      return ip[31:0];
    end
    if (s) begin
      if (ip > big_t'(33'h1_0000_0000) >> 1) return 32'h8000_0000;
      return -ip[31:0];
    end
    if (ip > big_t'(32'h7FFF_FFFF)) return 32'h7FFF_FFFF;
    return ip[31:0];
  endfunction

  function automatic real ref_to_real(input logic [63:0] p, input int ps, input int es);
    bit z, n, s;
    int c, fb;
    longint unsigned g;
    real r;
    ref_decode(p, ps, es, z, n, s, c, g, fb);
    if (z || n) return 0.0;
    r = real'(g);
    for (int i = 0; i < fb; i++) r = r / 2.0;
    if (c >= 0) for (int i = 0; i < c; i++) r = r * 2.0;
    else        for (int i = 0; i < -c; i++) r = r / 2.0;
    return s ? -r : r;
  endfunction

  // Random posit: mostly values near 1 (long fractions), some anywhere,
  // some special.
  function automatic logic [63:0] rand_posit(input int ps);
    logic [63:0] x;
    int sel;
    x = {$urandom(), $urandom()};
    sel = $urandom_range(0, 15);
    if (sel == 0) return 64'd0;
    if (sel == 1) return nar_of(ps);
    if (sel < 9) begin
      x[ps-2] = ~x[ps-3];           // regime of length 1 or 2
    end
    return x & pmask(ps);
  endfunction

endpackage
