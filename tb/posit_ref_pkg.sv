// posit_ref_pkg: reference posit arithmetic for the testbenches.
//
// Written independently of the RTL, in the most direct way rather than the
// hardware way: a posit is decoded by walking its bits one at a time, and
// a result is encoded by writing out its regime, exponent and fraction bit
// by bit and rounding the bit string to nearest, ties to even. Products,
// sums, quotients and roots are formed exactly on wide integers (1280 bits
// for the fused multiply-add) and rounded once, so the reference is the
// correctly rounded posit result. Only PS=32 is supported.
package posit_ref_pkg;

  typedef bit [1279:0] big_t;

  localparam bit [31:0] R_NAR = 32'h8000_0000;

  // Decode: value = (-1)^sgn * sig * 2^(scale-27), sig has 28 bits, MSB=1.
  function automatic void rdecode(input bit [31:0] p, input int es,
                                  output bit zero, output bit nar, output bit sgn,
                                  output int scale, output bit [27:0] sig);
    bit [31:0] m;
    int i, run, k, e, nf;
    bit r;
    zero = (p == 0);
    nar  = (p == R_NAR);
    sgn  = p[31];
    scale = 0;
    sig = 0;
    if (zero || nar) return;
    m = sgn ? (~p + 1) : p;
    r = m[30];
    run = 0;
    i = 30;
    while (i >= 0 && m[i] == r) begin run++; i--; end
    i--;  // skip terminator
    k = r ? run - 1 : -run;
    e = 0;
    for (int j = 0; j < es; j++) begin
      e = e << 1;
      if (i >= 0) begin e = e | int'(m[i]); i--; end
    end
    sig = 28'h800_0000;
    nf = 26;
    while (i >= 0 && nf >= 0) begin
      sig[nf] = m[i];
      nf--; i--;
    end
    scale = k * (1 << es) + e;
  endfunction

  // Encode value (-1)^sgn * 1.m[126:0] * 2^scale with extra sticky.
  function automatic bit [31:0] rencode(input bit sgn, input int scale,
                                        input bit [127:0] m, input bit sticky_in,
                                        input int es);
    bit bits[$];
    int k, e;
    bit [31:0] mag;
    bit guard, sticky, lsb;
    k = (scale >= 0) ? scale / (1 << es) : -((-scale + (1 << es) - 1) / (1 << es));
    e = scale - k * (1 << es);
    if (k >= 30) mag = 32'h7fff_ffff;
    else if (k < -30) mag = 32'h1;
    else begin
      if (k >= 0) begin
        repeat (k + 1) bits.push_back(1'b1);
        bits.push_back(1'b0);
      end else begin
        repeat (-k) bits.push_back(1'b0);
        bits.push_back(1'b1);
      end
      for (int j = es - 1; j >= 0; j--) bits.push_back(e[j]);
      for (int j = 126; j >= 0; j--) bits.push_back(m[j]);
      mag = 0;
      for (int j = 0; j < 31; j++) mag = {mag[30:0], bits[j]};
      guard = bits[31];
      sticky = sticky_in;
      for (int j = 32; j < bits.size(); j++) sticky |= bits[j];
      lsb = mag[0];
      if (guard && (sticky || lsb)) mag = mag + 1;
    end
    return sgn ? (~mag + 1) : mag;
  endfunction

  // Position of the most significant set bit (-1 if none).
  function automatic int msb(input big_t v);
    for (int i = 1279; i >= 0; i--) if (v[i]) return i;
    return -1;
  endfunction

  // Round an exact (-1)^sgn * M * 2^lsb (M on a big integer) to a posit.
  function automatic bit [31:0] rround(input bit sgn, input big_t mbig, input int lsb,
                                       input bit sticky_in, input int es);
    int pos;
    bit [127:0] m;
    bit sticky;
    big_t lowmask;
    pos = msb(mbig);
    if (pos < 0) return 32'h0;
    sticky = sticky_in;
    if (pos >= 127) begin
      lowmask = (big_t'(1) << (pos - 127)) - 1;
      sticky |= |(mbig & lowmask);
      m = 128'(mbig >> (pos - 127));
    end else begin
      m = 128'(mbig << (127 - pos));
    end
    return rencode(sgn, lsb + pos, m, sticky, es);
  endfunction

  function automatic bit [31:0] rfma(input bit [31:0] a, input bit [31:0] b,
                                     input bit [31:0] c, input bit ng, input bit sub,
                                     input int es);
    bit za, na, sa, zb, nb, sb, zc, nc, sc;
    int ea, eb, ec, lp, lc, lmin;
    bit [27:0] fa, fb, fc;
    big_t mp, mc, res;
    bit sp, s3, sr;
    bit pz;
    rdecode(a, es, za, na, sa, ea, fa);
    rdecode(b, es, zb, nb, sb, eb, fb);
    rdecode(c, es, zc, nc, sc, ec, fc);
    if (na || nb || nc) return R_NAR;
    pz = za || zb;
    sp = sa ^ sb ^ ng;
    s3 = sc ^ sub ^ ng;
    if (pz && zc) return 32'h0;
    lp = (ea - 27) + (eb - 27);
    lc = ec - 27;
    if (pz) lmin = lc;
    else if (zc) lmin = lp;
    else lmin = (lp < lc) ? lp : lc;
    mp = pz ? big_t'(0) : (big_t'(fa) * big_t'(fb)) << (lp - lmin);
    mc = zc ? big_t'(0) : big_t'(fc) << (lc - lmin);
    if (sp == s3) begin
      res = mp + mc; sr = sp;
    end else if (mp >= mc) begin
      res = mp - mc; sr = sp;
    end else begin
      res = mc - mp; sr = s3;
    end
    return rround(sr, res, lmin, 1'b0, es);
  endfunction

  function automatic bit [31:0] rdiv(input bit [31:0] a, input bit [31:0] b, input int es);
    bit za, na, sa, zb, nb, sb;
    int ea, eb;
    bit [27:0] fa, fb;
    big_t q, r;
    rdecode(a, es, za, na, sa, ea, fa);
    rdecode(b, es, zb, nb, sb, eb, fb);
    if (na || nb || zb) return R_NAR;
    if (za) return 32'h0;
    q = (big_t'(fa) << 200) / big_t'(fb);
    r = (big_t'(fa) << 200) % big_t'(fb);
    return rround(sa ^ sb, q, ea - eb - 200, r != 0, es);
  endfunction

  function automatic bit [31:0] rsqrt(input bit [31:0] a, input int es);
    bit za, na, sa;
    int ea, s;
    bit [27:0] fa;
    big_t x, root, bitv, rem;
    rdecode(a, es, za, na, sa, ea, fa);
    if (na || sa) return R_NAR;
    if (za) return 32'h0;
    // value = fa * 2^(ea-27); choose s so that (ea-27-s) is even
    s = ((ea - 27 - 160) % 2 == 0) ? 160 : 161;
    x = big_t'(fa) << s;
    // restoring bit-by-bit integer square root
    root = 0;
    rem = x;
    bitv = big_t'(1) << 400;
    while (bitv > x) bitv = bitv >> 2;
    while (bitv != 0) begin
      if (rem >= root + bitv) begin
        rem = rem - (root + bitv);
        root = (root >> 1) + bitv;
      end else begin
        root = root >> 1;
      end
      bitv = bitv >> 2;
    end
    return rround(1'b0, root, (ea - 27 - s) / 2, rem != 0, es);
  endfunction

  function automatic bit [31:0] ritop(input bit [31:0] i, input bit u, input int es);
    bit s;
    bit [31:0] m;
    s = i[31] & ~u;
    m = s ? (~i + 1) : i;
    if (m == 0) return 32'h0;
    return rround(s, big_t'(m), 0, 1'b0, es);
  endfunction

  // Posit to integer, RISC-V saturation rules; rtz selects round-to-zero.
  function automatic bit [31:0] rptoi(input bit [31:0] a, input bit u, input bit rtz,
                                      input int es);
    bit z, n, s;
    int e;
    bit [27:0] f;
    big_t v, ip, frac, half;
    longint unsigned mag;
    rdecode(a, es, z, n, s, e, f);
    if (n) return u ? 32'hffff_ffff : 32'h7fff_ffff;
    if (z) return 0;
    // value = f * 2^(e-27); fixed point with 300 fractional bits
    v = big_t'(f) << (300 + e - 27);
    ip = v >> 300;
    frac = v & ((big_t'(1) << 300) - 1);
    half = big_t'(1) << 299;
    if (!rtz && (frac > half || (frac == half && ip[0]))) ip = ip + 1;
    if (ip > big_t'(64'hffff_ffff_ffff)) mag = 64'hffff_ffff_ffff;
    else mag = 64'(ip);
    if (u) begin
      if (s) return (mag == 0) ? 32'h0 : 32'h0;
      return (mag > 64'hffff_ffff) ? 32'hffff_ffff : 32'(mag);
    end
    if (s) return (mag > 64'h8000_0000) ? 32'h8000_0000 : 32'(-mag);
    return (mag > 64'h7fff_ffff) ? 32'h7fff_ffff : 32'(mag);
  endfunction

  // Re-encode a posit from one es to another, correctly rounded.
  function automatic bit [31:0] rcvtes(input bit [31:0] a, input int from_es, input int to_es);
    bit z, n, s;
    int e;
    bit [27:0] f;
    rdecode(a, from_es, z, n, s, e, f);
    if (n) return R_NAR;
    if (z) return 0;
    return rround(s, big_t'(f), e - 27, 1'b0, to_es);
  endfunction

  // Random posit with a bias towards special and extreme values.
  function automatic bit [31:0] rand_posit();
    int sel;
    bit [31:0] v;
    sel = $urandom_range(0, 19);
    v = $urandom;
    case (sel)
      0: return 32'h0;
      1: return R_NAR;
      2: return 32'h7fff_ffff;
      3: return 32'h0000_0001;
      4: return 32'h8000_0001;
      5: return 32'hffff_ffff;
      6, 7, 8: return {v[31], ~v[30], v[29:0]} ^ 32'h0; // any
      9, 10, 11, 12: return {v[31], v[31] ? 2'b10 : 2'b01, v[28:0]}; // near 1.0
      default: return v;
    endcase
  endfunction

endpackage
