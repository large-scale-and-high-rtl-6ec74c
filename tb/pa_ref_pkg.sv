// pa_ref_pkg: reference arithmetic for the testbenches, written without any
// of the hardware's structure. Numbers are dynamic arrays of 24-bit words,
// lowest word first. Multiplication is schoolbook (skipping zero words of the
// second operand, so sparse operands are cheap at full size), reduction
// modulo 2^gamma - 1 adds gamma-bit slices of the value with end-around
// carry.
package pa_ref_pkg;
  typedef int unsigned bn_t[];

  function automatic bit bn_bit(const ref bn_t v, input longint i);
    longint w;
    w = i / 24;
    if (w >= v.size()) return 1'b0;
    return 1'((v[w] >> (i % 24)) & 1);
  endfunction

  // nbits bits of v from bit position start, as ceil(nbits/24) words
  function automatic bn_t bn_slice(const ref bn_t v, input longint start, input longint nbits);
    bn_t r;
    r = new[(nbits + 23) / 24];
    foreach (r[i]) r[i] = 0;
    for (longint i = 0; i < nbits; i++)
      if (bn_bit(v, start + i)) r[i / 24] |= (1 << (i % 24));
    return r;
  endfunction

  function automatic bn_t bn_mul(const ref bn_t a, const ref bn_t b);
    longint unsigned acc[];
    bn_t r;
    longint unsigned c;
    acc = new[a.size() + b.size() + 1];
    foreach (acc[i]) acc[i] = 0;
    foreach (b[j]) if (b[j] != 0)
      foreach (a[i]) acc[i + j] += longint'(a[i]) * longint'(b[j]);
    r = new[acc.size()];
    c = 0;
    foreach (acc[i]) begin
      c += acc[i];
      r[i] = int'(c & 24'hFFFFFF);
      c >>= 24;
    end
    return r;
  endfunction

  // a + b for gamma-bit values a, b (ceil(gamma/24) words), carry out of bit
  // gamma folded back to bit 0
  function automatic bn_t bn_addmodp(const ref bn_t a, const ref bn_t b, input int gamma);
    bn_t r;
    int unsigned c, top, topmask;
    top = (gamma - 1) / 24;
    topmask = (1 << (gamma - 24 * top)) - 1;
    r = new[top + 1];
    c = 0;
    for (int i = 0; i <= top; i++) begin
      int unsigned s;
      s = a[i] + b[i] + c;
      if (i == top) begin r[i] = s & topmask; c = s >> (gamma - 24 * top); end
      else          begin r[i] = s & 24'hFFFFFF; c = s >> 24; end
    end
    while (c != 0) begin
      for (int i = 0; i <= top && c != 0; i++) begin
        int unsigned s;
        s = r[i] + c;
        if (i == top) begin r[i] = s & topmask; c = s >> (gamma - 24 * top); end
        else          begin r[i] = s & 24'hFFFFFF; c = s >> 24; end
      end
    end
    return r;
  endfunction

  function automatic bn_t bn_modp(const ref bn_t v, input int gamma);
    bn_t r, s;
    r = new[(gamma + 23) / 24];
    foreach (r[i]) r[i] = 0;
    for (longint off = 0; off < 24 * longint'(v.size()); off += gamma) begin
      s = bn_slice(v, off, gamma);
      r = bn_addmodp(r, s, gamma);
    end
    return r;
  endfunction

  // (a + c) mod 2^gamma
  function automatic bn_t bn_add_mod2(const ref bn_t a, const ref bn_t c, input int gamma);
    bn_t r, x;
    int unsigned cy;
    r = new[(gamma + 23) / 24];
    cy = 0;
    foreach (r[i]) begin
      int unsigned s;
      s = ((i < a.size()) ? a[i] : 0) + ((i < c.size()) ? c[i] : 0) + cy;
      r[i] = s & 24'hFFFFFF; cy = s >> 24;
    end
    x = bn_slice(r, 0, gamma);
    return x;
  endfunction
endpackage
