// pa_ref_pkg: reference arithmetic for the testbenches, written independently of the RTL.
//
// GF(P) products use a plain 128-bit '%' (no special reduction). Large integers are
// little-endian bit arrays; products are schoolbook on 24-bit digits (zero digits are
// skipped, which keeps sparse full-size operands cheap); reduction modulo 2^g - 1 folds
// g-bit chunks with an end-around carry and maps 2^g - 1 to 0.
package pa_ref_pkg;

  localparam logic [63:0] RP = 64'hFFFF_FFFF_0000_0001;

  typedef bit bits_t[];
  typedef longint unsigned lu_t;

  function automatic logic [63:0] rmul(logic [63:0] a, logic [63:0] b);
    logic [127:0] pr;
    pr = {64'b0, a} * {64'b0, b};
    return 64'(pr % {64'b0, RP});
  endfunction

  function automatic logic [63:0] radd(logic [63:0] a, logic [63:0] b);
    logic [64:0] s;
    s = {1'b0, a} + {1'b0, b};
    return 64'(s % {1'b0, RP});
  endfunction

  function automatic logic [63:0] rpow(logic [63:0] b, longint unsigned e);
    logic [63:0] r;
    r = 64'd1;
    while (e != 0) begin
      if (e[0]) r = rmul(r, b);
      b = rmul(b, b);
      e = e >> 1;
    end
    return r;
  endfunction

  function automatic bits_t zeros(int n);
    bits_t r;
    r = new[n];
    foreach (r[i]) r[i] = 1'b0;
    return r;
  endfunction

  function automatic bits_t rand_bits(int n);
    bits_t r;
    r = new[n];
    foreach (r[i]) r[i] = 1'($urandom);
    return r;
  endfunction

  function automatic logic [23:0] get_digit(bits_t v, int k);
    logic [23:0] d;
    d = '0;
    for (int b = 0; b < 24; b++)
      if (24 * k + b < v.size()) d[b] = v[24 * k + b];
    return d;
  endfunction

  // Integer product, length x.size()+y.size().
  function automatic bits_t big_mul(bits_t x, bits_t y);
    int dx, dy;
    lu_t xd[], yd[], col[];
    int xnz[$], ynz[$];
    bits_t r;
    lu_t carry;
    dx = (x.size() + 23) / 24;
    dy = (y.size() + 23) / 24;
    xd = new[dx]; yd = new[dy]; col = new[dx + dy + 2];
    foreach (col[i]) col[i] = 0;
    for (int i = 0; i < dx; i++) begin xd[i] = lu_t'(get_digit(x, i)); if (xd[i] != 0) xnz.push_back(i); end
    for (int i = 0; i < dy; i++) begin yd[i] = lu_t'(get_digit(y, i)); if (yd[i] != 0) ynz.push_back(i); end
    foreach (xnz[a]) foreach (ynz[b]) col[xnz[a] + ynz[b]] += xd[xnz[a]] * yd[ynz[b]];
    r = zeros(x.size() + y.size());
    carry = 0;
    for (int k = 0; k < dx + dy + 2; k++) begin
      lu_t t;
      t = col[k] + carry;
      for (int b = 0; b < 24; b++) if (24 * k + b < r.size()) r[24 * k + b] = t[b];
      carry = t >> 24;
    end
    return r;
  endfunction

  // (a + b) mod 2^g - 1 on g-bit operands, end-around carry; not canonicalised.
  function automatic bits_t add_ea(bits_t a, bits_t b, int g);
    bits_t r;
    bit c;
    r = new[g];
    c = 0;
    for (int i = 0; i < g; i++) begin
      r[i] = a[i] ^ b[i] ^ c;
      c = (a[i] & b[i]) | (c & (a[i] ^ b[i]));
    end
    while (c) begin
      c = 1;
      for (int i = 0; i < g && c; i++) begin
        r[i] = ~r[i];
        c = ~r[i];
      end
    end
    return r;
  endfunction

  function automatic bits_t mod_mersenne(bits_t v, int g);
    bits_t r, chunk;
    bit all1;
    r = zeros(g);
    for (int s = 0; s < v.size(); s += g) begin
      chunk = zeros(g);
      for (int i = 0; i < g; i++) if (s + i < v.size()) chunk[i] = v[s + i];
      r = add_ea(r, chunk, g);
    end
    all1 = 1;
    foreach (r[i]) all1 &= r[i];
    if (all1) r = zeros(g);
    return r;
  endfunction

  // Top lrem bits of (b*y + c) mod 2^g.
  function automatic bits_t mh_ref(bits_t y, bits_t b, bits_t c, int g, int lrem);
    bits_t p, r;
    bit cy;
    p = big_mul(y, b);
    r = new[lrem];
    cy = 0;
    for (int i = 0; i < g; i++) begin
      bit s;
      s = p[i] ^ c[i] ^ cy;
      cy = (p[i] & c[i]) | (cy & (p[i] ^ c[i]));
      if (i >= g - lrem) r[i - (g - lrem)] = s;
    end
    return r;
  endfunction

endpackage
