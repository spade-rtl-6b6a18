// posit_ref_pkg: reference posit arithmetic for the testbenches.
//
// Values are held exactly as 1024-bit signed fixed-point numbers with the
// binary point at bit 512 (a Kulisch accumulator), wide enough for every
// product and sum of Posit(8,0), Posit(16,1) and Posit(32,2) values. Decoding
// walks the bit string (sign, regime run, exponent, fraction); encoding
// builds the body bit by bit from the exact value and rounds to nearest,
// ties to even, never to zero or NaR, saturating at maxpos/minpos.
package posit_ref_pkg;

  localparam int FB = 512;
  typedef logic signed [1023:0] kq_t;

  function automatic int es_of_n(input int n);
    return (n == 8) ? 0 : (n == 16) ? 1 : 2;
  endfunction

  function automatic logic [31:0] lane_get(input logic [31:0] w, input int n, input int l);
    logic [31:0] m;
    m = (n == 32) ? 32'hFFFF_FFFF : ((32'd1 << n) - 1);
    return (w >> (l * n)) & m;
  endfunction

  function automatic logic [31:0] lane_set(input logic [31:0] w, input int n, input int l,
                                           input logic [31:0] val);
    logic [31:0] m;
    m = (n == 32) ? 32'hFFFF_FFFF : ((32'd1 << n) - 1);
    return (w & ~(m << (l * n))) | ((val & m) << (l * n));
  endfunction

  function automatic bit is_nar(input logic [31:0] p, input int n);
    return p == (32'd1 << (n - 1));
  endfunction

  // Scale factor of a nonzero, non-NaR posit (for stimulus filtering).
  function automatic int scale_of(input logic [31:0] p, input int n);
    logic [31:0] x;
    int i, run, k, e, es;
    es = es_of_n(n);
    x = p[n-1] ? ((~p + 1) & ((n == 32) ? 32'hFFFF_FFFF : ((32'd1 << n) - 1))) : p;
    run = 0;
    i = n - 2;
    while (i >= 0 && x[i] == x[n-2]) begin run++; i--; end
    k = x[n-2] ? run - 1 : -run;
    i--;
    e = 0;
    for (int j = 0; j < es; j++) begin
      e = e << 1;
      if (i >= 0) begin e = e | int'(x[i]); i--; end
    end
    return k * (1 << es) + e;
  endfunction

  // Exact value of posit p as mant * 2^ex with sign.
  function automatic void decode(input logic [31:0] p, input int n, output bit sgn,
                                 output longint unsigned mant, output int ex,
                                 output bit zero, output bit nar);
    logic [31:0] x;
    int i, run, k, e, es, fbits;
    longint unsigned frac;
    es = es_of_n(n);
    zero = (p == 0);
    nar  = is_nar(p, n);
    sgn  = 1'b0;
    mant = 0;
    ex   = 0;
    if (zero || nar) return;
    sgn = p[n-1];
    x = sgn ? ((~p + 1) & ((n == 32) ? 32'hFFFF_FFFF : ((32'd1 << n) - 1))) : p;
    run = 0;
    i = n - 2;
    while (i >= 0 && x[i] == x[n-2]) begin run++; i--; end
    k = x[n-2] ? run - 1 : -run;
    i--;                                   // terminator
    e = 0;
    for (int j = 0; j < es; j++) begin
      e = e << 1;
      if (i >= 0) begin e = e | int'(x[i]); i--; end
    end
    fbits = (i >= 0) ? i + 1 : 0;
    frac = 0;
    for (int j = fbits - 1; j >= 0; j--) frac = (frac << 1) | longint'(x[j]);
    mant = (64'd1 << fbits) | frac;
    ex   = k * (1 << es) + e - fbits;
  endfunction

  function automatic kq_t to_kq(input bit sgn, input longint unsigned mant, input int ex);
    kq_t v;
    v = kq_t'(mant);
    v = v <<< (FB + ex);
    return sgn ? -v : v;
  endfunction

  function automatic kq_t posit_kq(input logic [31:0] p, input int n);
    bit s, z, r;
    longint unsigned m;
    int ex;
    decode(p, n, s, m, ex, z, r);
    if (z || r) return '0;
    return to_kq(s, m, ex);
  endfunction

  function automatic kq_t mul_kq(input logic [31:0] a, input logic [31:0] b, input int n);
    bit sa, sb, za, zb, ra, rb;
    longint unsigned ma, mb;
    int ea, eb;
    decode(a, n, sa, ma, ea, za, ra);
    decode(b, n, sb, mb, eb, zb, rb);
    if (za || zb || ra || rb) return '0;
    return to_kq(sa ^ sb, ma * mb, ea + eb);
  endfunction

  // Round an exact value to the nearest posit of n bits.
  function automatic logic [31:0] encode(input kq_t v, input int n);
    kq_t a;
    int p, scale, maxs, es, k, e;
    bit sgn, guard, sticky;
    bit q[$];
    logic [31:0] body, ones, res;
    es = es_of_n(n);
    if (v == 0) return 32'd0;
    sgn = v[1023];
    a = sgn ? -v : v;
    p = 0;
    for (int i = 1023; i >= 0; i--) if (a[i]) begin p = i; break; end
    scale = p - FB;
    maxs = (n - 2) << es;
    ones = (32'd1 << (n - 1)) - 1;
    if (scale > maxs) body = ones;
    else if (scale < -maxs) body = 32'd1;
    else begin
      k = (scale >= 0) ? scale / (1 << es) : -((-scale + (1 << es) - 1) / (1 << es));
      e = scale - k * (1 << es);
      if (k >= 0) begin
        for (int i = 0; i <= k; i++) q.push_back(1'b1);
        q.push_back(1'b0);
      end else begin
        for (int i = 0; i < -k; i++) q.push_back(1'b0);
        q.push_back(1'b1);
      end
      for (int i = es - 1; i >= 0; i--) q.push_back(e[i]);
      for (int i = p - 1; i >= 0; i--) q.push_back(a[i]);
      while (q.size() < n + 1) q.push_back(1'b0);
      body = 0;
      for (int i = 0; i < n - 1; i++) body = (body << 1) | 32'(q[i]);
      guard = q[n-1];
      sticky = 0;
      for (int i = n; i < q.size(); i++) if (q[i]) sticky = 1;
      if (guard && (body[0] || sticky) && body != ones) body = body + 1;
    end
    res = sgn ? (~body + 1) : body;
    return (n == 32) ? res : (res & ((32'd1 << n) - 1));
  endfunction

  // Distance in code positions between two posits of n bits (signed order).
  function automatic int ulp_dist(input logic [31:0] a, input logic [31:0] b, input int n);
    longint sa, sb;
    sa = longint'(a) << (64 - n);
    sb = longint'(b) << (64 - n);
    sa = sa >>> (64 - n);
    sb = sb >>> (64 - n);
    return (sa > sb) ? int'(sa - sb) : int'(sb - sa);
  endfunction

endpackage
