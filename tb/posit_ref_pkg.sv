// posit_ref_pkg: bit-serial reference model of posit arithmetic for the testbenches.
//
// Written independently of the RTL: words are walked bit by bit, significands are held as
// 'real', and the result is rounded by laying out the exact bit string and rounding it to
// nearest-even at position N-1, as the posit standard defines. Results are exact whenever the
// significand product or sum fits a double, which the testbenches ensure by limiting the number
// of fraction bits of the operands they generate (posits of 16 bits or fewer always qualify).
package posit_ref_pkg;

  typedef struct {
    bit  zero;
    bit  nar;
    bit  sign;
    int  scale;
    real sig;     // significand in [1,2)
  } pval_t;

  function automatic pval_t decode(logic [63:0] p, int n, int es);
    pval_t v;
    logic [63:0] m;
    int pos, l, k, e;
    bit r;
    real w;
    v.zero = 0; v.nar = 0; v.sign = 0; v.scale = 0; v.sig = 1.0;
    p = p & ((n == 64) ? 64'hFFFF_FFFF_FFFF_FFFF : ((64'd1 << n) - 1));
    if (p == 0) begin v.zero = 1; return v; end
    if (p == (64'd1 << (n - 1))) begin v.nar = 1; return v; end
    v.sign = p[n-1];
    m = v.sign ? -p : p;
    pos = n - 2;
    r = m[pos];
    l = 0;
    while (pos >= 0 && m[pos] == r) begin l++; pos--; end
    pos--;                                // terminator bit
    k = r ? l - 1 : -l;
    e = 0;
    for (int i = 0; i < es; i++) begin
      e = e * 2 + ((pos >= 0) ? int'(m[pos]) : 0);
      pos--;
    end
    w = 0.5;
    while (pos >= 0) begin
      if (m[pos]) v.sig += w;
      w = w / 2.0;
      pos--;
    end
    v.scale = k * (1 << es) + e;
    return v;
  endfunction

  function automatic logic [63:0] maxpos(int n);
    return (64'd1 << (n - 1)) - 1;
  endfunction

  function automatic logic [63:0] encode(bit sign, int scale, real sig, int n, int es);
    bit bits[$];
    int k, e, len;
    real f;
    logic [63:0] body;
    bit guard, sticky;
    k = (scale >= 0) ? scale / (1 << es) : -((-scale + (1 << es) - 1) / (1 << es));
    e = scale - k * (1 << es);
    if (k >= n - 2) body = maxpos(n);
    else if (k <= -(n - 1)) body = 1;
    else begin
      if (k >= 0) begin
        repeat (k + 1) bits.push_back(1);
        bits.push_back(0);
      end else begin
        repeat (-k) bits.push_back(0);
        bits.push_back(1);
      end
      for (int i = es - 1; i >= 0; i--) bits.push_back(e[i]);
      f = sig - 1.0;
      repeat (120) begin
        f = f * 2.0;
        if (f >= 1.0) begin bits.push_back(1); f = f - 1.0; end
        else bits.push_back(0);
      end
      sticky = (f != 0.0);
      body = 0;
      for (int i = 0; i < n - 1; i++) body = {body[62:0], bits[i]};
      guard = bits[n-1];
      for (int i = n; i < bits.size(); i++) sticky |= bits[i];
      if (guard && (sticky || body[0])) body = body + 1;
    end
    return sign ? ((-body) & ((n == 64) ? 64'hFFFF_FFFF_FFFF_FFFF : ((64'd1 << n) - 1))) : body;
  endfunction

  function automatic logic [63:0] nar(int n);
    return 64'd1 << (n - 1);
  endfunction

  function automatic logic [63:0] mul(logic [63:0] a, logic [63:0] b, int n, int es);
    pval_t x, y;
    real s;
    int sc;
    x = decode(a, n, es);
    y = decode(b, n, es);
    if (x.nar || y.nar) return nar(n);
    if (x.zero || y.zero) return 0;
    s = x.sig * y.sig;
    sc = x.scale + y.scale;
    if (s >= 2.0) begin s = s / 2.0; sc++; end
    return encode(x.sign ^ y.sign, sc, s, n, es);
  endfunction

  function automatic logic [63:0] add(logic [63:0] a, logic [63:0] b, int n, int es);
    pval_t x, y, t;
    real s;
    int sc, d;
    bit sg;
    x = decode(a, n, es);
    y = decode(b, n, es);
    if (x.nar || y.nar) return nar(n);
    if (x.zero) return b;
    if (y.zero) return a;
    if (y.scale > x.scale) begin t = x; x = y; y = t; end
    d = x.scale - y.scale;
    s = (x.sign ? -x.sig : x.sig) + (d > 1000 ? 0.0 : (y.sign ? -y.sig : y.sig) * (2.0 ** (-d)));
    if (s == 0.0) return 0;
    sc = x.scale;
    sg = (s < 0.0);
    if (sg) s = -s;
    while (s >= 2.0) begin s = s / 2.0; sc++; end
    while (s < 1.0) begin s = s * 2.0; sc--; end
    return encode(sg, sc, s, n, es);
  endfunction

  // Random operand with at most 'fb' fraction bits and a scale spread over +-'range_' .
  function automatic logic [63:0] rand_posit(int n, int es, int fb, int range_);
    int sc;
    real sig;
    sc = int'($urandom_range(2 * range_)) - range_;
    sig = 1.0 + real'($urandom_range((1 << fb) - 1)) / real'(1 << fb);
    return encode(1'($urandom_range(1)), sc, sig, n, es);
  endfunction

endpackage
