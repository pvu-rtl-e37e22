// posit_ref_pkg: bit-serial reference model of posit<n,es> arithmetic (n <= 32)
// for the testbenches. It is written independently of the RTL: decoding walks
// the bit string one bit at a time, the operations are exact on 1024-bit
// integers (division keeps 200 extra quotient bits and a remainder flag), and
// encoding writes the regime, exponent and fraction bits one after another,
// then rounds the bit string to nearest, ties to even, with saturation to
// maxpos/minpos, as the 2022 posit standard defines it. NaR is 1000...0.
// Values are sig * 2^(scale-32): the hidden bit of sig is bit 32.
package posit_ref_pkg;

  typedef logic [1023:0] big_t;

  typedef struct {
    bit     sign;
    bit     zero;
    bit     nar;
    int     scale;
    longint unsigned sig;
  } ref_pir_t;

  function automatic logic [31:0] mask_n(input int n);
    return (n == 32) ? 32'hFFFF_FFFF : ((32'd1 << n) - 32'd1);
  endfunction

  function automatic logic [31:0] nar_of(input int n);
    return 32'd1 << (n - 1);
  endfunction

  function automatic ref_pir_t ref_decode(input logic [31:0] p_in, input int n, input int es);
    ref_pir_t r;
    logic [31:0] p;
    int i, m, k, e, pos;
    bit r0;
    p = p_in & mask_n(n);
    r.sign = 0; r.zero = 0; r.nar = 0; r.scale = 0; r.sig = 0;
    if (p == 0)           begin r.zero = 1; return r; end
    if (p == nar_of(n))   begin r.nar  = 1; return r; end
    r.sign = p[n-1];
    if (r.sign) p = (~p + 1) & mask_n(n);
    i  = n - 2;
    r0 = p[i];
    m  = 0;
    while (i >= 0 && p[i] == r0) begin m++; i--; end
    i--;                                   // terminating bit
    k = r0 ? m - 1 : -m;
    e = 0;
    for (int j = 0; j < es; j++) begin
      e = (e << 1) | ((i >= 0) ? int'(p[i]) : 0);
      i--;
    end
    r.sig = 64'd1 << 32;
    pos = 31;
    while (i >= 0) begin
      if (p[i]) r.sig |= (64'd1 << pos);
      pos--; i--;
    end
    r.scale = k * (1 << es) + e;
    return r;
  endfunction

  // value = mant * 2^e2 (plus a tiny positive remainder when stk_in)
  function automatic logic [31:0] ref_encode(input bit sign, input big_t mant, input int e2,
                                             input bit stk_in, input int n, input int es);
    int msb, scale, k, e, len;
    logic [31:0] body;
    bit str [$];
    bit guard, stk;
    if (mant == 0) return 32'd0;
    msb = 0;
    for (int i = 0; i < 1024; i++) if (mant[i]) msb = i;
    scale = e2 + msb;
    k = scale >>> es;
    e = scale - k * (1 << es);
    if (k >= n - 2) body = mask_n(n - 1);
    else if (k < -(n - 2)) body = 1;
    else begin
      if (k >= 0) begin
        for (int i = 0; i <= k; i++) str.push_back(1'b1);
        str.push_back(1'b0);
      end else begin
        for (int i = 0; i < -k; i++) str.push_back(1'b0);
        str.push_back(1'b1);
      end
      for (int j = es - 1; j >= 0; j--) str.push_back(e[j]);
      for (int i = msb - 1; i >= 0; i--) str.push_back(mant[i]);
      while (str.size() < n + 1) str.push_back(1'b0);
      body = 0;
      for (int i = 0; i < n - 1; i++) body = (body << 1) | 32'(str[i]);
      guard = str[n-1];
      stk = stk_in;
      len = str.size();
      for (int i = n; i < len; i++) stk |= str[i];
      if (guard && (body[0] || stk)) body = body + 1;
    end
    return sign ? ((~body + 1) & mask_n(n)) : body;
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b,
                                          input bit sub, input int n, input int es);
    ref_pir_t x, y;
    int emin;
    big_t ma, mb, m;
    bit s, sy;
    x = ref_decode(a, n, es);
    y = ref_decode(b, n, es);
    if (x.nar || y.nar) return nar_of(n);
    sy = y.sign ^ sub;
    if (x.zero && y.zero) return 0;
    if (x.zero) return ref_encode(sy, big_t'(y.sig), y.scale - 32, 0, n, es);
    if (y.zero) return a & mask_n(n);
    emin = (x.scale < y.scale) ? x.scale : y.scale;
    ma = big_t'(x.sig) << (x.scale - emin);
    mb = big_t'(y.sig) << (y.scale - emin);
    if (x.sign == sy) begin m = ma + mb; s = x.sign; end
    else if (ma >= mb) begin m = ma - mb; s = x.sign; end
    else begin m = mb - ma; s = sy; end
    return ref_encode(s, m, emin - 32, 0, n, es);
  endfunction

  function automatic logic [31:0] ref_mul(input logic [31:0] a, input logic [31:0] b,
                                          input int n, input int es);
    ref_pir_t x, y;
    x = ref_decode(a, n, es);
    y = ref_decode(b, n, es);
    if (x.nar || y.nar) return nar_of(n);
    if (x.zero || y.zero) return 0;
    return ref_encode(x.sign ^ y.sign, big_t'(x.sig) * big_t'(y.sig),
                      x.scale + y.scale - 64, 0, n, es);
  endfunction

  function automatic logic [31:0] ref_div(input logic [31:0] a, input logic [31:0] b,
                                          input int n, input int es);
    ref_pir_t x, y;
    big_t num, q, rm;
    x = ref_decode(a, n, es);
    y = ref_decode(b, n, es);
    if (x.nar || y.nar || y.zero) return nar_of(n);
    if (x.zero) return 0;
    num = big_t'(x.sig) << 200;
    q   = num / big_t'(y.sig);
    rm  = num % big_t'(y.sig);
    return ref_encode(x.sign ^ y.sign, q, x.scale - y.scale - 200, rm != 0, n, es);
  endfunction

  // exact dot product of two vectors of up to 16 elements
  function automatic logic [31:0] ref_dot(input logic [15:0][31:0] a, input logic [15:0][31:0] b,
                                          input int lanes, input int n, input int es);
    ref_pir_t x, y;
    int emin, ex [16];
    bit nz [16], sg [16];
    big_t pr [16];
    big_t pos, neg;
    emin = 1 << 20;
    for (int l = 0; l < lanes; l++) begin
      x = ref_decode(a[l], n, es);
      y = ref_decode(b[l], n, es);
      if (x.nar || y.nar) return nar_of(n);
      nz[l] = !(x.zero || y.zero);
      sg[l] = x.sign ^ y.sign;
      pr[l] = big_t'(x.sig) * big_t'(y.sig);
      ex[l] = x.scale + y.scale - 64;
      if (nz[l] && ex[l] < emin) emin = ex[l];
    end
    pos = 0; neg = 0;
    for (int l = 0; l < lanes; l++) begin
      if (nz[l]) begin
        if (sg[l]) neg += pr[l] << (ex[l] - emin);
        else       pos += pr[l] << (ex[l] - emin);
      end
    end
    if (pos == neg) return 0;
    if (pos > neg) return ref_encode(0, pos - neg, emin, 0, n, es);
    return ref_encode(1, neg - pos, emin, 0, n, es);
  endfunction

  // random posit: mostly moderate scales, sometimes any bit pattern
  function automatic logic [31:0] rand_posit(input int n);
    logic [31:0] p;
    int sel;
    sel = $urandom_range(0, 9);
    p = $urandom() & mask_n(n);
    if (sel < 7) begin
      // force a short regime: keep magnitude within a few regimes of 1
      p[n-2] = $urandom_range(0, 1);
      p[n-3] = !p[n-2];
      if (sel < 3) p[n-4] = p[n-3];
    end
    return p;
  endfunction

endpackage
