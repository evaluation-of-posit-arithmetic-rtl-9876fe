// posit_ref_pkg: a bit-serial reference model of Posit(32,2) arithmetic for
// the testbenches, written the way a software library does it and
// independently of the RTL datapath.
//
// A posit is expanded bit by bit into an exact value m * 2^ex (m a wide
// unsigned integer). Products and sums are formed exactly in 512-bit
// integers. Rounding walks the result's bit string one bit at a time:
// regime, two exponent bits, then the fraction, keeps the first 31 bits,
// and rounds to nearest with ties to the even bit string. Values above
// maxpos (2^120) give maxpos; values below minpos (2^-120) give minpos.
package posit_ref_pkg;

  typedef logic [511:0] big_t;

  // Exact value of a posit: (-1)^s * m * 2^ex. zero and nar flagged.
  function automatic void ref_expand(input logic [31:0] p, output bit s,
                                     output big_t m, output int ex,
                                     output bit zero, output bit nar);
    logic [31:0] x;
    int i, run, k, e, nf;
    bit r;
    zero = (p == 32'h0);
    nar  = (p == 32'h8000_0000);
    s = p[31];
    m = '0;
    ex = 0;
    if (zero || nar) return;
    x = s ? (~p + 1) : p;
    i = 30;
    r = x[30];
    run = 0;
    while (i >= 0 && x[i] == r) begin
      run++;
      i--;
    end
    i--;                       // terminator
    k = r ? run - 1 : -run;
    e = 0;
    for (int j = 0; j < 2; j++) begin
      e = e * 2 + ((i >= 0) ? int'(x[i]) : 0);
      i--;
    end
    m = 1;
    nf = 0;
    while (i >= 0) begin
      m = (m << 1) | big_t'(x[i]);
      nf++;
      i--;
    end
    ex = 4 * k + e - nf;
  endfunction

  // Round the exact value (-1)^s * m * 2^ex to a posit.
  function automatic logic [31:0] ref_round(input bit s, input big_t m, input int ex);
    int h, E, k, e, pos;
    bit bits[$];
    logic [30:0] body;
    bit guard, sticky;
    logic [31:0] r;
    if (m == 0) return 32'h0;
    h = 0;
    for (int i = 0; i < 512; i++) if (m[i]) h = i;
    E = ex + h;
    if (E >= 120) body = 31'h7FFF_FFFF;
    else if (E < -120) body = 31'h1;
    else begin
      k = (E >= 0) ? E / 4 : -((-E + 3) / 4);
      e = E - 4 * k;
      if (k >= 0) begin
        repeat (k + 1) bits.push_back(1);
        bits.push_back(0);
      end else begin
        repeat (-k) bits.push_back(0);
        bits.push_back(1);
      end
      bits.push_back(e[1]);
      bits.push_back(e[0]);
      for (int i = h - 1; i >= 0; i--) bits.push_back(m[i]);
      while (bits.size() < 33) bits.push_back(0);
      body = '0;
      for (pos = 0; pos < 31; pos++) body = {body[29:0], 1'(bits[pos])};
      guard = bits[31];
      sticky = 0;
      for (int i = 32; i < bits.size(); i++) sticky |= bits[i];
      if (guard && (sticky || body[0])) body = body + 1;
    end
    r = {1'b0, body};
    return s ? (~r + 1) : r;
  endfunction

  function automatic logic [31:0] ref_mul(input logic [31:0] a, input logic [31:0] b);
    bit sa, sb, za, zb, na, nb;
    big_t ma, mb;
    int ea, eb;
    ref_expand(a, sa, ma, ea, za, na);
    ref_expand(b, sb, mb, eb, zb, nb);
    if (na || nb) return 32'h8000_0000;
    if (za || zb) return 32'h0;
    return ref_round(sa ^ sb, ma * mb, ea + eb);
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b);
    bit sa, sb, za, zb, na, nb, s;
    big_t ma, mb, m;
    int ea, eb, emin;
    ref_expand(a, sa, ma, ea, za, na);
    ref_expand(b, sb, mb, eb, zb, nb);
    if (na || nb) return 32'h8000_0000;
    if (za) return b;
    if (zb) return a;
    emin = (ea < eb) ? ea : eb;
    ma = ma << (ea - emin);
    mb = mb << (eb - emin);
    if (sa == sb) begin
      m = ma + mb;
      s = sa;
    end else if (ma >= mb) begin
      m = ma - mb;
      s = sa;
    end else begin
      m = mb - ma;
      s = sb;
    end
    if (m == 0) return 32'h0;
    return ref_round(s, m, emin);
  endfunction

  // Posit to real, for messages only.
  function automatic real ref_to_real(input logic [31:0] p);
    bit s, z, n;
    big_t m;
    int ex;
    real v;
    ref_expand(p, s, m, ex, z, n);
    if (z || n) return 0.0;
    v = real'(m[63:0]) * (2.0 ** ex);
    return s ? -v : v;
  endfunction

  // A random posit of moderate magnitude: random sign, scale in
  // [-range, range], random fraction. range = 0 gives values in [1,2).
  function automatic logic [31:0] rand_posit(input int range);
    big_t m;
    int sc;
    sc = (range == 0) ? 0 : int'($urandom_range(2 * range)) - range;
    m = {480'h0, 1'b1, 31'($urandom)};
    return ref_round(1'($urandom_range(1)), m, sc - 31);
  endfunction

  // Any 32-bit pattern.
  function automatic logic [31:0] rand_pattern();
    return $urandom;
  endfunction

endpackage
