// tb_ref_pkg -- reference modular arithmetic for the testbenches.
//
// Everything here is written with plain 128-bit '*' and '%' so that it is
// independent of the Barrett and Shoup datapaths it is used to check. It also
// builds the run-time constants the hardware expects: the Barrett constant,
// N^-1, Shoup companions and the bit-reversed twiddle tables, and a direct
// O(N^2) evaluation (Horner's rule) and interpolation of a negacyclic
// polynomial at the odd powers of psi, with no fast transform involved.
package tb_ref_pkg;
  import cheetah_pkg::*;

  // A 60-bit prime with q = 1 mod 2^18, so negacyclic NTTs up to N = 2^17 exist.
  localparam logic [59:0] Q60 = 60'hffffffffffc0001;

  function automatic logic [63:0] mulmod(logic [63:0] a, logic [63:0] b, logic [63:0] q);
    logic [127:0] p;
    p = {64'd0, a} * {64'd0, b};
    return 64'(p % {64'd0, q});
  endfunction

  function automatic logic [63:0] addmod(logic [63:0] a, logic [63:0] b, logic [63:0] q);
    return 64'(({64'd0, a} + {64'd0, b}) % {64'd0, q});
  endfunction

  function automatic logic [63:0] powmod(logic [63:0] b, logic [63:0] e, logic [63:0] q);
    logic [63:0] r;
    r = 1;
    while (e != 0) begin
      if (e[0]) r = mulmod(r, b, q);
      b = mulmod(b, b, q);
      e = e >> 1;
    end
    return r;
  endfunction

  function automatic logic [63:0] invmod(logic [63:0] a, logic [63:0] q);
    return powmod(a, q - 2, q);
  endfunction

  function automatic int bitlen(logic [63:0] v);
    int n;
    n = 0;
    while (v != 0) begin n++; v = v >> 1; end
    return n;
  endfunction

  function automatic int unsigned bitrev(int unsigned v, int logn);
    int unsigned o;
    o = 0;
    for (int i = 0; i < logn; i++) if (v[i]) o[logn-1-i] = 1'b1;
    return o;
  endfunction

  // Primitive 2n-th root of unity: psi^n = -1.
  function automatic logic [63:0] find_psi(logic [63:0] q, int n);
    logic [63:0] psi;
    for (int x = 2; x < 1000; x++) begin
      psi = powmod(64'(x), (q - 1) / 64'(2 * n), q);
      if (powmod(psi, 64'(n), q) == q - 1) return psi;
    end
    return 0;
  endfunction

  function automatic shoup_t shoup(logic [63:0] w, logic [63:0] q);
    logic [127:0] num;
    num = {w, 64'd0};
    return 64'(num / {64'd0, q});
  endfunction

  function automatic mod_cfg_t make_cfg(logic [63:0] q, int n);
    mod_cfg_t c;
    int k;
    logic [127:0] num;
    k        = bitlen(q);
    num      = 128'd1 << (2 * k);
    c.q      = coef_t'(q);
    c.k      = 7'(k);
    c.mu     = (COEF_W+1)'(num / {64'd0, q});
    c.n_inv  = coef_t'(invmod(64'(n), q));
    c.n_inv_s = shoup(64'(c.n_inv), q);
    c.dbits  = 7'd20;
    return c;
  endfunction

  // Twiddle word k of the forward (inv=0) or inverse (inv=1) table.
  function automatic twiddle_t make_tw(logic [63:0] q, logic [63:0] psi, int n, int k, bit inv);
    twiddle_t t;
    logic [63:0] base;
    base = inv ? invmod(psi, q) : psi;
    t.w  = coef_t'(powmod(base, 64'(bitrev(k, $clog2(n))), q));
    t.ws = shoup(64'(t.w), q);
    return t;
  endfunction

  // Fermat test, enough to reject a mistyped modulus.
  function automatic bit probably_prime(logic [63:0] q);
    return powmod(3, q - 1, q) == 1 && powmod(5, q - 1, q) == 1;
  endfunction

  // ---------------------------------------------------------------------
  // Reference aligned partial of one lane, all arrays of length n, values in
  // the evaluation domain (slot j = value at psi^(2*bitrev(j)+1)).
  // kk[c][l] is key component c of digit l.
  // ---------------------------------------------------------------------
  typedef logic [63:0] poly_t [];

  function automatic int slot_exp(int j, int n);
    return 2 * int'(bitrev(j, $clog2(n))) + 1;
  endfunction

  // v[j] = a(x_j) with x_j = psi^slot_exp(j), by Horner's rule.
  function automatic poly_t eval_poly(poly_t a, logic [63:0] q, logic [63:0] psi);
    int n;
    poly_t v;
    logic [63:0] x;
    n = a.size();
    v = new[n];
    for (int j = 0; j < n; j++) begin
      x = powmod(psi, 64'(slot_exp(j, n)), q);
      v[j] = 0;
      for (int i = n - 1; i >= 0; i--) v[j] = addmod(mulmod(v[j], x, q), a[i], q);
    end
    return v;
  endfunction

  // a[i] = n^-1 * sum_j v[j] * x_j^-i, keeping the running powers x_j^-i.
  function automatic poly_t interp_poly(poly_t v, logic [63:0] q, logic [63:0] psi);
    int n;
    poly_t a, y, pw;
    logic [63:0] pinv, ninv;
    n = v.size();
    a = new[n]; y = new[n]; pw = new[n];
    pinv = invmod(psi, q); ninv = invmod(64'(n), q);
    for (int j = 0; j < n; j++) begin
      y[j]  = powmod(pinv, 64'(slot_exp(j, n)), q);
      pw[j] = 1;
    end
    for (int i = 0; i < n; i++) begin
      a[i] = 0;
      for (int j = 0; j < n; j++) begin
        a[i]  = addmod(a[i], mulmod(v[j], pw[j], q), q);
        pw[j] = mulmod(pw[j], y[j], q);
      end
      a[i] = mulmod(a[i], ninv, q);
    end
    return a;
  endfunction

  // out0/out1 = aligned partial pair of c = (c0, c1) times w rotated by g.
  task automatic ref_partial(input poly_t c0, input poly_t c1, input poly_t w, input int g,
                             input poly_t k0 [], input poly_t k1 [], input int dbits,
                             input logic [63:0] q, input logic [63:0] psi,
                             output poly_t out0, output poly_t out1);
    int n, L, src, e;
    int slot_of [];
    poly_t p0, p1, s0, s1, a1, d, dd;
    n = c0.size(); L = k0.size();
    p0 = new[n]; p1 = new[n]; s0 = new[n]; s1 = new[n]; d = new[n];
    out0 = new[n]; out1 = new[n];
    for (int j = 0; j < n; j++) begin
      p0[j] = mulmod(c0[j], w[j], q);
      p1[j] = mulmod(c1[j], w[j], q);
    end
    slot_of = new[2 * n];
    for (int k = 0; k < n; k++) begin
      e = slot_exp(k, n);
      slot_of[e] = k;
    end
    for (int j = 0; j < n; j++) begin
      e = slot_exp(j, n);
      e = int'((longint'(e) * longint'(g)) % longint'(2 * n));
      src = slot_of[e];
      s0[j] = p0[src]; s1[j] = p1[src];
    end
    a1 = interp_poly(s1, q, psi);
    for (int j = 0; j < n; j++) begin out0[j] = s0[j]; out1[j] = 0; end
    for (int l = 0; l < L; l++) begin
      for (int i = 0; i < n; i++)
        d[i] = (l == L - 1) ? (a1[i] >> (dbits * l)) : ((a1[i] >> (dbits * l)) & ((64'd1 << dbits) - 1));
      dd = eval_poly(d, q, psi);
      for (int j = 0; j < n; j++) begin
        out0[j] = addmod(out0[j], mulmod(dd[j], k0[l][j], q), q);
        out1[j] = addmod(out1[j], mulmod(dd[j], k1[l][j], q), q);
      end
    end
  endtask

endpackage
