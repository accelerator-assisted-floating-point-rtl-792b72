// tb_ref_pkg -- reference arithmetic for the testbenches, written with real
// numbers so that it is independent of the bit-level functions in asip_pkg.
// A bfloat16 is turned into a real exactly; a real is turned into bfloat16 by
// rounding to nearest-even on its float64 bits, flushing tiny values to zero.
package tb_ref_pkg;

  function automatic real bf2r(logic [15:0] a);
    logic [10:0] e;
    if (a[14:7] == 8'd0) return 0.0;
    e = 11'(int'(a[14:7]) - 127 + 1023);
    return $bitstoreal({a[15], e, a[6:0], 45'd0});
  endfunction

  function automatic logic [15:0] r2bf(real x);
    logic [63:0] b;
    logic        s;
    int          e;
    logic [52:0] m;          // hidden + 52 fraction bits
    logic [7:0]  f;
    logic        g, st;
    if (x == 0.0) return 16'h0000;
    b = $realtobits(x);
    s = b[63];
    e = int'(b[62:52]) - 1023 + 127;
    m = {1'b1, b[51:0]};
    f = m[52:45];
    g = m[44];
    st = |m[43:0];
    if (g && (st || f[0])) f = f + 8'd1;
    if (f == 8'd0) e = e + 1;            // rounding carried out of the fraction
    if (e <= 0) return {s, 15'd0};
    if (e >= 255) return {s, 8'hFF, 7'd0};
    return {s, 8'(e), f[6:0]};
  endfunction

  // random bfloat16 with an exponent in a moderate range
  function automatic logic [15:0] rnd_bf(int emin = 117, int emax = 137);
    logic [15:0] v;
    v[15]   = 1'($urandom);
    v[14:7] = 8'(emin + int'($urandom % (emax - emin + 1)));
    v[6:0]  = 7'($urandom);
    return v;
  endfunction

  // complex bfloat16 (real part in bits 31:16) reference operations, rounding
  // after every real product and sum
  function automatic logic [31:0] ref_cmul(logic [31:0] a, logic [31:0] b);
    logic [15:0] rr, ii;
    rr = r2bf(bf2r(r2bf(bf2r(a[31:16]) * bf2r(b[31:16]))) - bf2r(r2bf(bf2r(a[15:0]) * bf2r(b[15:0]))));
    ii = r2bf(bf2r(r2bf(bf2r(a[31:16]) * bf2r(b[15:0]))) + bf2r(r2bf(bf2r(a[15:0]) * bf2r(b[31:16]))));
    return {rr, ii};
  endfunction

  function automatic logic [31:0] ref_cadd(logic [31:0] a, logic [31:0] b);
    return {r2bf(bf2r(a[31:16]) + bf2r(b[31:16])), r2bf(bf2r(a[15:0]) + bf2r(b[15:0]))};
  endfunction

  function automatic logic [31:0] ref_csub(logic [31:0] a, logic [31:0] b);
    return {r2bf(bf2r(a[31:16]) - bf2r(b[31:16])), r2bf(bf2r(a[15:0]) - bf2r(b[15:0]))};
  endfunction

  function automatic logic [31:0] ref_conj(logic [31:0] a);
    return {a[31:16], ~a[15], a[14:0]};
  endfunction

  function automatic logic [31:0] rnd_cbf(int emin = 122, int emax = 130);
    return {rnd_bf(emin, emax), rnd_bf(emin, emax)};
  endfunction

endpackage
