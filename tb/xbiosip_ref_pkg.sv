// xbiosip_ref_pkg: bit-accurate reference model of the approximate arithmetic,
// written as plain functions for the testbenches.
//
// The functions compute the same results the RTL should produce, but from
// arithmetic rather than from the RTL's cells: an accurate bit is a + b + carry,
// an ApproxAdd5 bit copies b and passes a as its carry, an AppMultV1 2x2 product is
// a * b except 3 * 3 = 7.  The recursive multiplier and the filter stages are
// modelled the same way.  Types are integer-coded (0 accurate, 5 ApproxAdd5 for
// adders; 0 accurate, 1 AppMultV1 for multipliers) so the model does not depend on
// the RTL package.
package xbiosip_ref_pkg;

  // N-bit adder with the K low bits made of cell type AT; returns the N-bit sum.
  function automatic logic [63:0] ref_add(int n, int k, int at,
                                          logic [63:0] a, logic [63:0] b, logic cin);
    logic [63:0] s;
    logic c;
    logic [1:0] t;
    s = '0;
    c = cin;
    for (int i = 0; i < n; i++) begin
      if (i < k && at == 5) begin
        s[i] = b[i];
        c    = a[i];
      end else begin
        t    = 2'(a[i]) + 2'(b[i]) + 2'(c);
        s[i] = t[0];
        c    = t[1];
      end
    end
    return s;
  endfunction

  // Carry out of the same adder.
  function automatic logic ref_add_cout(int n, int k, int at,
                                        logic [63:0] a, logic [63:0] b, logic cin);
    logic c;
    logic [1:0] t;
    c = cin;
    for (int i = 0; i < n; i++) begin
      if (i < k && at == 5) c = a[i];
      else begin
        t = 2'(a[i]) + 2'(b[i]) + 2'(c);
        c = t[1];
      end
    end
    return c;
  endfunction

  function automatic logic [3:0] ref_m2(int mt, logic [1:0] a, logic [1:0] b);
    if (mt == 1 && a == 2'd3 && b == 2'd3) return 4'd7;
    return 4'(a) * 4'(b);
  endfunction

  // Recursive N x N multiplier, block bit 0 at weight OFF, K approximate LSBs.
  function automatic logic [63:0] ref_mul(int n, int k, int off, int mt, int at,
                                          logic [63:0] a, logic [63:0] b);
    int h, kl;
    logic [63:0] mh, pll, phl, plh, phh, s1, s2;
    if (n == 2) return 64'((off < k) ? ref_m2(mt, a[1:0], b[1:0]) : ref_m2(0, a[1:0], b[1:0]));
    h  = n / 2;
    kl = (k <= off) ? 0 : ((k - off) >= 2 * n) ? 2 * n : (k - off);
    mh  = (64'd1 << h) - 1;
    pll = ref_mul(h, k, off,     mt, at, a & mh,        b & mh);
    phl = ref_mul(h, k, off + h, mt, at, (a >> h) & mh, b & mh);
    plh = ref_mul(h, k, off + h, mt, at, a & mh,        (b >> h) & mh);
    phh = ref_mul(h, k, off + n, mt, at, (a >> h) & mh, (b >> h) & mh);
    s1 = ref_add(2 * n, kl, at, phh << n, pll, 1'b0);
    s2 = ref_add(2 * n, kl, at, phl << h, plh << h, 1'b0);
    return ref_add(2 * n, kl, at, s2, s1, 1'b0);
  endfunction

  // 16x16 signed product: magnitude through ref_mul, exact sign.
  function automatic logic signed [31:0] ref_smul(int k, int mt, int at,
                                                  logic signed [15:0] a, logic signed [15:0] b);
    logic [63:0] ma, mb, mp;
    ma = (a < 0) ? 64'(-32'(a)) : 64'(a);
    mb = (b < 0) ? 64'(-32'(b)) : 64'(b);
    mp = ref_mul(16, k, 0, mt, at, ma, mb);
    return ((a < 0) != (b < 0)) ? -32'(mp) : 32'(mp);
  endfunction

  // Clamp (v >>> sh) into 16 bits.
  function automatic logic signed [15:0] ref_sat(logic signed [31:0] v, int sh);
    longint s;
    s = longint'(v) / (longint'(1) << sh);
    if (longint'(v) < 0 && (longint'(v) % (longint'(1) << sh)) != 0) s = s - 1;  // floor
    if (s > 32767) return 16'sh7fff;
    if (s < -32768) return -16'sh8000;
    return 16'(s);
  endfunction

  function automatic logic ref_sat_hit(logic signed [31:0] v, int sh);
    longint s;
    s = longint'(v) >>> sh;
    return (s > 32767) || (s < -32768);
  endfunction

  // One FIR output: win[0] is the newest sample.
  function automatic logic signed [31:0] ref_fir(int ntaps, int coef[32], logic signed [15:0] win[32],
                                                 int k, int mt, int at);
    logic [63:0] acc;
    acc = 64'(32'(ref_smul(k, mt, at, win[0], 16'(coef[0]))));
    for (int i = 1; i < ntaps; i++)
      acc = ref_add(32, k, at, acc, 64'(32'(ref_smul(k, mt, at, win[i], 16'(coef[i])))), 1'b0);
    return 32'(acc);
  endfunction

  // Exact FIR output for comparison with fully accurate hardware.
  function automatic logic signed [31:0] exact_fir(int ntaps, int coef[32], logic signed [15:0] win[32]);
    longint acc;
    acc = 0;
    for (int i = 0; i < ntaps; i++) acc += longint'(coef[i]) * longint'(win[i]);
    return 32'(acc);
  endfunction

  // Moving-window sum of n terms (term[0] newest) with a K-LSB approximate chain.
  function automatic logic [31:0] ref_mwi(int n, logic [31:0] term[64], int k, int at);
    logic [63:0] acc;
    acc = 64'(term[0]);
    for (int i = 1; i < n; i++) acc = ref_add(32, k, at, acc, 64'(term[i]), 1'b0);
    return 32'(acc);
  endfunction

endpackage
