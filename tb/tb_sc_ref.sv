// tb_sc_ref: reference arithmetic for the staircase-code testbenches,
// written independently of the RTL's mask tables.
//
// A word is a bit vector w with w[d] the coefficient of x^d, of length n.
//  * rem(w, n):  remainder of w(x) modulo g(x) by long division, where g(x)
//                is the product of the four factors of the generator.
//  * syn(w, n):  {w(a), w(a^3), w(a^5), odd-degree parity, even-degree
//                parity} by Horner's rule in GF(2^10) on x^10+x^3+1.
package tb_sc_ref;

  function automatic bit [32:0] polymul(bit [32:0] a, bit [32:0] b);
    bit [32:0] r = '0;
    for (int i = 0; i <= 32; i++) if (b[i]) r ^= (a << i);
    return r;
  endfunction

  function automatic bit [32:0] gpoly();
    bit [32:0] g;
    g = polymul(33'h409, 33'h40F);     // (x^10+x^3+1)(x^10+x^3+x^2+x+1)
    g = polymul(g, 33'h50D);           // (x^10+x^8+x^3+x^2+1)
    g = polymul(g, 33'h5);             // (x^2+1)
    return g;
  endfunction

  function automatic bit [31:0] rem(bit [1023:0] w, int n);
    bit [32:0] g = gpoly();
    for (int d = n - 1; d >= 32; d--)
      if (w[d]) w[d -: 33] = w[d -: 33] ^ g;
    return w[31:0];
  endfunction

  function automatic bit [9:0] mul(bit [9:0] a, bit [9:0] b);
    bit [19:0] p = '0;
    for (int i = 0; i < 10; i++) if (b[i]) p ^= (20'(a) << i);
    for (int i = 19; i >= 10; i--) if (p[i]) p ^= (20'h409 << (i - 10));
    return p[9:0];
  endfunction

  function automatic bit [31:0] syn(bit [1023:0] w, int n);
    bit [9:0] a1 = 10'd2, a3, a5, s1 = '0, s3 = '0, s5 = '0;
    bit po = 0, pe = 0;
    a3 = mul(mul(a1, a1), a1);
    a5 = mul(mul(a3, a1), a1);
    for (int d = n - 1; d >= 0; d--) begin
      s1 = mul(s1, a1) ^ {9'd0, w[d]};
      s3 = mul(s3, a3) ^ {9'd0, w[d]};
      s5 = mul(s5, a5) ^ {9'd0, w[d]};
      if (w[d]) begin
        if (d % 2 == 1) po = ~po; else pe = ~pe;
      end
    end
    return {s1, s3, s5, po, pe};
  endfunction

endpackage
