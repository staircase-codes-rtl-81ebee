// sc_pkg: constants and constant functions shared by the staircase encoder
// and decoder.
//
// The component code is the binary code generated by
//   g(x) = (x^10+x^3+1)(x^10+x^3+x^2+x+1)(x^10+x^8+x^3+x^2+1)(x^2+1),
// i.e. the (1023,993) triple-error-correcting BCH code with two extra
// parity bits for detection, shortened to length 1022 (990 information
// bits, 32 parity bits). These polynomials are the paper's.
//
// Field GF(2^10) is built on x^10+x^3+1; alpha (= 2) is its root. The other
// two minimal polynomials of g(x) are those of alpha^3 and alpha^5, so a
// word c(x) of the code satisfies c(alpha) = c(alpha^3) = c(alpha^5) = 0 and
// c(x) mod (x^2+1) = 0. The decoder therefore uses the 32-bit syndrome
//   { S1, S3, S5, odd-degree parity, even-degree parity }
// whose column for the bit of degree d is syn_mask(d). This packing of the
// syndrome is this design's choice; the encoder works with x^d mod g(x).
//
// A component codeword of length NR+NC is indexed by position p (0 = first
// transmitted); position p has polynomial degree NR+NC-1-p, so the 32
// parity bits are the last positions (degrees 31..0).
package sc_pkg;

  localparam int unsigned GF_M  = 10;
  localparam int unsigned GF_Q  = 1 << GF_M;     // 1024 field elements
  localparam int unsigned GF_N  = GF_Q - 1;      // 1023, multiplicative order
  localparam int unsigned PAR   = 32;            // parity bits per codeword
  localparam int unsigned DEG_W = GF_M;          // width of a bit degree

  typedef logic [GF_M-1:0] gf_t;
  typedef logic [PAR-1:0]  syn_t;

  // Minimal polynomials of alpha, alpha^3, alpha^5, and the extension x^2+1.
  localparam logic [10:0] P1 = 11'b100_0000_1001;  // x^10+x^3+1
  localparam logic [10:0] P3 = 11'b100_0000_1111;  // x^10+x^3+x^2+x+1
  localparam logic [10:0] P5 = 11'b101_0000_1101;  // x^10+x^8+x^3+x^2+1
  localparam logic [2:0]  PX = 3'b101;             // x^2+1

  // Product of two GF(2)[x] polynomials (carry-less multiply), up to degree 32.
  function automatic logic [PAR:0] clmul(input logic [PAR:0] a, input logic [PAR:0] b);
    logic [PAR:0] r;
    r = '0;
    for (int i = 0; i <= PAR; i++)
      if (b[i]) r = r ^ (a << i);
    return r;
  endfunction

  function automatic logic [PAR:0] gen_poly();
    logic [PAR:0] g;
    g = clmul(33'(P1), 33'(P3));
    g = clmul(g, 33'(P5));
    g = clmul(g, 33'(PX));
    return g;
  endfunction

  localparam logic [PAR:0] G_POLY = gen_poly();

  // Multiply an element of GF(2^10) by x and reduce.
  function automatic gf_t gf_xtime(input gf_t a);
    return a[GF_M-1] ? ((a << 1) ^ P1[GF_M-1:0]) : (a << 1);
  endfunction

  function automatic gf_t gf_mul(input gf_t a, input gf_t b);
    gf_t r, t;
    r = '0;
    t = a;
    for (int i = 0; i < GF_M; i++) begin
      if (b[i]) r = r ^ t;
      t = gf_xtime(t);
    end
    return r;
  endfunction

  function automatic gf_t gf_sq(input gf_t a);
    return gf_mul(a, a);
  endfunction

  // a^(2^10 - 2) = a^-1 (0 maps to 0).
  function automatic gf_t gf_inv(input gf_t a);
    gf_t s, r;
    s = gf_sq(a);       // a^2
    r = s;
    for (int i = 2; i < GF_M; i++) begin
      s = gf_sq(s);     // a^(2^i)
      r = gf_mul(r, s);
    end
    return r;
  endfunction

  // a^(2^9): the unique square root in GF(2^10).
  function automatic gf_t gf_sqrt(input gf_t a);
    gf_t s;
    s = a;
    for (int i = 1; i < GF_M; i++) s = gf_sq(s);
    return s;
  endfunction

  // Syndrome column of the bit of degree d, given alpha^d.
  function automatic syn_t syn_of_loc(input gf_t x, input logic odd);
    gf_t x2, x3, x5;
    x2 = gf_sq(x);
    x3 = gf_mul(x2, x);
    x5 = gf_mul(x3, x2);
    return {x, x3, x5, odd, ~odd};
  endfunction

endpackage
