// bch3_decoder: syndrome-domain decoder of one component codeword.
//
// Input is the 32-bit syndrome {S1, S3, S5, po, pe} of a received word
// (see sc_pkg), output the degrees of the at most three bits to flip. The
// method is the paper's (Appendix): with D3 = S1^3+S3 and D5 = S1^5+S5 the
// number of errors v is
//   v=0: syndrome zero;  v=1: S1!=0, D3=D5=0;
//   v=2: S1!=0, D3!=0, S1*D5 = S3*D3;  v=3: D3!=0, not v=2,
// and the roots of the error locator are found by table lookup instead of
// a Chien search:
//   v=1: X = S1.
//   v=2: x^2+S1x+D3/S1; x = S1*y, y^2+y+c with c = D3/S1^3. QUAD[c] holds one
//        root y0, the other is y0+1.
//   v=3: x^3+S1x^2+bx+S1b+D3, b=(S1^2 S3+S5)/D3; x = y+S1 gives
//        y^3+(D5/D3)y+D3. If D5=0 the roots are the cube roots of D3 (table
//        CBRT holds two, the third is their sum). Otherwise y = e^(1/2) z with
//        e = D5/D3 gives z^3+z+k, k = (D3^5/D5^3)^(1/2); CUBIC[k] holds two
//        roots z1, z2, the third is z1+z2.
// The root X is alpha^d; LOG gives the degree d.
//
// This design's own additions: the decoding is accepted only if the roots
// are distinct, every degree is below NLEN (the shortened length), and the
// syndrome rebuilt from the found positions equals the input, which also
// checks the two x^2+1 parity bits (the code's error-detecting extension).
// Field inversion is done by exponentiation, not by a table. The four tables
// are computed at elaboration from their defining equations.
//
// Timing: combinational from in_syn, registered once: results appear one
// cycle after in_valid, one decoding per cycle.
module bch3_decoder
  import sc_pkg::*;
#(
  parameter int unsigned NLEN = 1022   // codeword length; degrees >= NLEN are invalid
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  syn_t                 in_syn,
  output logic                 out_valid,
  output logic                 out_ok,      // decodable (v <= 3, checks passed)
  output logic [1:0]           out_nerr,    // number of positions to flip
  output logic [2:0][DEG_W-1:0] out_deg     // their degrees (first out_nerr valid)
);

  // ---- lookup tables, built from their defining equations ----------------
  // QUAD[c]  = {valid, y}       with y^2 + y = c
  // CBRT[w]  = {valid, r2, r1}  with r^3 = w, r1 != r2
  // CUBIC[k] = {valid, z2, z1}  with z^3 + z = k, three distinct roots
  // LOG[x]   = d                with alpha^d = x
  function automatic logic [GF_Q-1:0][GF_M:0] build_quad();
    logic [GF_Q-1:0][GF_M:0] t;
    gf_t c;
    for (int i = 0; i < int'(GF_Q); i++) t[i] = '0;
    for (int y = 0; y < int'(GF_Q); y++) begin
      c = gf_sq(gf_t'(y)) ^ gf_t'(y);
      if (!t[c][GF_M]) t[c] = {1'b1, gf_t'(y)};
    end
    return t;
  endfunction

  function automatic logic [GF_Q-1:0][2*GF_M:0] build_cbrt();
    logic [GF_Q-1:0][2*GF_M:0] t;
    logic [GF_Q-1:0] seen;
    gf_t w;
    for (int i = 0; i < int'(GF_Q); i++) t[i] = '0;
    seen = '0;
    for (int r = 1; r < int'(GF_Q); r++) begin
      w = gf_mul(gf_sq(gf_t'(r)), gf_t'(r));
      if (!seen[w]) begin
        seen[w] = 1'b1;
        t[w][GF_M-1:0] = gf_t'(r);
      end else if (!t[w][2*GF_M]) begin
        t[w][2*GF_M:GF_M] = {1'b1, gf_t'(r)};
      end
    end
    return t;
  endfunction

  function automatic logic [GF_Q-1:0][2*GF_M:0] build_cubic();
    logic [GF_Q-1:0][2*GF_M:0] t;
    logic [GF_Q-1:0][1:0] cnt;
    gf_t k;
    for (int i = 0; i < int'(GF_Q); i++) t[i] = '0;
    cnt = '0;
    for (int z = 0; z < int'(GF_Q); z++) begin
      k = gf_mul(gf_sq(gf_t'(z)), gf_t'(z)) ^ gf_t'(z);
      if (cnt[k] == 2'd0) t[k][GF_M-1:0] = gf_t'(z);
      else if (cnt[k] == 2'd1) t[k][2*GF_M-1:GF_M] = gf_t'(z);
      if (cnt[k] != 2'd3) cnt[k] = cnt[k] + 2'd1;
    end
    for (int i = 0; i < int'(GF_Q); i++) t[i][2*GF_M] = (cnt[i] == 2'd3);
    return t;
  endfunction

  function automatic logic [GF_Q-1:0][GF_M-1:0] build_log();
    logic [GF_Q-1:0][GF_M-1:0] t;
    gf_t x;
    for (int i = 0; i < int'(GF_Q); i++) t[i] = '0;
    x = gf_t'(1);
    for (int d = 0; d < int'(GF_N); d++) begin
      t[x] = GF_M'(d);
      x = gf_xtime(x);
    end
    return t;
  endfunction

  localparam logic [GF_Q-1:0][GF_M:0]   QUAD  = build_quad();
  localparam logic [GF_Q-1:0][2*GF_M:0] CBRT  = build_cbrt();
  localparam logic [GF_Q-1:0][2*GF_M:0] CUBIC = build_cubic();
  localparam logic [GF_Q-1:0][GF_M-1:0] LOG   = build_log();

  // ---- combinational decoding --------------------------------------------
  gf_t s1, s3, s5, s1_2, s1_3, d3, d5, inv_s1, inv_d3, inv_d5;
  gf_t cq, y0, e, sqe, k, bq;
  logic [GF_M:0]   q_ent;
  logic [2*GF_M:0] c_ent;
  gf_t [2:0] x;                  // error locators alpha^d
  logic [1:0] v;
  logic       case_ok, ok;
  logic [2:0][DEG_W-1:0] deg;
  syn_t rebuilt;

  always_comb begin
    s1   = in_syn[31:22];
    s3   = in_syn[21:12];
    s5   = in_syn[11:2];
    s1_2 = gf_sq(s1);
    s1_3 = gf_mul(s1_2, s1);
    d3   = s1_3 ^ s3;
    d5   = gf_mul(s1_3, s1_2) ^ s5;
    inv_s1 = gf_inv(s1);
    inv_d3 = gf_inv(d3);
    inv_d5 = gf_inv(d5);

    x = '0;
    v = 2'd0;
    case_ok = 1'b0;
    cq = '0; y0 = '0; e = '0; sqe = '0; k = '0; bq = '0;
    q_ent = '0; c_ent = '0;

    if (in_syn == '0) begin
      v = 2'd0;
      case_ok = 1'b1;
    end else if (s1 != '0 && d3 == '0 && d5 == '0) begin
      v = 2'd1;
      x[0] = s1;
      case_ok = 1'b1;
    end else if (s1 != '0 && d3 != '0 && gf_mul(s1, d5) == gf_mul(s3, d3)) begin
      v = 2'd2;
      cq = gf_mul(d3, gf_mul(inv_s1, gf_sq(inv_s1)));
      q_ent = QUAD[cq];
      y0 = q_ent[GF_M-1:0];
      x[0] = gf_mul(s1, y0);
      x[1] = gf_mul(s1, y0 ^ gf_t'(1));
      case_ok = q_ent[GF_M];
    end else if (d3 != '0) begin
      v = 2'd3;
      if (d5 == '0) begin
        c_ent = CBRT[d3];
        x[0] = c_ent[GF_M-1:0] ^ s1;
        x[1] = c_ent[2*GF_M-1:GF_M] ^ s1;
        x[2] = c_ent[GF_M-1:0] ^ c_ent[2*GF_M-1:GF_M] ^ s1;
      end else begin
        e   = gf_mul(d5, inv_d3);
        sqe = gf_sqrt(e);
        bq  = gf_mul(d3, gf_sq(d3));                       // D3^3
        bq  = gf_mul(bq, gf_sq(d3));                       // D3^5
        k   = gf_sqrt(gf_mul(bq, gf_mul(inv_d5, gf_sq(inv_d5))));
        c_ent = CUBIC[k];
        x[0] = gf_mul(sqe, c_ent[GF_M-1:0]) ^ s1;
        x[1] = gf_mul(sqe, c_ent[2*GF_M-1:GF_M]) ^ s1;
        x[2] = gf_mul(sqe, c_ent[GF_M-1:0] ^ c_ent[2*GF_M-1:GF_M]) ^ s1;
      end
      case_ok = c_ent[2*GF_M];
    end

    // Degrees, range and distinctness checks, syndrome rebuild.
    ok = case_ok;
    rebuilt = '0;
    for (int i = 0; i < 3; i++) begin
      deg[i] = LOG[x[i]];
      if (i < int'(v)) begin
        if (x[i] == '0 || int'(deg[i]) >= int'(NLEN)) ok = 1'b0;
        rebuilt = rebuilt ^ syn_of_loc(x[i], deg[i][0]);
      end
    end
    if (v >= 2'd2 && x[0] == x[1]) ok = 1'b0;
    if (v == 2'd3 && (x[0] == x[2] || x[1] == x[2])) ok = 1'b0;
    if (rebuilt != in_syn) ok = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ok    <= 1'b0;
      out_nerr  <= '0;
      out_deg   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_ok   <= ok;
        out_nerr <= ok ? v : 2'd0;
        out_deg  <= deg;
      end
    end
  end

endmodule
