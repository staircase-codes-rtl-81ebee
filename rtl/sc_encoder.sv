// sc_encoder: staircase encoder for the G.709-compatible staircase code.
//
// The code is a chain of blocks B_1, B_2, ... of NR rows by NC columns
// (512 x 510 in the paper); B_0 is all zeros. Row j of block B_i is the
// second half of one component codeword whose first half is row j of
// B^_{i-1}^T: the transpose of B_{i-1} with PAD = NR-NC all-zero rows on
// top, i.e. column j-PAD of B_{i-1}. The leftmost NC-PAR columns of B_i carry
// information, the rightmost PAR = 32 columns the parity of that codeword.
// All of this is the paper's construction.
//
// How it works: parity is the remainder of x^32 * info(x) modulo g(x),
// a linear function, so it is the XOR of one 32-bit mask x^d mod g(x) per
// set information bit of degree d. The B_{i-1} half of each codeword is
// known before B_i starts: while row r of B_{i-1} is sent, every set bit in
// its column c adds the same mask x^(NR+NC-1-r) mod g(x) to the partial
// parity of row c+PAD of the next block (the encoder-side counterpart of the
// paper's Fig. 2 "same mask to every column syndrome"). Two banks of NR
// partial parities alternate between "being read" and "being accumulated".
// For row j the encoder then XORs the bank entry with a masking tree over
// the NC-PAR information bits of the row.
//
// Interface: one row per accepted cycle. in_info[c] is column c (column 0
// first on the line). out_row[c] is column c of the coded row; the parity
// bit of degree d sits in column NC-1-d. Valid/ready on both sides; the
// output is registered, so a row appears one cycle after it is accepted,
// and the encoder sustains one row per cycle. Rows are counted internally:
// the first row after reset is row 0 of B_1. The row-per-cycle width is
// this design's choice; the paper does not give the encoder's bus width.
module sc_encoder
  import sc_pkg::*;
#(
  parameter int unsigned NR = 512,   // rows per block
  parameter int unsigned NC = 510    // columns per block
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [NC-PAR-1:0] in_info,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [NC-1:0]    out_row,
  output logic             out_last    // last row of a block
);

  localparam int unsigned NI  = NC - PAR;     // information columns
  localparam int unsigned PAD = NR - NC;      // zero rows of B^_{i-1}^T
  localparam int unsigned CWL = NR + NC;      // component codeword length
  localparam int unsigned RW  = $clog2(NR);

  // x^d mod g(x) for every degree of a codeword.
  function automatic logic [CWL-1:0][PAR-1:0] build_emask();
    logic [CWL-1:0][PAR-1:0] t;
    logic [PAR-1:0] m;
    m = PAR'(1);
    for (int d = 0; d < CWL; d++) begin
      t[d] = m;
      m = m[PAR-1] ? ((m << 1) ^ G_POLY[PAR-1:0]) : (m << 1);
    end
    return t;
  endfunction

  localparam logic [CWL-1:0][PAR-1:0] EMASK = build_emask();

  logic [PAR-1:0] bank [2][NR];
  logic           cur;            // bank holding parities of the current block
  logic [RW-1:0]  row;
  logic [PAR-1:0] par;
  logic [NC-1:0]  coded;
  logic           fire;

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;

  // Masking tree over the information bits plus the B_{i-1} contribution.
  always_comb begin
    par = bank[cur][row];
    for (int c = 0; c < NI; c++)
      if (in_info[c]) par = par ^ EMASK[NC-1-c];
    coded = '0;
    coded[NI-1:0] = in_info;
    for (int d = 0; d < PAR; d++) coded[NC-1-d] = par[d];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < 2; b++)
        for (int r = 0; r < NR; r++) bank[b][r] <= '0;
      cur       <= 1'b0;
      row       <= '0;
      out_valid <= 1'b0;
      out_row   <= '0;
      out_last  <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        out_valid <= 1'b1;
        out_row   <= coded;
        out_last  <= (row == RW'(NR-1));
        // Row `row` of this block is column data for rows c+PAD of the next.
        for (int c = 0; c < NC; c++)
          if (coded[c]) bank[!cur][c+PAD] <= bank[!cur][c+PAD] ^ EMASK[CWL-1-int'(row)];
        if (row == RW'(NR-1)) begin
          row <= '0;
          cur <= !cur;
          for (int r = 0; r < NR; r++) bank[cur][r] <= '0;
        end else begin
          row <= row + 1'b1;
        end
      end
    end
  end

endmodule
