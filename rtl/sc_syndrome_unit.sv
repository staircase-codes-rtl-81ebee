// sc_syndrome_unit: syndrome computation and the syndrome flip-flop bank of
// the staircase window decoder.
//
// A component codeword is addressed by (slot, j): the slot of the block it
// terminates in (holds its parity bits) and its row j in that block. The
// bank keeps a 32-bit syndrome and a "changed" flag for each of SLOTS x NR
// codewords. SLOTS is the window length L plus one: the extra slot collects
// the codewords that will terminate in the next block, whose first half is
// already in the window.
//
// Loading a received row r of block k (the paper's Fig. 2):
//  * the row's own bits are the second half of codeword (k, r): a masking
//    tree XORs the masks of its set bits, and the result is added to that
//    codeword's syndrome;
//  * bit c of the row is position r of codeword (k+1, c+PAD). All these
//    columns receive the same mask, read from a look-up table indexed by r;
//    it is added to every codeword whose bit is set.
// Both are the paper's scheme. A mask is the parity-check column of the bit
// (see sc_pkg). Any update sets the codeword's changed flag.
//
// During iterative decoding the controller reads one syndrome per cycle
// (combinational read), marks a decoded codeword done (syndrome cleared on
// success, only the flag cleared on failure) and applies the syndrome update
// of a corrected bit to the other codeword that holds it. The mask of a
// corrected bit depends only on its position in that other codeword, so the
// update port takes the position and looks the mask up itself:
// upd_first = 1 selects position upd_pos of the first half (table indexed
// by row), 0 selects column upd_pos of the second half.
//
// All writes take effect at the next clock edge; the controller never issues
// two writes to the same codeword in one cycle.
module sc_syndrome_unit
  import sc_pkg::*;
#(
  parameter int unsigned NR    = 512,
  parameter int unsigned NC    = 510,
  parameter int unsigned SLOTS = 8,
  localparam int unsigned SW   = $clog2(SLOTS),
  localparam int unsigned RW   = $clog2(NR)
) (
  input  logic          clk,
  input  logic          rst_n,
  // clear one slot (syndromes and flags)
  input  logic          clr_valid,
  input  logic [SW-1:0] clr_slot,
  // received row
  input  logic          ld_valid,
  input  logic [NC-1:0] ld_row,
  input  logic [RW-1:0] ld_idx,
  input  logic [SW-1:0] ld_row_slot,   // slot of codewords terminating in this block
  input  logic [SW-1:0] ld_col_slot,   // slot of codewords terminating in the next
  // read port
  input  logic [SW-1:0] rd_slot,
  input  logic [RW-1:0] rd_idx,
  output syn_t          rd_syn,
  output logic          rd_dirty,
  // decoding finished
  input  logic          done_valid,
  input  logic          done_ok,
  input  logic [SW-1:0] done_slot,
  input  logic [RW-1:0] done_idx,
  // syndrome update for a corrected bit
  input  logic          upd_valid,
  input  logic [SW-1:0] upd_slot,
  input  logic [RW-1:0] upd_idx,
  input  logic          upd_first,
  input  logic [RW-1:0] upd_pos
);

  localparam int unsigned PAD = NR - NC;
  localparam int unsigned CWL = NR + NC;

  // Parity-check column of every degree 0..CWL-1.
  function automatic logic [CWL-1:0][PAR-1:0] build_hmask();
    logic [CWL-1:0][PAR-1:0] t;
    gf_t x;
    x = gf_t'(1);
    for (int d = 0; d < int'(CWL); d++) begin
      t[d] = syn_of_loc(x, d[0]);
      x = gf_xtime(x);
    end
    return t;
  endfunction

  localparam logic [CWL-1:0][PAR-1:0] HMASK = build_hmask();

  syn_t  syn   [SLOTS][NR];
  logic  dirty [SLOTS][NR];
  syn_t  tree;
  syn_t  colmask;
  syn_t  updmask;

  // Masking tree (second half, positions NR..CWL-1 = degrees NC-1..0).
  always_comb begin
    tree = '0;
    for (int c = 0; c < int'(NC); c++)
      if (ld_row[c]) tree = tree ^ HMASK[NC-1-c];
    colmask = HMASK[CWL-1-int'(ld_idx)];
    updmask = upd_first ? HMASK[CWL-1-int'(upd_pos)] : HMASK[NC-1-int'(upd_pos)];
  end

  assign rd_syn   = syn[rd_slot][rd_idx];
  assign rd_dirty = dirty[rd_slot][rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(SLOTS); s++)
        for (int j = 0; j < int'(NR); j++) begin
          syn[s][j]   <= '0;
          dirty[s][j] <= 1'b0;
        end
    end else begin
      if (clr_valid)
        for (int j = 0; j < int'(NR); j++) begin
          syn[clr_slot][j]   <= '0;
          dirty[clr_slot][j] <= 1'b0;
        end
      if (ld_valid) begin
        syn[ld_row_slot][ld_idx]   <= syn[ld_row_slot][ld_idx] ^ tree;
        dirty[ld_row_slot][ld_idx] <= 1'b1;
        for (int c = 0; c < int'(NC); c++)
          if (ld_row[c]) begin
            syn[ld_col_slot][c+PAD]   <= syn[ld_col_slot][c+PAD] ^ colmask;
            dirty[ld_col_slot][c+PAD] <= 1'b1;
          end
      end
      if (done_valid) begin
        if (done_ok) syn[done_slot][done_idx] <= '0;
        dirty[done_slot][done_idx] <= 1'b0;
      end
      if (upd_valid) begin
        syn[upd_slot][upd_idx]   <= syn[upd_slot][upd_idx] ^ updmask;
        dirty[upd_slot][upd_idx] <= 1'b1;
      end
    end
  end

endmodule
