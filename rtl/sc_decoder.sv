// sc_decoder: sliding-window iterative decoder of the staircase code.
//
// The decoder holds the L most recent received blocks (L = 7 in the paper's
// FPGA results) in the data RAM and the syndromes of all component codewords
// that end in them, plus the partial syndromes of the codewords that end in
// the next block, in the syndrome unit. Per block it runs two phases:
//
//  LOAD (NR cycles, one row per cycle, in_ready high): row r of the new block
//    is written into the RAM slot of the oldest block, whose row r is read
//    out at the same time and leaves as decoded output; the syndrome unit adds
//    the row to the syndromes (see sc_syndrome_unit).
//  DECODE: up to ITER iterations; each visits the blocks newest to oldest and,
//    in each block, the codewords j = 0..NR-1 ending there. A codeword is
//    decoded only if its syndrome changed since its last decoding (paper,
//    footnote in Sec. III). A successful decoding flips its bits in the RAM,
//    one per cycle, adds each flipped bit's mask to the other codeword that
//    holds that bit, and clears its own syndrome. An iteration in which no
//    codeword needed decoding ends the phase early.
//
// The order of decoding, the window, the per-codeword syndrome update and
// the change-triggered decoding follow the paper. These are this design's
// choices: one component decoder, one codeword visit per cycle, one
// correction per cycle; ITER; stopping early; and rejecting a decoding that
// would flip a bit outside the window (in a block already delivered, in the
// all-zero block B_0, or in the zero padding rows of B^_{i-1}^T).
//
// Start-up: after reset the window is all zeros, which is a valid code
// sequence ending in B_0; blocks B_1, B_2, ... follow. The first decoded row
// appears while block L+1 is loaded; to flush the last L-1 blocks the source
// sends further encoded blocks (for instance with all-zero information).
//
// Interface: in_row[c] is column c of a received row; rows arrive in block
// order, row 0 first, accepted when in_valid && in_ready. out_row is valid
// (out_valid) one cycle after the input row that displaced it; there is no
// output back-pressure. The ev_* outputs pulse once per event, for counting.
// Cycles per block: NR for LOAD + 1 for clearing a slot + between 1 and ITER
// iterations, each of min(L, blocks received) * NR cycles plus 2 + v cycles
// per decoded codeword (v = bits it flips).
module sc_decoder
  import sc_pkg::*;
#(
  parameter int unsigned NR   = 512,
  parameter int unsigned NC   = 510,
  parameter int unsigned L    = 7,   // window length in blocks
  parameter int unsigned ITER = 3    // maximum iterations per window position
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [NC-1:0] in_row,
  output logic          out_valid,
  output logic [NC-1:0] out_row,
  output logic          out_last,
  // events, one pulse each
  output logic          ev_ok,      // successful decoding with at least one flip
  output logic [1:0]    ev_nerr,    // its number of flips
  output logic          ev_fail,    // decoding failure or rejected decoding
  output logic          ev_xblk,    // a flip in the older block of a codeword
  output logic          ev_early,   // decode phase ended before ITER iterations
  output logic          ev_maxit    // decode phase ran all ITER iterations
);

  localparam int unsigned SLOTS = L + 1;
  localparam int unsigned SW    = $clog2(SLOTS);
  localparam int unsigned LW    = (L > 1) ? $clog2(L) : 1;
  localparam int unsigned RW    = $clog2(NR);
  localparam int unsigned CW    = $clog2(NC);
  localparam int unsigned DEPTH = L * NR;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned PAD   = NR - NC;
  localparam int unsigned CWL   = NR + NC;
  localparam int unsigned IW    = (ITER > 1) ? $clog2(ITER) : 1;

  typedef enum logic [2:0] {S_CLR, S_LOAD, S_SCAN, S_WAIT, S_FIX} state_t;

  // One pending correction: a RAM bit and the other codeword holding it.
  typedef struct packed {
    logic [AW-1:0] addr;
    logic [CW-1:0] col;
    logic [SW-1:0] slot;
    logic [RW-1:0] idx;
    logic          first;
    logic [RW-1:0] pos;
    logic          xblk;
  } fix_t;

  state_t        state;
  logic [31:0]   newest;      // index of the newest block received (0 = B_0)
  logic [LW-1:0] dslot_new;   // RAM slot of the newest block
  logic [SW-1:0] sslot_new;   // syndrome slot of codewords ending in it
  logic [RW-1:0] row;         // LOAD row / DECODE codeword index j
  logic [LW-1:0] off;         // DECODE: block offset from the newest
  logic [IW-1:0] it;
  logic          any;         // a codeword was decoded in this iteration
  fix_t [2:0]    fix_q;
  logic [1:0]    nfix_q, kfix;

  // ---- slot arithmetic ----------------------------------------------------
  function automatic logic [LW-1:0] dslot_at(input logic [LW-1:0] base, input int o);
    int s;
    s = int'(base) - o;
    if (s < 0) s = s + int'(L);
    if (s >= int'(L)) s = s - int'(L);
    return LW'(s);
  endfunction

  function automatic logic [SW-1:0] sslot_at(input logic [SW-1:0] base, input int o);
    int s;
    s = int'(base) + o;
    if (s < 0) s = s + int'(SLOTS);
    if (s >= int'(SLOTS)) s = s - int'(SLOTS);
    return SW'(s);
  endfunction

  function automatic logic [AW-1:0] ram_addr(input logic [LW-1:0] slot, input logic [RW-1:0] r);
    return AW'(int'(slot) * int'(NR) + int'(r));
  endfunction

  // number of real blocks in the window
  logic [LW:0] nblk;
  assign nblk = (newest >= 32'(L)) ? (LW+1)'(L) : (LW+1)'(newest);

  // ---- submodules ---------------------------------------------------------
  logic          su_clr, su_ld, su_done, su_done_ok, su_upd;
  logic [SW-1:0] su_clr_slot, su_rd_slot;
  syn_t          su_rd_syn;
  logic          su_rd_dirty;
  logic          ram_rw, ram_flip;
  logic [AW-1:0] ram_rw_addr;
  logic          bch_in, bch_out, bch_ok;
  logic [1:0]    bch_nerr;
  logic [2:0][DEG_W-1:0] bch_deg;

  sc_syndrome_unit #(.NR(NR), .NC(NC), .SLOTS(SLOTS)) u_syn (
    .clk, .rst_n,
    .clr_valid(su_clr), .clr_slot(su_clr_slot),
    .ld_valid(su_ld), .ld_row(in_row), .ld_idx(row),
    .ld_row_slot(sslot_at(sslot_new, 1)), .ld_col_slot(sslot_at(sslot_new, 2)),
    .rd_slot(su_rd_slot), .rd_idx(row), .rd_syn(su_rd_syn), .rd_dirty(su_rd_dirty),
    .done_valid(su_done), .done_ok(su_done_ok), .done_slot(su_rd_slot), .done_idx(row),
    .upd_valid(su_upd), .upd_slot(fix_q[kfix].slot), .upd_idx(fix_q[kfix].idx),
    .upd_first(fix_q[kfix].first), .upd_pos(fix_q[kfix].pos)
  );

  sc_data_ram #(.NC(NC), .DEPTH(DEPTH)) u_ram (
    .clk,
    .rw_valid(ram_rw), .rw_addr(ram_rw_addr), .wr_data(in_row), .rd_data(out_row),
    .flip_valid(ram_flip), .flip_addr(fix_q[kfix].addr), .flip_col(fix_q[kfix].col)
  );

  bch3_decoder #(.NLEN(CWL)) u_bch (
    .clk, .rst_n,
    .in_valid(bch_in), .in_syn(su_rd_syn),
    .out_valid(bch_out), .out_ok(bch_ok), .out_nerr(bch_nerr), .out_deg(bch_deg)
  );

  // ---- corrections proposed by the component decoder ----------------------
  fix_t [2:0] fix_d;
  logic       fix_ok;
  logic [SW-1:0] ss_cur;

  assign ss_cur     = sslot_at(sslot_new, -int'(off));
  assign su_rd_slot = ss_cur;

  always_comb begin
    int p;
    fix_ok = bch_ok;
    fix_d  = '0;
    for (int e = 0; e < 3; e++) begin
      p = int'(CWL) - 1 - int'(bch_deg[e]);
      if (p >= int'(NR)) begin
        // bit of this block: row j, column p-NR; other codeword ends in the next block
        fix_d[e].addr  = ram_addr(dslot_at(dslot_new, int'(off)), row);
        fix_d[e].col   = CW'(p - int'(NR));
        fix_d[e].slot  = sslot_at(ss_cur, 1);
        fix_d[e].idx   = RW'(p - int'(NR) + int'(PAD));
        fix_d[e].first = 1'b1;
        fix_d[e].pos   = row;
        fix_d[e].xblk  = 1'b0;
      end else begin
        // bit of the previous block: row p, column j-PAD; other codeword ends there
        fix_d[e].addr  = ram_addr(dslot_at(dslot_new, int'(off) + 1), RW'(p));
        fix_d[e].col   = CW'(int'(row) - int'(PAD));
        fix_d[e].slot  = sslot_at(ss_cur, -1);
        fix_d[e].idx   = RW'(p);
        fix_d[e].first = 1'b0;
        fix_d[e].pos   = RW'(int'(row) - int'(PAD));
        fix_d[e].xblk  = 1'b1;
        if (e < int'(bch_nerr) &&
            (int'(row) < int'(PAD) || int'(off) + 1 >= int'(nblk))) fix_ok = 1'b0;
      end
    end
  end

  // ---- control ------------------------------------------------------------
  logic load_fire, last_cw, last_blk, last_it;

  assign in_ready  = (state == S_LOAD);
  assign load_fire = in_valid && in_ready;
  assign last_cw   = (row == RW'(NR-1));
  assign last_blk  = (int'(off) + 1 >= int'(nblk));
  assign last_it   = (int'(it) + 1 >= int'(ITER));

  always_comb begin
    su_clr      = (state == S_CLR);
    su_clr_slot = sslot_at(sslot_new, 2);
    su_ld       = load_fire;
    ram_rw      = load_fire;
    ram_rw_addr = ram_addr(dslot_at(dslot_new, -1), row);
    bch_in      = (state == S_SCAN) && su_rd_dirty;
    ram_flip    = (state == S_FIX);
    su_upd      = (state == S_FIX);
    su_done     = 1'b0;
    su_done_ok  = 1'b0;
    if (state == S_WAIT && bch_out && !(fix_ok && bch_nerr != 2'd0)) begin
      su_done    = 1'b1;
      su_done_ok = fix_ok;
    end
    if (state == S_FIX && kfix + 2'd1 == nfix_q) begin
      su_done    = 1'b1;
      su_done_ok = 1'b1;
    end
  end

  // Step to the next codeword after this cycle; any_now: a codeword was
  // decoded in the iteration so far.
  logic adv, any_now;
  always_comb begin
    adv     = 1'b0;
    any_now = 1'b1;
    unique case (state)
      S_SCAN: begin adv = !su_rd_dirty; any_now = any; end
      S_WAIT: adv = !(fix_ok && bch_nerr != 2'd0);
      S_FIX:  adv = (kfix + 2'd1 == nfix_q);
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_CLR;
      newest    <= '0;
      dslot_new <= '0;
      sslot_new <= '0;
      row       <= '0;
      off       <= '0;
      it        <= '0;
      any       <= 1'b0;
      fix_q     <= '0;
      nfix_q    <= '0;
      kfix      <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      ev_ok     <= 1'b0;
      ev_nerr   <= '0;
      ev_fail   <= 1'b0;
      ev_xblk   <= 1'b0;
      ev_early  <= 1'b0;
      ev_maxit  <= 1'b0;
    end else begin
      out_valid <= load_fire && (newest >= 32'(L));
      out_last  <= load_fire && last_cw;
      ev_ok     <= 1'b0;
      ev_fail   <= 1'b0;
      ev_xblk   <= 1'b0;
      ev_early  <= 1'b0;
      ev_maxit  <= 1'b0;
      unique case (state)
        S_CLR: begin
          state <= S_LOAD;
          row   <= '0;
        end
        S_LOAD: begin
          if (load_fire) begin
            if (!last_cw) begin
              row <= row + 1'b1;
            end else begin
              row       <= '0;
              newest    <= newest + 1;
              dslot_new <= dslot_at(dslot_new, -1);
              sslot_new <= sslot_at(sslot_new, 1);
              off       <= '0;
              it        <= '0;
              any       <= 1'b0;
              state     <= S_SCAN;
            end
          end
        end
        S_SCAN: begin
          if (su_rd_dirty) begin
            any   <= 1'b1;
            state <= S_WAIT;
          end
        end
        S_WAIT: begin
          if (fix_ok && bch_nerr != 2'd0) begin
            fix_q  <= fix_d;
            nfix_q <= bch_nerr;
            kfix   <= '0;
            state  <= S_FIX;
            ev_ok   <= 1'b1;
            ev_nerr <= bch_nerr;
          end else begin
            ev_fail <= !fix_ok;
            state   <= S_SCAN;
          end
        end
        S_FIX: begin
          ev_xblk <= fix_q[kfix].xblk;
          if (kfix + 2'd1 == nfix_q) begin
            state <= S_SCAN;
          end else begin
            kfix <= kfix + 2'd1;
          end
        end
        default: state <= S_CLR;
      endcase
      if (adv) begin
        if (!last_cw) begin
          row <= row + 1'b1;
        end else begin
          row <= '0;
          if (!last_blk) begin
            off <= off + 1'b1;
          end else begin
            off <= '0;
            if (!any_now) begin
              state    <= S_CLR;
              ev_early <= !last_it;
              ev_maxit <= last_it;
            end else if (last_it) begin
              state    <= S_CLR;
              ev_maxit <= 1'b1;
            end else begin
              it  <= it + 1'b1;
              any <= 1'b0;
            end
          end
        end
      end
    end
  end

endmodule
