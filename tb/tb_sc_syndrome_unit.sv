// tb_sc_syndrome_unit: self-checking test of syndrome computation and the
// syndrome bank at a reduced size (64 x 62 blocks, 3 slots).
//
// Loads one random block with its own codewords in slot 0 and the next
// block's codewords in slot 1, then compares every stored syndrome with
// the Horner-rule syndrome (tb_sc_ref) of the corresponding half codeword:
// row r of the block for slot 0, column j-2 of the block for slot 1 (zero
// for the two padding rows). It then checks the changed flags, the "done"
// port with and without success, the correction-update port for both
// halves, and clearing a slot.
module tb_sc_syndrome_unit;
  import tb_sc_ref::*;

  localparam int NR = 64, NC = 62, SLOTS = 3, PAD = NR - NC, CWL = NR + NC;
  localparam int SW = $clog2(SLOTS), RW = $clog2(NR);

  logic clk = 0, rst_n = 0;
  logic clr_valid, ld_valid, done_valid, done_ok, upd_valid, upd_first, rd_dirty;
  logic [SW-1:0] clr_slot, ld_row_slot, ld_col_slot, rd_slot, done_slot, upd_slot;
  logic [RW-1:0] ld_idx, rd_idx, done_idx, upd_idx, upd_pos;
  logic [NC-1:0] ld_row;
  logic [31:0] rd_syn;

  sc_syndrome_unit #(.NR(NR), .NC(NC), .SLOTS(SLOTS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit [NC-1:0] blk [NR];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic read(int s, int j, output bit [31:0] sy, output bit dy);
    rd_slot = SW'(s); rd_idx = RW'(j);
    #1;
    sy = rd_syn; dy = rd_dirty;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [31:0] sy;
    bit dy;
    bit [1023:0] w;
    clr_valid = 0; ld_valid = 0; done_valid = 0; done_ok = 0; upd_valid = 0; upd_first = 0;
    clr_slot = '0; ld_row_slot = '0; ld_col_slot = SW'(1); rd_slot = '0; done_slot = '0;
    upd_slot = '0; ld_idx = '0; rd_idx = '0; done_idx = '0; upd_idx = '0; upd_pos = '0; ld_row = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < NR; r++) begin
      blk[r] = NC'({$urandom, $urandom});
      @(negedge clk);
      ld_valid = 1; ld_idx = RW'(r); ld_row = blk[r];
    end
    @(negedge clk);
    ld_valid = 0;
    for (int j = 0; j < NR; j++) begin
      w = '0;
      for (int c = 0; c < NC; c++) w[NC - 1 - c] = blk[j][c];
      read(0, j, sy, dy);
      check(sy == syn(w, CWL), $sformatf("row syndrome %0d", j));
      check(dy == 1'b1, $sformatf("row %0d marked changed", j));
      w = '0;
      if (j >= PAD) for (int p = 0; p < NR; p++) w[CWL - 1 - p] = blk[p][j - PAD];
      read(1, j, sy, dy);
      check(sy == syn(w, CWL), $sformatf("column syndrome %0d", j));
      check(dy == (w != '0), $sformatf("column %0d changed flag", j));
    end
    // done: success clears the syndrome, failure keeps it
    @(negedge clk);
    done_valid = 1; done_ok = 1; done_slot = '0; done_idx = RW'(5);
    @(negedge clk);
    done_ok = 0; done_idx = RW'(6);
    @(negedge clk);
    done_valid = 0;
    read(0, 5, sy, dy);
    check(sy == '0 && !dy, "successful decoding clears syndrome and flag");
    w = '0;
    for (int c = 0; c < NC; c++) w[NC - 1 - c] = blk[6][c];
    read(0, 6, sy, dy);
    check(sy == syn(w, CWL) && !dy, "failed decoding keeps syndrome, clears flag");
    // updates: first-half position 9 and second-half column 4 into slot 2 row 7
    @(negedge clk);
    upd_valid = 1; upd_slot = SW'(2); upd_idx = RW'(7); upd_first = 1; upd_pos = RW'(9);
    @(negedge clk);
    upd_valid = 0;
    w = '0; w[CWL - 1 - 9] = 1'b1;
    read(2, 7, sy, dy);
    check(sy == syn(w, CWL) && dy, "update of a first-half bit");
    @(negedge clk);
    upd_valid = 1; upd_first = 0; upd_pos = RW'(4);
    @(negedge clk);
    upd_valid = 0;
    w[NC - 1 - 4] = 1'b1;
    read(2, 7, sy, dy);
    check(sy == syn(w, CWL), "update of a second-half bit");
    // clear slot 1
    @(negedge clk);
    clr_valid = 1; clr_slot = SW'(1);
    @(negedge clk);
    clr_valid = 0;
    for (int j = 0; j < NR; j++) begin
      read(1, j, sy, dy);
      check(sy == '0 && !dy, $sformatf("slot cleared, row %0d", j));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
