// tb_sc_decoder: self-checking test of the sliding-window decoder at a
// reduced block size (64 x 62, window of 4 blocks).
//
// The testbench encodes random blocks itself (long division by g(x) from
// tb_sc_ref), flips random bits at about 1 in 100 (a few blocks are sent
// clean, one carries a 3 x 3 burst and a row with 4 errors), and feeds the rows to the decoder as
// fast as it accepts them. Every decoded row must equal the row that was
// sent. It also checks that the decoder accepts exactly NR rows per block in
// consecutive cycles, that the first output appears while block L+1 loads,
// and that each mechanism happened: corrections of 1, 2 and 3 bits,
// failed decodings, corrections in the older block of a codeword, early
// end of decoding and the iteration limit.
module tb_sc_decoder;
  import tb_sc_ref::*;

  localparam int NR = 64, NC = 62, PAR = 32, NI = NC - PAR, PAD = NR - NC;
  localparam int CWL = NR + NC, L = 4, ITER = 3, NB = 14;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_last;
  logic [NC-1:0] in_row, out_row;
  logic ev_ok, ev_fail, ev_xblk, ev_early, ev_maxit;
  logic [1:0] ev_nerr;

  sc_decoder #(.NR(NR), .NC(NC), .L(L), .ITER(ITER)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit [NC-1:0] clean [NB+1][NR];
  bit [NC-1:0] err   [NB+1][NR];
  int nin = 0, nout = 0, nerr_in = 0;
  int cnt_v [4], cnt_fail = 0, cnt_xblk = 0, cnt_early = 0, cnt_maxit = 0;
  int run = 0, first_out_nin = -1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic bit [NC-1:0] encode_row(int k, int j, bit [NI-1:0] info);
    bit [1023:0] w;
    bit [31:0] par;
    bit [NC-1:0] row;
    w = '0;
    if (j >= PAD)
      for (int p = 0; p < NR; p++) w[CWL - 1 - p] = clean[k-1][p][j - PAD];
    for (int c = 0; c < NI; c++) w[NC - 1 - c] = info[c];
    par = rem(w, CWL);
    row = '0;
    row[NI-1:0] = info;
    for (int d = 0; d < PAR; d++) row[NC - 1 - d] = par[d];
    return row;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < NR; r++) clean[0][r] = '0;
    for (int k = 1; k <= NB; k++)
      for (int j = 0; j < NR; j++) begin
        clean[k][j] = encode_row(k, j, NI'({$urandom, $urandom}));
        err[k][j] = '0;
        if (k != 5 && k != 6 && k <= NB - L + 1)
          for (int c = 0; c < NC; c++)
            if ($urandom % 100 == 0) err[k][j][c] = 1'b1;
        if (k == 8 && j >= 10 && j < 13) err[k][j][20 +: 3] = 3'b111;    // 3x3 burst
        if (k == 8 && j == 30) err[k][j] = 62'h1 | (62'h1 << 10) | (62'h1 << 20) | (62'h1 << 40);
        nerr_in += $countones(err[k][j]);
      end
    in_valid = 0; in_row = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (nin < NB * NR) begin
      @(negedge clk);
      in_valid = 1;
      in_row = clean[nin / NR + 1][nin % NR] ^ err[nin / NR + 1][nin % NR];
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(posedge clk);
    $display("bit errors sent %0d; v1=%0d v2=%0d v3=%0d fail=%0d xblk=%0d early=%0d maxit=%0d",
             nerr_in, cnt_v[1], cnt_v[2], cnt_v[3], cnt_fail, cnt_xblk, cnt_early, cnt_maxit);
    check(nout == (NB - L) * NR, $sformatf("rows delivered %0d", nout));
    check(first_out_nin == L * NR + 2, "first output while block L+1 loads");
    check(cnt_v[1] > 0, "1-bit corrections happened");
    check(cnt_v[2] > 0, "2-bit corrections happened");
    check(cnt_v[3] > 0, "3-bit corrections happened");
    check(cnt_fail > 0, "failed decodings happened");
    check(cnt_xblk > 0, "corrections in the older block happened");
    check(cnt_early > 0, "early end of decoding happened");
    check(cnt_maxit > 0, "iteration limit reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      nin++;
      run++;
    end else if (run != 0) begin
      check(run == NR, $sformatf("block accepted in %0d consecutive cycles", run));
      run = 0;
    end
    if (out_valid) begin
      int k, r;
      if (first_out_nin < 0) first_out_nin = nin;
      k = nout / NR + 1; r = nout % NR;
      check(out_row == clean[k][r], $sformatf("decoded block %0d row %0d", k, r));
      nout++;
    end
    if (ev_ok) cnt_v[ev_nerr]++;
    if (ev_fail) cnt_fail++;
    if (ev_xblk) cnt_xblk++;
    if (ev_early) cnt_early++;
    if (ev_maxit) cnt_maxit++;
  end

endmodule
