// tb_sc_top: end-to-end test of the codec (encoder, error injection,
// window decoder) at a reduced block size: 64 x 62 blocks, window L = 4.
//
// Random information rows are offered whenever the codec accepts them. The
// coded rows crossing the line are recorded; errors are injected at about
// 1 bit in 100, with two clean blocks, a 3 x 3 burst and a row with 4
// errors. Every decoded row must equal the coded row that was sent, and its
// information columns the information that was offered. The test counts how
// often each mechanism happened (1-, 2- and 3-bit corrections, failed
// decodings, corrections in the older block, early end of decoding,
// iteration limit) and fails on any that never did. It also checks the
// decoder's LOAD rate of one row per cycle: each block crosses the line in
// NR consecutive cycles.
module tb_sc_top;

  localparam int NR = 64, NC = 62, PAR = 32, NI = NC - PAR;
  localparam int L = 4, ITER = 3, NB = 14;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, tx_fire, out_valid, out_last;
  logic [NI-1:0] in_info;
  logic [NC-1:0] chan_err, tx_row, out_row;
  logic ev_ok, ev_fail, ev_xblk, ev_early, ev_maxit;
  logic [1:0] ev_nerr;

  sc_top #(.NR(NR), .NC(NC), .L(L), .ITER(ITER)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit [NI-1:0] info [NB*NR];
  bit [NC-1:0] sent [NB*NR];
  bit [NC-1:0] err  [NB*NR];
  int nin = 0, ntx = 0, nout = 0, nerr_in = 0, run = 0;
  int cnt_v [4], cnt_fail = 0, cnt_xblk = 0, cnt_early = 0, cnt_maxit = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < NB * NR; n++) begin
      int k, j;
      k = n / NR + 1; j = n % NR;
      info[n] = NI'({$urandom, $urandom});
      err[n] = '0;
      if (k != 4 && k != 5 && k <= NB - L + 1)
        for (int c = 0; c < NC; c++) if ($urandom % 100 == 0) err[n][c] = 1'b1;
      if (k == 7 && j >= 20 && j < 23) err[n][5 +: 3] = 3'b111;
      if (k == 7 && j == 40) err[n] = 62'h1 | (62'h1 << 11) | (62'h1 << 22) | (62'h1 << 33);
      nerr_in += $countones(err[n]);
    end
    in_valid = 0; in_info = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (nin < NB * NR) begin
      @(negedge clk);
      in_valid = 1;
      in_info = info[nin];
    end
    @(negedge clk);
    in_valid = 0;
    repeat (20000) begin
      @(posedge clk);
      if (nout == (NB - L) * NR) break;
    end
    $display("bit errors %0d; v1=%0d v2=%0d v3=%0d fail=%0d xblk=%0d early=%0d maxit=%0d",
             nerr_in, cnt_v[1], cnt_v[2], cnt_v[3], cnt_fail, cnt_xblk, cnt_early, cnt_maxit);
    check(nout == (NB - L) * NR, $sformatf("rows delivered %0d", nout));
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

  // Error injection for the row on the line.
  always_comb chan_err = (ntx < NB * NR) ? err[ntx] : '0;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) nin++;
    if (tx_fire) begin
      sent[ntx] = tx_row;
      ntx++;
      run++;
    end else if (run != 0) begin
      check(run == NR, $sformatf("block crossed the line in %0d consecutive cycles", run));
      run = 0;
    end
    if (out_valid) begin
      check(out_row == sent[nout], $sformatf("decoded row %0d equals sent row", nout));
      check(out_row[NI-1:0] == info[nout], $sformatf("decoded row %0d information", nout));
      check(out_last == (nout % NR == NR - 1), "block end marker");
      nout++;
    end
    if (ev_ok) cnt_v[ev_nerr]++;
    if (ev_fail) cnt_fail++;
    if (ev_xblk) cnt_xblk++;
    if (ev_early) cnt_early++;
    if (ev_maxit) cnt_maxit++;
  end

endmodule
