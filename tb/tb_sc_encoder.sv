// tb_sc_encoder: self-checking test of the staircase encoder.
//
// Encodes NBLK blocks of random information at a reduced block size (the
// code construction is the same at any NR = NC + 2) with random output
// back-pressure. For every row j of every block B_k it rebuilds the
// component codeword [row j of B^_{k-1}^T, row j of B_k] and checks, with the
// reference arithmetic of tb_sc_ref, that it is divisible by g(x) and has
// zero BCH syndrome, and that the information columns pass unchanged. It
// also checks that a row leaves the encoder exactly one cycle after it is
// accepted when the output is not stalled.
module tb_sc_encoder;
  import tb_sc_ref::*;

  localparam int NR = 64, NC = 62, PAR = 32, NI = NC - PAR, PAD = NR - NC;
  localparam int CWL = NR + NC, NBLK = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic [NI-1:0] in_info;
  logic [NC-1:0] out_row;

  sc_encoder #(.NR(NR), .NC(NC)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit [NI-1:0] info_q[$];
  bit [NC-1:0] blk [NBLK+1][NR];
  int nout = 0, nin = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // Watchdog.
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Driver: random valid, random info.
  initial begin
    in_valid = 0; in_info = '0; out_ready = 0;
    for (int r = 0; r < NR; r++) blk[0][r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // Latency check on the first row.
    #1;
    in_valid = 1; in_info = NI'({$urandom, $urandom}); out_ready = 1;
    @(posedge clk); #1;
    check(out_valid === 1'b1, "row appears one cycle after acceptance");
    in_valid = 0;
    while (nin < NBLK * NR) begin
      @(negedge clk);
      out_ready = ($urandom % 4) != 0;
      in_valid  = (nin < NBLK * NR) && (($urandom % 5) != 0);
      in_info   = NI'({$urandom, $urandom});
    end
    in_valid = 0;
    out_ready = 1;
    repeat (5) @(posedge clk);
    // Check every component codeword.
    for (int k = 1; k <= NBLK; k++)
      for (int j = 0; j < NR; j++) begin
        bit [1023:0] w;
        w = '0;
        if (j >= PAD)
          for (int p = 0; p < NR; p++) w[CWL - 1 - p] = blk[k-1][p][j - PAD];
        for (int c = 0; c < NC; c++) w[NC - 1 - c] = blk[k][j][c];
        check(rem(w, CWL) == 32'd0, $sformatf("block %0d row %0d divisible by g", k, j));
        check(syn(w, CWL) == 32'd0, $sformatf("block %0d row %0d zero syndrome", k, j));
      end
    check(nout == NBLK * NR, "all rows delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Record accepted info and produced rows.
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin info_q.push_back(in_info); nin++; end
    if (out_valid && out_ready) begin
      bit [NI-1:0] exp_info;
      int k, r;
      k = nout / NR + 1; r = nout % NR;
      if (k <= NBLK) blk[k][r] = out_row;
      exp_info = info_q.pop_front();
      check(out_row[NI-1:0] == exp_info, "information columns pass through");
      check(out_last == (r == NR - 1), "block end marker");
      nout++;
    end
  end

endmodule
