// tb_bch3_decoder: self-checking test of the component decoder at its full
// length of 1022 bits.
//
// Draws random error patterns of weight 0 to 4 over degrees 0..1021 (and a
// few at the edges), computes their syndrome with the independent Horner
// evaluation of tb_sc_ref and feeds it to the decoder, one per cycle.
// Weights up to 3 must be decoded to exactly the injected positions; weight 4
// must be reported as a failure (the extended code has minimum distance 8).
// Also checks that a result appears one cycle after its syndrome and that
// each case v = 0..3 was exercised.
module tb_bch3_decoder;
  import tb_sc_ref::*;

  localparam int NLEN = 1022, NTEST = 3000;

  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid, out_ok;
  logic [31:0] in_syn;
  logic [1:0] out_nerr;
  logic [2:0][9:0] out_deg;

  bch3_decoder #(.NLEN(NLEN)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int seen_v [5];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (NTEST * 3 + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_syn = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NTEST; t++) begin
      int wgt;
      int pos [4];
      bit [1023:0] w;
      w = '0;
      wgt = t % 5;
      for (int i = 0; i < wgt; i++) begin
        int d;
        do begin
          if (t < 50) d = (i == 0) ? NLEN - 1 : int'($urandom % 3);   // edges
          else d = int'($urandom % NLEN);
        end while (w[d]);
        w[d] = 1'b1;
        pos[i] = d;
      end
      @(negedge clk);
      in_valid = 1;
      in_syn = syn(w, NLEN);
      @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      check(out_valid == 1'b1, "result one cycle after the syndrome");
      if (wgt <= 3) begin
        bit [1023:0] got;
        got = '0;
        for (int i = 0; i < int'(out_nerr); i++) got[out_deg[i]] = 1'b1;
        check(out_ok == 1'b1, $sformatf("weight %0d decodable (test %0d)", wgt, t));
        check(int'(out_nerr) == wgt, $sformatf("weight %0d count (test %0d, got %0d)", wgt, t, out_nerr));
        check(got == w, $sformatf("weight %0d positions (test %0d)", wgt, t));
        if (out_ok && int'(out_nerr) == wgt) seen_v[wgt]++;
      end else begin
        check(out_ok == 1'b0, $sformatf("weight 4 detected (test %0d)", t));
        if (!out_ok) seen_v[4]++;
      end
    end
    for (int v = 0; v <= 4; v++) begin
      $display("case weight %0d handled %0d times", v, seen_v[v]);
      check(seen_v[v] > 0, $sformatf("weight %0d exercised", v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
