// tb_sc_data_ram: self-checking test of the decoder's data memory.
//
// Fills a small memory through the row port, then mixes random row
// read-and-replace operations with single-bit flips at other addresses,
// comparing every read (one cycle after the request, old contents) with
// a model array kept by the testbench.
module tb_sc_data_ram;

  localparam int NC = 62, DEPTH = 96, AW = $clog2(DEPTH), CW = $clog2(NC);

  logic clk = 0;
  logic rw_valid, flip_valid;
  logic [AW-1:0] rw_addr, flip_addr;
  logic [CW-1:0] flip_col;
  logic [NC-1:0] wr_data, rd_data;

  sc_data_ram #(.NC(NC), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit [NC-1:0] model [DEPTH];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rw_valid = 0; flip_valid = 0; rw_addr = '0; flip_addr = '0; flip_col = '0; wr_data = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      rw_valid = 1; rw_addr = AW'(a); wr_data = NC'({$urandom, $urandom});
      model[a] = wr_data;
    end
    @(negedge clk);
    rw_valid = 0;
    for (int t = 0; t < 2000; t++) begin
      bit [NC-1:0] expect_rd;
      int a, f;
      @(negedge clk);
      a = int'($urandom % DEPTH);
      do f = int'($urandom % DEPTH); while (f == a);
      rw_valid = ($urandom % 2) == 1;
      rw_addr = AW'(a);
      wr_data = NC'({$urandom, $urandom});
      flip_valid = ($urandom % 2) == 1;
      flip_addr = AW'(f);
      flip_col = CW'($urandom % NC);
      expect_rd = model[a];
      if (rw_valid) model[a] = wr_data;
      if (flip_valid) model[f][flip_col] = ~model[f][flip_col];
      @(posedge clk); #1;
      if (rw_valid) check(rd_data == expect_rd, $sformatf("read of word %0d (test %0d)", a, t));
    end
    // Read everything back.
    flip_valid = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      rw_valid = 1; rw_addr = AW'(a); wr_data = model[a];
      @(posedge clk); #1;
      check(rd_data == model[a], $sformatf("final word %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
