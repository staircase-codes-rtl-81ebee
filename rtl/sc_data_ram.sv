// sc_data_ram: the decoder's data memory ("memory R" of the paper).
//
// Holds the hard decisions of the L blocks of the decoding window, one word
// per block row: DEPTH = L*NR words of NC bits. The paper gives only its
// role (store the received bits, flip corrected positions, output the
// decoded block); the port set below is this design's choice:
//  * a row port that reads the old word and writes a new one at the same
//    address in the same cycle (read-before-write), used when a new row
//    replaces the row of the block that leaves the window;
//  * a bit-flip port that inverts one bit of one word (a read-modify-write
//    with a per-bit write enable), used by the corrections.
// Reads are synchronous: rd_data is valid the cycle after rw_valid.
// The two ports must not address the same word in one cycle.
module sc_data_ram #(
  parameter int unsigned NC    = 510,
  parameter int unsigned DEPTH = 7 * 512,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(NC)
) (
  input  logic          clk,
  input  logic          rw_valid,
  input  logic [AW-1:0] rw_addr,
  input  logic [NC-1:0] wr_data,
  output logic [NC-1:0] rd_data,
  input  logic          flip_valid,
  input  logic [AW-1:0] flip_addr,
  input  logic [CW-1:0] flip_col
);

  logic [NC-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rw_valid) begin
      rd_data       <= mem[rw_addr];
      mem[rw_addr]  <= wr_data;
    end
    if (flip_valid)
      mem[flip_addr][flip_col] <= ~mem[flip_addr][flip_col];
  end

endmodule
