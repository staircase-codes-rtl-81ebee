// sc_top: staircase-code codec, encoder and sliding-window decoder joined
// through an error-injection point.
//
// Information rows (NC-32 bits) enter the encoder, which appends 32 parity
// bits per row so that consecutive NR x NC blocks form a staircase code.
// Each coded row crosses the "line" (tx_row); there chan_err is XORed onto
// it before it enters the decoder, standing in for the transmission channel
// (the paper evaluates the code this way, in hardware, over a binary
// symmetric channel; the error generator itself is outside this module).
// The decoder returns each row L blocks later, corrected.
//
// Timing: the encoder advances only while the decoder accepts rows (its
// LOAD phase, NR cycles per block); during the decoder's DECODE phase the
// encoder holds its output and in_ready falls. chan_err must be valid in
// every cycle in which tx_fire is high and applies to that row. The ev_*
// outputs are the decoder's event pulses.
module sc_top
  import sc_pkg::*;
#(
  parameter int unsigned NR   = 512,
  parameter int unsigned NC   = 510,
  parameter int unsigned L    = 7,
  parameter int unsigned ITER = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [NC-PAR-1:0] in_info,
  input  logic [NC-1:0]     chan_err,
  output logic              tx_fire,    // a coded row crosses the line this cycle
  output logic [NC-1:0]     tx_row,
  output logic              out_valid,
  output logic [NC-1:0]     out_row,
  output logic              out_last,
  output logic              ev_ok,
  output logic [1:0]        ev_nerr,
  output logic              ev_fail,
  output logic              ev_xblk,
  output logic              ev_early,
  output logic              ev_maxit
);

  logic tx_valid, rx_ready, tx_last;

  sc_encoder #(.NR(NR), .NC(NC)) u_enc (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_info,
    .out_valid(tx_valid), .out_ready(rx_ready), .out_row(tx_row), .out_last(tx_last)
  );

  assign tx_fire = tx_valid && rx_ready;

  sc_decoder #(.NR(NR), .NC(NC), .L(L), .ITER(ITER)) u_dec (
    .clk, .rst_n,
    .in_valid(tx_valid), .in_ready(rx_ready), .in_row(tx_row ^ chan_err),
    .out_valid, .out_row, .out_last,
    .ev_ok, .ev_nerr, .ev_fail, .ev_xblk, .ev_early, .ev_maxit
  );

  // The decoder counts rows itself; the encoder's block marker must agree.
  property p_block_aligned;
    @(posedge clk) disable iff (!rst_n) tx_fire && tx_last |=> out_last;
  endproperty
  a_block_aligned: assert property (p_block_aligned);

endmodule
