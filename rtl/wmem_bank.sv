// Weight memory (WMEM) bank of one MAC array.
//
// Holds this array's share of the stacked DeltaLSTM weight matrix in CBCSC form:
// the columns c with c mod N = n, in order of their local column index c / N, each
// column as BLEN consecutive words. A word is M lanes of (8-bit weight, 8-bit LIDX),
// lane m being the next nonzero of the subcolumn owned by PE m (rows r with
// r mod M = m, LIDX = r / M). Column lc therefore starts at address lc*BLEN.
//
// Simple dual-port memory with a registered read (one cycle latency, rvalid follows
// re), as a block RAM provides. The write port is loaded by the host before
// inference. Depth, and the absence of a separate read enable on the write side,
// are this design's choices.
module wmem_bank
  import spartus_pkg::*;
#(
  parameter int M     = 64,
  parameter int DEPTH = 1024,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  wentry_t       wdata [M],
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output wentry_t       rdata [M],
  output logic          rvalid
);

  typedef wentry_t word_t [M];
  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rvalid <= 1'b0;
    else        rvalid <= re;
  end

endmodule
