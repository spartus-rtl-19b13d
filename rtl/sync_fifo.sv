// Synchronous first-word-fall-through FIFO used for the state FIFO (S-FIFO), the
// delta FIFOs (D-FIFO) and the output buffer.
//
// The head entry is visible on rdata whenever empty is low; rd_en pops it. A write
// and a read may happen in the same cycle. Writing while full or reading while
// empty is a protocol error and is flagged by assertions. Reset is synchronous and active low. Storage is a plain array,
// which an FPGA flow maps to distributed or block RAM. count gives the occupancy.
//
// The published design names the FIFOs but not their construction; this
// first-word-fall-through form and its depths are this design's choice.
module sync_fifo #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 16,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             full,
  output logic             empty,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign rdata = mem[rptr];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (wr_en) wptr <= inc(wptr);
      if (rd_en) rptr <= inc(rptr);
      count <= count + (AW+1)'(wr_en) - (AW+1)'(rd_en);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> (!full || rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);

endmodule
