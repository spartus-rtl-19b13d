// MAC array of M PEs (one of the first N-1 arrays).
//
// All M PEs of an array work on the same nonzero delta: the controller pops a
// (NZV, NZI) pair from this array's delta FIFO (nzv_load), and the NZV is held in
// nzv_hold while the controller reads the BLEN weight-memory words of that column.
// Each word read returns one (weight, LIDX) pair per PE one cycle later (w_valid),
// and every PE multiplies its weight by the held NZV and accumulates into its own
// partial-sum LUTRAM row LIDX. Because the pop coincides with the first word's read,
// nzv_hold changes exactly when the first weight of the new column arrives, so the
// array accepts one weight word per cycle with no bubbles between columns.
//
// acc_out[m] is PE m's partial sum at rd_addr, read by adder tree m. busy is high
// while any PE has a product in flight. The structure (M PEs sharing one NZV and one
// weight word) follows the paper; the exact hand-off timing is this design's choice.
module mac_array
  import spartus_pkg::*;
#(
  parameter int M     = 64,
  parameter int DEPTH = 64,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          nzv_load,
  input  act_t          nzv_in,
  input  logic          w_valid,
  input  wentry_t       w_word [M],
  input  logic          clr_en,
  input  logic [AW-1:0] clr_addr,
  input  logic [AW-1:0] rd_addr,
  output acc_t          acc_out [M],
  output logic          busy
);

  act_t         nzv_hold;
  logic [M-1:0] pe_busy;

  always_ff @(posedge clk) begin
    if (!rst_n)        nzv_hold <= '0;
    else if (nzv_load) nzv_hold <= nzv_in;
  end

  for (genvar m = 0; m < M; m++) begin : g_pe
    pe #(.DEPTH(DEPTH)) u_pe (
      .clk     (clk),
      .rst_n   (rst_n),
      .in_valid(w_valid),
      .nzv     (nzv_hold),
      .w       (w_word[m].w),
      .lidx    (w_word[m].lidx),
      .clr_en  (clr_en),
      .clr_addr(clr_addr),
      .rd_addr (rd_addr),
      .acc_out (acc_out[m]),
      .busy    (pe_busy[m])
    );
  end

  assign busy = |pe_busy;

endmodule
