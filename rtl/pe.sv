// Processing Element (PE): one multiply-accumulate lane of a MAC array.
//
// Each valid cycle the PE receives a nonzero delta NZV (Q8.8), a weight W (8 bits,
// 6 fractional bits) and the weight's local row index LIDX from the CBCSC weight
// word. Following the DSP structure of the paper, NZV, W and LIDX are first
// registered (stage A); stage B multiplies and adds the partial sum currently held
// for row LIDX (ACC), giving a 48-bit result in the P register; in the following
// cycle P is written back into the partial-sum LUTRAM at the same address. If
// stage B needs the row that P is about to write, P is forwarded instead of the
// stale LUTRAM entry, so back-to-back updates of one row are exact.
//
// The partial sums are never cleared between time steps: they are this lane's share
// of the DeltaLSTM delta memory D (Eq. 3), which accumulates W*delta over time.
// They are zeroed by the clearing sweep at the start of a sequence (clr_en,
// clr_addr). A second, asynchronous read port (rd_addr/acc_out) feeds the adder
// tree during the activation phase. busy is high while a product is in flight.
// Latency from in_valid to the updated LUTRAM entry: 3 clock edges.
module pe
  import spartus_pkg::*;
#(
  parameter int DEPTH = 64,   // partial sums per lane (4*H/M)
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  act_t          nzv,
  input  wgt_t          w,
  input  lidx_t         lidx,
  input  logic          clr_en,
  input  logic [AW-1:0] clr_addr,
  input  logic [AW-1:0] rd_addr,
  output acc_t          acc_out,
  output logic          busy
);

  acc_t          acc_mem [DEPTH];
  logic          a_v, p_v;
  act_t          a_nzv;
  wgt_t          a_w;
  logic [AW-1:0] a_addr, p_addr;
  acc_t          p, acc_src;

  assign acc_src = (p_v && p_addr == a_addr) ? p : acc_mem[a_addr];
  assign acc_out = acc_mem[rd_addr];
  assign busy    = a_v || p_v;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_v <= 1'b0;
      p_v <= 1'b0;
    end else begin
      a_v <= in_valid;
      p_v <= a_v;
    end
    a_nzv  <= nzv;
    a_w    <= w;
    a_addr <= AW'(lidx);
    p      <= acc_src + acc_t'(a_nzv) * acc_t'(a_w);
    p_addr <= a_addr;
  end

  always_ff @(posedge clk) begin
    if (clr_en) begin
      if (int'(clr_addr) < DEPTH) acc_mem[clr_addr] <= '0;
    end else if (p_v) begin
      acc_mem[p_addr] <= p;
    end
  end

endmodule
