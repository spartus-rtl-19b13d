// Adder tree m: sums the partial sums of PE m of all N MAC arrays into the
// DeltaLSTM delta-memory value D (Eq. 3) and converts it to the Q8.8 format of the
// HPE port AT.
//
// The N inputs are added pairwise in log2(N) levels (N must be a power of two), the
// sum is shifted right by the weight's fractional bits (Q.14 -> Q.8, arithmetic
// shift) and saturated to 16 bits. The result is registered: out_valid and out_gate
// follow in_valid and in_gate by one cycle. That there are M trees feeding the HPEs
// follows the paper; the single output register and the rounding by truncation are
// this design's choices.
module adder_tree
  import spartus_pkg::*;
#(
  parameter int N   = 8,
  localparam int LV = (N > 1) ? $clog2(N) : 1,
  localparam int SW = ACC_W + LV
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  gate_e in_gate,
  input  acc_t  in_acc [N],
  output logic  out_valid,
  output gate_e out_gate,
  output act_t  out_at
);

  typedef logic signed [SW-1:0] sum_t;
  sum_t lvl [LV+1][N];
  sum_t total;

  always_comb begin
    for (int l = 0; l <= LV; l++)
      for (int k = 0; k < N; k++) lvl[l][k] = '0;
    for (int k = 0; k < N; k++) lvl[0][k] = sum_t'(in_acc[k]);
    for (int l = 1; l <= LV; l++)
      for (int k = 0; k < (N >> l); k++) lvl[l][k] = lvl[l-1][2*k] + lvl[l-1][2*k+1];
    total = (N > 1) ? lvl[LV][0] : lvl[0][0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_gate  <= GATE_I;
    end else begin
      out_valid <= in_valid;
      out_gate  <= in_gate;
    end
    out_at <= sat_act(64'(total >>> W_FRAC));
  end

  initial assert (N == (1 << $clog2(N))) else $error("adder_tree: N must be a power of two");

endmodule
