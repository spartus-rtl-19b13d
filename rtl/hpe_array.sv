// HPE array: the N-th MAC array, built from M HPEs.
//
// In the MAC phase it behaves exactly like mac_array (shared NZV held from the
// delta FIFO pop, one weight word per cycle, per-lane partial sums). In the
// activation phase, HPE m receives adder-tree output m on its AT port; all M HPEs
// run the activation schedule in lockstep, so one slot q yields the outputs h_t of
// the M neurons q*M + m, m = 0..M-1, together (h_valid, h[m]).
//
// The last array being made of HPEs that also produce the activations follows the
// published design; running all HPEs in lockstep from one shared schedule is this
// design's choice.
module hpe_array
  import spartus_pkg::*;
#(
  parameter int M      = 64,
  parameter int DEPTH  = 64,
  parameter int SLOTS  = 16,
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int SLW   = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           nzv_load,
  input  act_t           nzv_in,
  input  logic           w_valid,
  input  wentry_t        w_word [M],
  input  logic           clr_en,
  input  logic [AW-1:0]  clr_addr,
  input  logic [AW-1:0]  rd_addr,
  output acc_t           acc_out [M],
  output logic           busy,
  input  logic           at_valid,
  input  gate_e          at_gate,
  input  act_t           at [M],
  input  logic [SLW-1:0] slot,
  output logic           h_valid,
  output act_t           h [M],
  output logic           act_busy
);

  act_t         nzv_hold;
  logic [M-1:0] pe_busy, pe_act_busy, pe_h_valid;

  always_ff @(posedge clk) begin
    if (!rst_n)        nzv_hold <= '0;
    else if (nzv_load) nzv_hold <= nzv_in;
  end

  for (genvar m = 0; m < M; m++) begin : g_hpe
    hpe #(.DEPTH(DEPTH), .SLOTS(SLOTS)) u_hpe (
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
      .busy    (pe_busy[m]),
      .at_valid(at_valid),
      .at_gate (at_gate),
      .at      (at[m]),
      .slot    (slot),
      .h_valid (pe_h_valid[m]),
      .h       (h[m]),
      .act_busy(pe_act_busy[m])
    );
  end

  assign busy     = |pe_busy;
  assign act_busy = |pe_act_busy;
  assign h_valid  = pe_h_valid[0];

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) (pe_h_valid == '0) || (pe_h_valid == '1));

endmodule
