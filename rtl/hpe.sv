// Heterogeneous Processing Element (HPE): a PE of the last MAC array that also turns
// the delta memory of one neuron into the next cell state c_t and output h_t.
//
// MAC mode (in_valid) is the same as a PE: registered NZV and W (sign-extended to
// 16 bits) are multiplied, the partial sum ACC of row LIDX is added (mux s2 = ACC)
// and the result is written back to the LUTRAM. The multiplexers in front of the
// DSP select the operands: s0 picks NZV, c_{t-1} or the tanh output for port A,
// s1 picks W or the sigmoid output for port B, and s2 picks ACC, 0 or the DSP's own
// P register as the addend. s3 selects whether the tanh table sees the adder-tree
// port AT or the DSP result ACT.
//
// Activation mode. The controller presents the four delta-memory values of one
// neuron slot on AT in consecutive cycles, in the stacked order i, g, f, o
// (at_valid, at_gate). The fixed schedule below (cycle 0 = AT carries D_i) then
// runs without further input:
//   0: sig_in <= D_i
//   1: tanh_in <= D_g
//   2: sig_in <= D_f;  A <= tanh(D_g), B <= sig(D_i)
//   3: sig_in <= D_o;  P <= A*B + 0;            A <= c_{t-1}, B <= sig(D_f)
//   4: P <= A*B + P                              (= f*c_{t-1} + i*g, Q16.16)
//   5: c_t = sat(P >>> 8) written to the cell memory; tanh_in <= c_t (s3 = ACT)
//   6: A <= tanh(c_t), B <= sig(D_o)
//   7: P <= A*B + 0
//   8: h_t = sat(P >>> 8) on h, h_valid high for one cycle
// A new slot may start (D_i on AT) in the cycle after h_valid.
//
// The operand multiplexers, the reuse of the single multiplier and adder, and the
// table-based sigmoid/tanh follow the paper. The schedule, the P feedback input on
// s2 (used to add i*g to f*c_{t-1}) and the separate cell-state memory (cmem,
// addressed by the slot number) are this design's choices. Cell states are
// zeroed by the clearing sweep at the start of a sequence.
module hpe
  import spartus_pkg::*;
#(
  parameter int DEPTH  = 64,  // partial sums per lane (4*H/M)
  parameter int SLOTS  = 16,  // neuron slots per lane (H/M)
  localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int SLW   = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // MAC mode
  input  logic           in_valid,
  input  act_t           nzv,
  input  wgt_t           w,
  input  lidx_t          lidx,
  input  logic           clr_en,
  input  logic [AW-1:0]  clr_addr,
  input  logic [AW-1:0]  rd_addr,
  output acc_t           acc_out,
  output logic           busy,
  // activation mode
  input  logic           at_valid,
  input  gate_e          at_gate,
  input  act_t           at,
  input  logic [SLW-1:0] slot,
  output logic           h_valid,
  output act_t           h,
  output logic           act_busy
);

  typedef enum logic [1:0] {S0_NZV, S0_CELL, S0_TANH} s0_e;
  typedef enum logic       {S1_W, S1_SIG} s1_e;
  typedef enum logic [1:0] {S2_ACC, S2_ZERO, S2_P} s2_e;

  acc_t           acc_mem [DEPTH];
  act_t           cmem [SLOTS];
  logic           a_v, p_v;        // MAC-mode valid in stage A / P
  act_t           a_op, b_op;      // DSP input registers
  logic [AW-1:0]  a_addr, p_addr;
  acc_t           p, acc_src, addend;
  s2_e            s2_q;            // addend select, registered with the operands
  act_t           sig_in, tanh_in, sig_y, tanh_y, act;
  logic [7:0]     step;            // activation schedule, step[k] high in cycle k+1
  logic [SLW-1:0] slot_q;

  // combinational operand selection
  s0_e  s0;
  s1_e  s1;
  s2_e  s2;
  logic s3;                        // 1: tanh sees ACT, 0: AT

  act_lut #(.FUNC(0)) u_sig  (.x(sig_in),  .y(sig_y));
  act_lut #(.FUNC(1)) u_tanh (.x(tanh_in), .y(tanh_y));

  assign act      = sat_act(64'(p >>> ACT_FRAC));
  assign acc_out  = acc_mem[rd_addr];
  assign busy     = a_v || p_v;
  assign act_busy = |step;
  assign acc_src  = (p_v && p_addr == a_addr) ? p : acc_mem[a_addr];

  always_comb begin
    s0 = S0_NZV;
    s1 = S1_W;
    s2 = S2_ACC;
    s3 = step[4];
    if (step[1] || step[5]) begin s0 = S0_TANH; s1 = S1_SIG; end
    if (step[2])            begin s0 = S0_CELL; s1 = S1_SIG; end
    if (step[1] || step[5]) s2 = S2_ZERO;   // used one cycle later by the adder
    if (step[2])            s2 = S2_P;
  end

  always_comb begin
    unique case (s2_q)
      S2_ACC:  addend = acc_src;
      S2_P:    addend = p;
      default: addend = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_v  <= 1'b0;
      p_v  <= 1'b0;
      step <= '0;
      s2_q <= S2_ACC;
    end else begin
      a_v  <= in_valid;
      p_v  <= a_v;
      step <= {step[6:0], at_valid && at_gate == GATE_I};
      s2_q <= s2;
    end
    // DSP input registers behind multiplexers s0 and s1
    unique case (s0)
      S0_CELL: a_op <= cmem[slot_q];
      S0_TANH: a_op <= tanh_y;
      default: a_op <= nzv;
    endcase
    b_op   <= (s1 == S1_SIG) ? sig_y : act_t'(w);
    a_addr <= AW'(lidx);
    // multiplier and adder, P register
    if (a_v || step[2] || step[3] || step[6]) p <= acc_t'(a_op) * acc_t'(b_op) + addend;
    p_addr <= a_addr;
    // table input registers (s3 selects the tanh source)
    if (at_valid && (at_gate == GATE_I || at_gate == GATE_F || at_gate == GATE_O)) sig_in <= at;
    if (at_valid && at_gate == GATE_G) tanh_in <= at;
    else if (s3)                       tanh_in <= act;
    if (at_valid && at_gate == GATE_I) slot_q <= slot;
  end

  always_ff @(posedge clk) begin
    h_valid <= rst_n && step[7];
    h       <= act;
  end

  always_ff @(posedge clk) begin
    if (clr_en) begin
      if (int'(clr_addr) < DEPTH) acc_mem[clr_addr] <= '0;
    end else if (p_v) begin
      acc_mem[p_addr] <= p;
    end
  end

  always_ff @(posedge clk) begin
    if (clr_en) begin
      if (int'(clr_addr) < SLOTS) cmem[SLW'(clr_addr)] <= '0;
    end else if (step[4]) begin
      cmem[slot_q] <= act;
    end
  end

  a_no_mac_during_act: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !act_busy);

endmodule
