// Delta Processing Element (DPE): turns one segment of the state vector s_t into a
// stream of nonzero deltas.
//
// Each cycle the DPE looks at the segment word at the head of the state FIFO: I
// elements s_t[i] (i = 0..I-1). For every element it reads the last propagated
// value s_hat[i] from its own LUTRAM column, addressed by the word counter CNT,
// forms d = s_t - s_hat, and compares |d| with the delta threshold Theta
// (comp[i]). The threshold function TF passes d where comp is set and 0 elsewhere.
// code = comp & mask marks the elements not yet sent; a priority decoder (DEC)
// selects the lowest set bit, whose delta and index leave as (NZV, NZI), one per
// cycle, and clears that mask bit (en[sel]) for the next cycle. A segment with k
// nonzero deltas therefore needs k cycles (at least one), and stalls while the
// downstream delta FIFO is full (out_ready low).
//
// seg_done is high once every nonzero delta of the current word has been sent
// (including in the same cycle). The word is consumed when in_accept is pulsed,
// which the IPU does once all DPEs report seg_done; at that edge the LUTRAM entries
// with comp set are overwritten with s_t (Eq. 5/7: s_hat only follows s_t when the
// change crosses the threshold), the mask returns to all ones, and CNT advances,
// wrapping to 0 after the word flagged in_last.
//
// NZI is the column index local to this DPE's weight bank: CNT*I + sel, because
// element i of the DPE's segment of word CNT is state element CNT*M + i*N + n
// (interleaved partition) and bank n holds columns n, n+N, n+2N, ...
//
// Following the paper: LUTRAM per element addressed by CNT, comparator-driven write
// enable, TF block, mask register with code = comp & mask, decoder-driven
// multiplexers. Design choices: deltas are saturated to 16 bits; the decoder picks
// the lowest index first; a clear port (clr_en/clr_addr) zeroes s_hat at the start
// of a sequence, so the first deltas equal the states.
module dpe
  import spartus_pkg::*;
#(
  parameter int I     = 8,    // elements per segment (M/N)
  parameter int DEPTH = 32,   // state words per vector (LUTRAM depth)
  localparam int CW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int SW   = (I > 1) ? $clog2(I) : 1,
  localparam int NZI_W = CW + SW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  act_t             theta,
  // clearing sweep
  input  logic             clr_en,
  input  logic [CW-1:0]    clr_addr,
  // segment input from the state FIFO
  input  logic             in_valid,
  input  act_t             in_data [I],
  input  logic             in_last,
  output logic             seg_done,
  input  logic             in_accept,
  // nonzero delta output to the delta FIFO
  output logic             out_valid,
  output act_t             out_nzv,
  output logic [NZI_W-1:0] out_nzi,
  input  logic             out_ready
);

  act_t            s_hat [I][DEPTH];
  logic [CW-1:0]   cnt;
  logic [I-1:0]    mask;
  logic [I-1:0]    comp, code, rest;
  act_t            tf [I];
  logic [SW-1:0]   sel;
  logic            fire;

  always_comb begin
    for (int i = 0; i < I; i++) begin
      logic signed [ACT_W:0] d;
      logic signed [ACT_W:0] a;
      d       = (ACT_W+1)'(in_data[i]) - (ACT_W+1)'(s_hat[i][cnt]);
      a       = (d < 0) ? -d : d;
      comp[i] = in_valid && (a > (ACT_W+1)'(theta));
      tf[i]   = comp[i] ? sat_act(64'(d)) : '0;
    end
    code = comp & mask;
    // DEC: lowest set bit of code
    sel = '0;
    for (int i = I - 1; i >= 0; i--) begin
      if (code[i]) sel = SW'(i);
    end
    rest = code;
    rest[sel] = 1'b0;
  end

  assign out_valid = |code;
  assign out_nzv   = tf[sel];
  assign out_nzi   = {cnt, sel};
  assign fire      = out_valid && out_ready;
  assign seg_done  = in_valid && (!out_valid || (fire && !(|rest)));

  // LUTRAM write: on clear, or when the word is consumed (we[i] = comp[i])
  always_ff @(posedge clk) begin
    for (int i = 0; i < I; i++) begin
      if (clr_en) begin
        if (int'(clr_addr) < DEPTH) s_hat[i][clr_addr] <= '0;
      end else if (in_accept && comp[i]) begin
        s_hat[i][cnt] <= in_data[i];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt  <= '0;
      mask <= '1;
    end else if (clr_en) begin
      cnt  <= '0;
      mask <= '1;
    end else if (in_accept) begin
      cnt  <= in_last ? '0 : cnt + 1'b1;
      mask <= '1;
    end else if (fire) begin
      mask[sel] <= 1'b0;
    end
  end

  a_accept_when_done: assert property (@(posedge clk) disable iff (!rst_n) in_accept |-> seg_done);

endmodule
