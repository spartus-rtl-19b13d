// Controller (CTRL): sequences one DeltaLSTM time step and generates the weight
// addresses of every MAC array.
//
// Weight addressing. For each MAC array n a small sequencer takes the nonzero
// index NZI (the column's local index in bank n) from the head of D-FIFO n and reads
// the column's BLEN weight words at addresses NZI*BLEN + k, k = 0..BLEN-1, one per
// cycle. The FIFO pop (which also loads the NZV into the array) coincides with the
// read of word 0, so consecutive columns follow each other without a gap and each
// nonzero delta occupies its array for exactly BLEN cycles. Arrays run
// independently; a delta FIFO that runs dry simply idles its array.
//
// Time-step sequence (state machine):
//   CLEAR  after seq_start: a sweep of CLR_LEN cycles zeroes the DPE state
//          memories, the partial sums, the cell states and the h buffer.
//   IDLE   waits for a complete input vector (x_avail), then pulses step_start.
//   MAC    the state memory streams s_t; IPU, sequencers and arrays work. The
//          phase ends in the first cycle in which the stream is over, the IPU is
//          idle, every sequencer is idle and no weight word or product is in
//          flight.
//   ACT    for each neuron slot q = 0..H/M-1: wait for space in the output buffer,
//          read the four delta-memory rows b*H_WORDS + q (gates i, g, f, o) from all
//          arrays through the adder trees on four consecutive cycles, then wait for
//          the HPE array's h_valid, write the h word into the state memory (h_we)
//          and the output buffer (ob_last on the last slot).
//   DONE   pulses step_done; step_cycles holds the cycles from step_start to DONE.
//
// The controller's existence and its role of turning NZIs into WMEM addresses are
// from the paper; the phase structure, the sequencer timing and the clearing sweep
// are this design's choices.
module ctrl
  import spartus_pkg::*;
#(
  parameter int N        = 8,
  parameter int NZI_W    = 8,
  parameter int WAW      = 10,   // weight-memory address width
  parameter int H_WORDS  = 16,
  parameter int CLR_LEN  = 64,
  localparam int HAW     = (H_WORDS > 1) ? $clog2(H_WORDS) : 1,
  localparam int AAW     = $clog2(4 * H_WORDS),
  localparam int CAW     = (CLR_LEN > 1) ? $clog2(CLR_LEN) : 1,
  localparam int BLW     = AAW + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [BLW-1:0]   cfg_blen,
  input  logic [HAW:0]     cfg_h_words,
  input  logic             seq_start,
  // state memory
  input  logic             x_avail,
  input  logic             streaming,
  output logic             step_start,
  // IPU delta FIFOs
  input  logic             ipu_idle,
  input  logic [N-1:0]     d_valid,
  input  logic [NZI_W-1:0] d_nzi [N],
  output logic [N-1:0]     d_pop,
  // weight memories and arrays
  output logic [N-1:0]     wm_re,
  output logic [WAW-1:0]   wm_raddr [N],
  input  logic [N-1:0]     wm_rvalid,
  input  logic [N-1:0]     array_busy,
  // activation phase
  output logic [AAW-1:0]   acc_raddr,
  output logic             at_req,
  output gate_e            at_gate,
  output logic [HAW-1:0]   slot,
  input  logic             h_valid,
  output logic             h_we,
  output logic             ob_last,
  input  logic             ob_ready,
  // clearing sweep
  output logic             clr_en,
  output logic [CAW-1:0]   clr_addr,
  // status
  output logic             busy,
  output logic             step_done,
  output logic [31:0]      step_cycles
);

  typedef enum logic [2:0] {ST_CLEAR, ST_IDLE, ST_MAC, ST_ACT_ISSUE, ST_ACT_WAIT, ST_DONE} state_e;

  state_e         state;
  logic [1:0]     gate_cnt;
  logic [HAW-1:0] q;
  logic [31:0]    cyc;
  logic           seq_idle_all, mac_done;

  // ---------------- per-array weight address sequencers ----------------
  logic [N-1:0]   active;
  logic [BLW-1:0] k [N];
  logic [WAW-1:0] base [N];

  always_comb begin
    for (int n = 0; n < N; n++) begin
      d_pop[n]    = (state == ST_MAC) && !active[n] && d_valid[n];
      wm_re[n]    = active[n] || d_pop[n];
      wm_raddr[n] = active[n] ? base[n] + WAW'(k[n]) : WAW'(d_nzi[n] * cfg_blen);
    end
  end

  always_ff @(posedge clk) begin
    for (int n = 0; n < N; n++) begin
      if (!rst_n) begin
        active[n] <= 1'b0;
        k[n]      <= '0;
      end else if (active[n]) begin
        if (k[n] == cfg_blen - 1'b1) active[n] <= 1'b0;
        k[n] <= k[n] + 1'b1;
      end else if (d_pop[n]) begin
        active[n] <= (cfg_blen > BLW'(1));
        k[n]      <= BLW'(1);
        base[n]   <= WAW'(d_nzi[n] * cfg_blen);
      end
    end
  end

  assign seq_idle_all = !(|active);
  assign mac_done     = !streaming && ipu_idle && seq_idle_all && !(|wm_rvalid) && !(|array_busy);

  // ---------------- time-step state machine ----------------
  assign step_start = (state == ST_IDLE) && !seq_start && x_avail;
  assign at_req     = (state == ST_ACT_ISSUE) && (gate_cnt != 2'd0 || ob_ready);
  assign at_gate    = gate_e'(gate_cnt);
  assign acc_raddr  = AAW'(gate_cnt) * AAW'(cfg_h_words) + AAW'(q);
  assign slot       = q;
  assign h_we       = (state == ST_ACT_WAIT) && h_valid;
  assign ob_last    = (HAW+1)'(q) == cfg_h_words - 1'b1;
  assign clr_en     = (state == ST_CLEAR);
  assign busy       = (state != ST_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= ST_CLEAR;
      clr_addr    <= '0;
      gate_cnt    <= '0;
      q           <= '0;
      cyc         <= '0;
      step_done   <= 1'b0;
      step_cycles <= '0;
    end else begin
      step_done <= 1'b0;
      cyc       <= cyc + 1;
      unique case (state)
        ST_CLEAR: begin
          clr_addr <= clr_addr + 1'b1;
          if (int'(clr_addr) == CLR_LEN - 1) state <= ST_IDLE;
        end
        ST_IDLE: begin
          if (seq_start) begin
            state    <= ST_CLEAR;
            clr_addr <= '0;
          end else if (x_avail) begin
            state <= ST_MAC;
            cyc   <= 32'd1;
          end
        end
        ST_MAC: begin
          if (mac_done) begin
            state    <= ST_ACT_ISSUE;
            q        <= '0;
            gate_cnt <= '0;
          end
        end
        ST_ACT_ISSUE: begin
          if (at_req) begin
            gate_cnt <= gate_cnt + 1'b1;
            if (gate_cnt == 2'd3) state <= ST_ACT_WAIT;
          end
        end
        ST_ACT_WAIT: begin
          if (h_valid) begin
            if (ob_last) state <= ST_DONE;
            else begin
              q     <= q + 1'b1;
              state <= ST_ACT_ISSUE;
            end
          end
        end
        ST_DONE: begin
          state       <= ST_IDLE;
          step_done   <= 1'b1;
          step_cycles <= cyc;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  a_pop_only_valid: assert property (@(posedge clk) disable iff (!rst_n) |d_pop |-> ((d_pop & ~d_valid) == '0));
  a_h_has_room:     assert property (@(posedge clk) disable iff (!rst_n) h_we |-> ob_ready);

endmodule
