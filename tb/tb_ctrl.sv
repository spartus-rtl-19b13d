// Testbench of the controller (ctrl).
//
// Surrounds the controller with small behavioural stand-ins: an IPU whose delta
// FIFOs are filled at random with column indices, weight banks that answer a read
// one cycle later, MAC arrays that stay busy two cycles after their last word, an
// HPE array that returns h_valid a fixed time after the gate-i request, and an
// output buffer that sometimes has no room. Checked are: the clearing sweep after
// reset and after seq_start (CLR_LEN cycles, addresses 0..CLR_LEN-1); that each
// delta popped from FIFO n produces exactly BLEN consecutive reads of bank n at
// nzi*BLEN .. nzi*BLEN+BLEN-1 (one nonzero per BLEN cycles per array); the order of
// the pre-activation requests (slot by slot, gates i, g, f, o, partial-sum address
// gate*H_WORDS + slot) and that a slot only starts when the output buffer has room;
// one h write per slot; and step_cycles against the cycles counted here.
//
// The expected values come from a model written independently in this file; the
// stimulus, the protocol rules checked and the watchdog limit are this testbench's
// own choices, while the behaviour checked is the one the published design describes.
module tb_ctrl;
  import spartus_pkg::*;
  localparam int N = 2, NZI_W = 4, WAW = 6, H_WORDS = 2, CLR_LEN = 8, BLEN = 3, NSTEP = 6;
  localparam int HAW = $clog2(H_WORDS), AAW = $clog2(4 * H_WORDS), CAW = $clog2(CLR_LEN), BLW = AAW + 1;
  localparam int HPE_LAT = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic [BLW-1:0]   cfg_blen = BLW'(BLEN);
  logic [HAW:0]     cfg_h_words = (HAW+1)'(H_WORDS);
  logic             seq_start = 1'b0, x_avail = 1'b0, streaming = 1'b0, step_start, ipu_idle;
  logic [N-1:0]     d_valid, d_pop, wm_re, wm_rvalid, array_busy;
  logic [NZI_W-1:0] d_nzi [N];
  logic [WAW-1:0]   wm_raddr [N];
  logic [AAW-1:0]   acc_raddr;
  logic             at_req, h_valid, h_we, ob_last, ob_ready, clr_en, busy, step_done;
  gate_e            at_gate;
  logic [HAW-1:0]   slot;
  logic [CAW-1:0]   clr_addr;
  logic [31:0]      step_cycles;

  ctrl #(.N(N), .NZI_W(NZI_W), .WAW(WAW), .H_WORDS(H_WORDS), .CLR_LEN(CLR_LEN)) dut (.*);

  int checks = 0, failures = 0;

  // ---- behavioural surroundings ----
  int fq [N][$];          // delta FIFO contents (column indices)
  int rd_exp [N][$];      // expected bank read addresses
  int pending = 0;        // deltas still to be produced this step
  logic [N-1:0] rv_q, rv_q2;
  int hcnt = 0;
  int occ = 0;
  logic ob_room;
  assign ob_room = occ < 2;

  always @* for (int n = 0; n < N; n++) begin
    d_valid[n] = fq[n].size() > 0;
    d_nzi[n]   = d_valid[n] ? NZI_W'(fq[n][0]) : '0;
  end
  assign ipu_idle   = (pending == 0) && (fq[0].size() == 0) && (fq[1].size() == 0);
  assign wm_rvalid  = rv_q;
  assign array_busy = rv_q | rv_q2;
  assign ob_ready   = ob_room;

  int n_obwait = 0, n_clr = 0;
  int exp_gate = 0, exp_q = 0, h_due = -1, cyc = 0, start_cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (!rst_n) begin
      rv_q <= '0; rv_q2 <= '0;
    end else begin
      rv_q  <= wm_re;
      rv_q2 <= rv_q;
      for (int n = 0; n < N; n++) begin
        // the first read of a column is issued in the cycle its delta is popped
        if (d_pop[n]) begin
          int c;
          c = fq[n].pop_front();
          for (int k = 0; k < BLEN; k++) rd_exp[n].push_back(c * BLEN + k);
        end
        if (wm_re[n]) begin
          checks++;
          if (rd_exp[n].size() == 0 || int'(wm_raddr[n]) != rd_exp[n][0]) begin
            failures++;
            $display("bank %0d read %0d, expected %0d", n, wm_raddr[n], (rd_exp[n].size() != 0) ? rd_exp[n][0] : -1);
          end
          if (rd_exp[n].size() != 0) void'(rd_exp[n].pop_front());
        end else if (rd_exp[n].size() != 0) begin
          checks++;
          failures++;
          $display("bank %0d: gap in the reads of a column", n);
        end
      end
      if (pending > 0 && $urandom_range(2) == 0) begin
        int n;
        n = int'($urandom_range(N - 1));
        fq[n].push_back(int'($urandom_range(15)));
        pending--;
      end
      if (clr_en) begin
        checks++;
        if (int'(clr_addr) != n_clr % CLR_LEN) begin
          failures++;
          $display("clear address %0d, expected %0d", clr_addr, n_clr % CLR_LEN);
        end
        n_clr++;
      end
      if (step_start) start_cyc = cyc;
      if (at_req) begin
        checks++;
        if (int'(at_gate) != exp_gate || int'(slot) != exp_q || int'(acc_raddr) != exp_gate * H_WORDS + exp_q) begin
          failures++;
          $display("request gate %0d slot %0d addr %0d, expected gate %0d slot %0d", at_gate, slot, acc_raddr, exp_gate, exp_q);
        end
        if (exp_gate == 0) h_due = HPE_LAT;
        exp_gate = (exp_gate + 1) % 4;
        if (exp_gate == 0) exp_q = (exp_q + 1) % H_WORDS;
      end
      if (int'(dut.state) == 3 && !ob_room) n_obwait++;  // waiting to issue gate i
      h_valid <= (h_due == 1);
      if (h_due > 0) h_due--;
      if (h_we) begin
        checks++;
        hcnt++;
        if (ob_last != (hcnt % H_WORDS == 0)) begin
          failures++;
          $display("ob_last %0d on h write %0d", ob_last, hcnt);
        end
      end
      // output buffer of two words, drained slowly by the host
      if (h_we && !(occ > 0 && $urandom_range(19) == 0)) occ++;
      else if (!h_we && occ > 0 && $urandom_range(19) == 0) occ--;
      if (step_done) begin
        checks++;
        if (int'(step_cycles) != cyc - start_cyc - 1) begin
          failures++;
          $display("step_cycles %0d, counted %0d", step_cycles, cyc - start_cyc - 1);
        end
      end
    end
  end

  initial begin : main
    h_valid = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NSTEP; s++) begin
      if (s == 3) begin
        while (busy) @(negedge clk);
        seq_start = 1'b1;
        @(negedge clk);
        seq_start = 1'b0;
      end
      x_avail = 1'b1;
      @(posedge clk);
      while (!step_start) @(posedge clk);
      @(negedge clk);
      x_avail = 1'b0;
      streaming = 1'b1;
      pending = 5 + int'($urandom_range(10));
      repeat (4) @(negedge clk);
      streaming = 1'b0;
      @(posedge clk);
      while (!step_done) @(posedge clk);
      @(negedge clk);
    end
    checks++;
    if (n_clr != 2 * CLR_LEN || hcnt != NSTEP * H_WORDS || n_obwait == 0) begin
      failures++;
      $display("clears %0d, h writes %0d, output-buffer waits %0d", n_clr, hcnt, n_obwait);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
