// Testbench of the input processing unit (ipu): state FIFO, N DPEs, N delta FIFOs.
//
// Streams several state vectors of S_DEPTH words (s_last on the final word) into the
// IPU with a random s_valid, while N independent consumers pop the delta FIFOs at
// random. A model splits every word over the DPEs (element i*N + n to DPE n), applies
// the delta threshold against its own copy of the propagated states and predicts,
// for each DPE, the ordered (delta, local column) stream. The test also requires that
// the delta FIFOs filled up (dfifo_stall), that the state FIFO pushed back (s_ready
// low), and that idle is high once everything has drained.
//
// The expected values come from a model written independently in this file; the
// stimulus, the protocol rules checked and the watchdog limit are this testbench's
// own choices, while the behaviour checked is the one the published design describes.
module tb_ipu;
  import spartus_pkg::*;
  localparam int M = 16, N = 4, S_DEPTH = 4, NV = 30, THETA = 77;
  localparam int I = M / N, NZI_W = $clog2(S_DEPTH) + $clog2(I);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  act_t theta = act_t'(THETA);
  logic clr_en = 1'b0;
  logic [$clog2(S_DEPTH)-1:0] clr_addr = '0;
  logic s_valid = 1'b0, s_last = 1'b0, s_ready, idle, dfifo_stall;
  act_t s_data [M];
  logic [N-1:0] d_valid, d_pop;
  act_t d_nzv [N];
  logic [NZI_W-1:0] d_nzi [N];

  ipu #(.M(M), .N(N), .S_DEPTH(S_DEPTH), .SF_DEPTH(2), .DF_DEPTH(2)) dut (.*);

  int checks = 0, failures = 0;
  int ev [N][$], ei [N][$];
  int shat [S_DEPTH][M], cur [S_DEPTH][M];
  int n_stall = 0, n_back = 0, done = 0;
  logic [N-1:0] pop_en;

  assign d_pop = d_valid & pop_en;

  always @(negedge clk) pop_en <= N'($urandom);

  always @(posedge clk) if (rst_n) begin
    if (dfifo_stall) n_stall++;
    if (s_valid && !s_ready) n_back++;
    for (int n = 0; n < N; n++)
      if (d_pop[n]) begin
        checks++;
        if (ev[n].size() == 0) begin
          failures++;
          $display("DPE %0d: unexpected delta", n);
        end else begin
          int xv, xi;
          xv = ev[n].pop_front();
          xi = ei[n].pop_front();
          if (int'(d_nzv[n]) != xv || int'(d_nzi[n]) != xi) begin
            failures++;
            $display("DPE %0d: (%0d, %0d), expected (%0d, %0d)", n, d_nzv[n], d_nzi[n], xv, xi);
          end
        end
      end
  end

  initial begin : main
    foreach (s_data[e]) s_data[e] = '0;
    foreach (cur[w, e]) begin cur[w][e] = 0; shat[w][e] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    clr_en = 1'b1;
    for (int a = 0; a < S_DEPTH; a++) begin
      clr_addr = ($bits(clr_addr))'(a);
      @(negedge clk);
    end
    clr_en = 1'b0;
    for (int v = 0; v < NV; v++)
      for (int w = 0; w < S_DEPTH; w++) begin
        for (int e = 0; e < M; e++) begin
          cur[w][e] += ($urandom_range(2) == 0) ? int'($urandom_range(400)) - 200 : int'($urandom_range(40)) - 20;
          s_data[e] = act_t'(cur[w][e]);
        end
        for (int n = 0; n < N; n++)
          for (int i = 0; i < I; i++) begin
            int e, d;
            e = i * N + n;
            d = cur[w][e] - shat[w][e];
            if (d > THETA || d < -THETA) begin
              ev[n].push_back(d);
              ei[n].push_back(w * I + i);
              shat[w][e] = cur[w][e];
            end
          end
        s_last = (w == S_DEPTH - 1);
        while ($urandom_range(3) == 0) begin
          s_valid = 1'b0;
          @(negedge clk);
        end
        s_valid = 1'b1;
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        @(negedge clk);
        s_valid = 1'b0;
      end
    while (!idle) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int n = 0; n < N; n++) begin
      checks++;
      if (ev[n].size() != 0) begin
        failures++;
        $display("DPE %0d: %0d deltas never delivered", n, ev[n].size());
      end
    end
    checks++;
    if (n_stall == 0 || n_back == 0) begin
      failures++;
      $display("coverage: delta FIFO stalls %0d, state FIFO back-pressure %0d", n_stall, n_back);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
