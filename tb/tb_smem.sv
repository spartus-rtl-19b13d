// Testbench of the state memory (smem): double-buffered input vectors, hidden-state
// buffer and the word stream into the IPU.
//
// A producer sends input vectors of X_LEN elements as E-element beats with random
// gaps, as fast as x_ready allows; a consumer plays the controller: it waits for
// x_avail, pulses step_start, takes the M-element words with a random s_ready and
// then writes a new random hidden state (h_we). Each stream must be the x words of
// the oldest unconsumed vector (zero padded past X_LEN) followed by the current h
// words, with s_last on the final word. The test requires that a vector arrived
// while a stream was running (ping-pong buffering) and that x_ready fell while both
// buffers were full.
//
// The expected values come from a model written independently in this file; the
// stimulus, the protocol rules checked and the watchdog limit are this testbench's
// own choices, while the behaviour checked is the one the published design describes.
module tb_smem;
  import spartus_pkg::*;
  localparam int M = 8, E = 4, X_WORDS = 2, H_WORDS = 2, X_LEN = 12, NV = 12;
  localparam int XW = (X_LEN + M - 1) / M;
  localparam int XAW = $clog2(X_WORDS), HAW = $clog2(H_WORDS), SAW = $clog2(X_WORDS + H_WORDS);
  localparam int LW = $clog2(X_WORDS * M + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic [LW-1:0]  cfg_x_len = LW'(X_LEN);
  logic [XAW:0]   cfg_x_words = (XAW+1)'(XW);
  logic [HAW:0]   cfg_h_words = (HAW+1)'(H_WORDS);
  logic           x_valid = 1'b0, x_ready, x_avail, step_start = 1'b0;
  act_t           x_data [E];
  logic           s_valid, s_last, s_ready = 1'b0, streaming, h_we = 1'b0, clr_en = 1'b0;
  act_t           s_data [M], h_wdata [M];
  logic [HAW-1:0] h_waddr = '0;
  logic [SAW-1:0] clr_addr = '0;

  smem #(.M(M), .E(E), .X_WORDS(X_WORDS), .H_WORDS(H_WORDS)) dut (.*);

  int checks = 0, failures = 0;
  int xs [NV][X_LEN];
  int hs [H_WORDS][M];
  int n_overlap = 0, n_full = 0;

  always @(posedge clk) if (rst_n) begin
    if (x_valid && x_ready && streaming) n_overlap++;
    if (x_valid && !x_ready) n_full++;
  end

  initial begin : producer
    foreach (x_data[e]) x_data[e] = '0;
    foreach (xs[v, i]) xs[v][i] = int'($urandom_range(65535)) - 32768;
    wait (rst_n);
    for (int v = 0; v < NV; v++)
      for (int b = 0; b < (X_LEN + E - 1) / E; b++) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) @(negedge clk);
        x_valid = 1'b1;
        for (int e = 0; e < E; e++) x_data[e] = (b * E + e < X_LEN) ? act_t'(xs[v][b * E + e]) : '0;
        @(posedge clk);
        while (!x_ready) @(posedge clk);
        @(negedge clk);
        x_valid = 1'b0;
      end
  end

  initial begin : consumer
    foreach (h_wdata[m]) h_wdata[m] = '0;
    foreach (hs[w, m]) hs[w][m] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    clr_en = 1'b1;
    for (int a = 0; a < X_WORDS + H_WORDS; a++) begin
      clr_addr = SAW'(a);
      @(negedge clk);
    end
    clr_en = 1'b0;
    for (int v = 0; v < NV; v++) begin
      int w;
      while (!x_avail) @(negedge clk);
      repeat (int'($urandom_range(6))) @(negedge clk);
      step_start = 1'b1;
      @(negedge clk);
      step_start = 1'b0;
      w = 0;
      while (w < XW + H_WORDS) begin
        s_ready = ($urandom_range(2) != 0);
        @(posedge clk);
        if (s_valid && s_ready) begin
          checks++;
          for (int e = 0; e < M; e++) begin
            int x;
            if (w < XW) x = (w * M + e < X_LEN) ? xs[v][w * M + e] : 0;
            else        x = hs[w - XW][e];
            if (int'(s_data[e]) != x) begin
              failures++;
              $display("vector %0d word %0d element %0d: %0d, expected %0d", v, w, e, s_data[e], x);
              break;
            end
          end
          if (s_last != (w == XW + H_WORDS - 1)) begin
            failures++;
            $display("vector %0d word %0d: s_last %0d", v, w, s_last);
          end
          w++;
        end
        @(negedge clk);
      end
      s_ready = 1'b0;
      for (int q = 0; q < H_WORDS; q++) begin
        h_we = 1'b1;
        h_waddr = HAW'(q);
        for (int e = 0; e < M; e++) begin
          hs[q][e] = int'($urandom_range(65535)) - 32768;
          h_wdata[e] = act_t'(hs[q][e]);
        end
        @(negedge clk);
      end
      h_we = 1'b0;
    end
    checks++;
    if (n_overlap == 0 || n_full == 0) begin
      failures++;
      $display("coverage: overlap %0d, both buffers full %0d", n_overlap, n_full);
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
