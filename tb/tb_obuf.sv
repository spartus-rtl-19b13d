// Testbench of the output buffer.
//
// Pushes random M-element h words (every fourth one flagged as the last of a step)
// on random cycles in which in_ready allows it, while the sink takes beats with a random out_ready, and
// stops taking them for a long stretch so that the buffer fills. Every beat must
// carry the next E elements in order, out_last must mark the final beat of a
// flagged word, and in_ready must fall when DEPTH words are waiting.
//
// The expected values come from a model written independently in this file; the
// stimulus, the protocol rules checked and the watchdog limit are this testbench's
// own choices, while the behaviour checked is the one the published design describes.
module tb_obuf;
  import spartus_pkg::*;
  localparam int M = 8, E = 4, DEPTH = 4, NW = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic in_valid = 1'b0, in_last = 1'b0, in_ready, out_valid, out_last, out_ready = 1'b0;
  act_t in_data [M], out_data [E];

  obuf #(.M(M), .E(E), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int q [$];
  logic ql [$];
  int n_full = 0;

  initial begin : producer
    foreach (in_data[m]) in_data[m] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int wd = 0; wd < NW; wd++) begin
      // a word is offered only while there is room, as the controller does
      while (!in_ready || $urandom_range(3) == 0) begin
        if (!in_ready) n_full++;
        in_valid = 1'b0;
        @(negedge clk);
      end
      in_valid = 1'b1;
      in_last  = (wd % 4 == 3);
      for (int m = 0; m < M; m++) begin
        in_data[m] = act_t'($urandom);
        q.push_back(int'(in_data[m]));
        ql.push_back(in_last && m >= M - E);
      end
      @(negedge clk);
    end
    in_valid = 1'b0;
  end

  initial begin : consumer
    int got, pause;
    got = 0; pause = 0;
    wait (rst_n);
    while (got < NW * M / E) begin
      @(negedge clk);
      if (got == 21 && pause < DEPTH * M / E * 2) begin
        out_ready = 1'b0;
        pause++;
      end else out_ready = ($urandom_range(2) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        logic lst;
        checks++;
        lst = 1'b0;
        for (int e = 0; e < E; e++) begin
          int x;
          x = q.pop_front();
          lst = ql.pop_front();
          if (int'(out_data[e]) != x) begin
            failures++;
            $display("beat %0d element %0d: %0d, expected %0d", got, e, out_data[e], x);
          end
        end
        if (out_last != lst) begin
          failures++;
          $display("beat %0d: out_last %0d, expected %0d", got, out_last, lst);
        end
        got++;
      end
    end
    checks++;
    if (n_full == 0) begin
      failures++;
      $display("buffer never filled");
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
