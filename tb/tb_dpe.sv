// Testbench of the delta processing element (dpe).
//
// Drives vectors of DEPTH words of I elements through one DPE, acting as the IPU:
// a word is consumed (in_accept) in the cycle the DPE reports seg_done. A model in
// this file keeps its own copy of the last propagated states and predicts, per word,
// the ordered list of (delta, index) pairs with |delta| > Theta. The first half of
// the run toggles out_ready at random (delta FIFO full); the second half keeps it
// high and checks that a word with k nonzero deltas takes max(1, k) cycles.
//
// The expected values come from a model written independently in this file; the
// stimulus, the protocol rules checked and the watchdog limit are this testbench's
// own choices, while the behaviour checked is the one the published design describes.
module tb_dpe;
  import spartus_pkg::*;
  localparam int I = 8, DEPTH = 4, NV = 40, THETA = 77;
  localparam int NZI_W = $clog2(DEPTH) + $clog2(I);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  act_t theta = act_t'(THETA);
  logic clr_en = 1'b0;
  logic [$clog2(DEPTH)-1:0] clr_addr = '0;
  logic in_valid = 1'b0, in_last = 1'b0, seg_done, in_accept;
  act_t in_data [I];
  logic out_valid, out_ready = 1'b1;
  act_t out_nzv;
  logic [NZI_W-1:0] out_nzi;

  dpe #(.I(I), .DEPTH(DEPTH)) dut (.*);
  assign in_accept = seg_done;

  int checks = 0, failures = 0;
  int shat [DEPTH][I];
  int cur [DEPTH][I];
  int ev [$], ei [$];

  initial begin : main
    int n_multi, n_stall;
    n_multi = 0; n_stall = 0;
    foreach (in_data[i]) in_data[i] = '0;
    foreach (cur[w, i]) begin cur[w][i] = 0; shat[w][i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    clr_en = 1'b1;
    for (int a = 0; a < DEPTH; a++) begin
      clr_addr = ($bits(clr_addr))'(a);
      @(negedge clk);
    end
    clr_en = 1'b0;
    for (int v = 0; v < NV; v++) begin
      for (int w = 0; w < DEPTH; w++) begin
        int k, cyc;
        k = 0;
        for (int i = 0; i < I; i++) begin
          int d;
          cur[w][i] += ($urandom_range(2) == 0) ? int'($urandom_range(400)) - 200 : int'($urandom_range(40)) - 20;
          if (cur[w][i] > 3000) cur[w][i] = 3000;
          if (cur[w][i] < -3000) cur[w][i] = -3000;
          in_data[i] = act_t'(cur[w][i]);
          d = cur[w][i] - shat[w][i];
          if (d > THETA || d < -THETA) begin
            ev.push_back(d);
            ei.push_back(w * I + i);
            shat[w][i] = cur[w][i];
            k++;
          end
        end
        if (k > 1) n_multi++;
        in_valid = 1'b1;
        in_last  = (w == DEPTH - 1);
        cyc = 0;
        forever begin
          if (v < NV / 2) out_ready = ($urandom_range(3) != 0);
          else            out_ready = 1'b1;
          if (!out_ready) n_stall++;
          @(posedge clk);
          cyc++;
          if (out_valid && out_ready) begin
            checks++;
            if (ev.size() == 0) begin
              failures++;
              $display("unexpected delta %0d at %0d", out_nzv, out_nzi);
            end else begin
              int xv, xi;
              xv = ev.pop_front();
              xi = ei.pop_front();
              if (int'(out_nzv) != xv || int'(out_nzi) != xi) begin
                failures++;
                $display("vector %0d word %0d: got (%0d, %0d), expected (%0d, %0d)", v, w, out_nzv, out_nzi, xv, xi);
              end
            end
          end
          if (seg_done) break;
          @(negedge clk);
        end
        if (v >= NV / 2) begin
          checks++;
          if (cyc != ((k > 1) ? k : 1)) begin
            failures++;
            $display("word with %0d deltas took %0d cycles", k, cyc);
          end
        end
        @(negedge clk);
        in_valid = 1'b0;
      end
    end
    checks++;
    if (ev.size() != 0) begin
      failures++;
      $display("%0d deltas never sent", ev.size());
    end
    checks++;
    if (n_multi == 0 || n_stall == 0) begin
      failures++;
      $display("coverage: multi %0d stall %0d", n_multi, n_stall);
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
