// Testbench of one MAC array (M PEs sharing one nonzero delta).
//
// Issues nonzero deltas the way the controller does: nzv_load with the delta in the
// cycle its column is read from the weight bank, then BLEN consecutive w_valid
// cycles carrying the column's CBCSC words, the next column's load overlapping the
// last word of the previous one. Random gaps separate some columns. A model keeps
// all M x DEPTH partial sums; after busy falls every entry is read back. Busy must
// fall two cycles after the last word (one word per cycle, no stalls).
//
// The expected values come from a model written independently in this file; the
// stimulus, the protocol rules checked and the watchdog limit are this testbench's
// own choices, while the behaviour checked is the one the published design describes.
module tb_mac_array;
  import spartus_pkg::*;
  localparam int M = 8, DEPTH = 16, BLEN = 3, NCOL = 300, NCYC = NCOL * (BLEN + 3) + 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic nzv_load = 1'b0, w_valid = 1'b0, clr_en = 1'b0, busy;
  act_t nzv_in = '0;
  wentry_t w_word [M];
  logic [$clog2(DEPTH)-1:0] clr_addr = '0, rd_addr = '0;
  acc_t acc_out [M];

  mac_array #(.M(M), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  longint model [M][DEPTH];
  logic   s_load [NCYC], s_wv [NCYC];
  int     s_nzv [NCYC];
  int     s_w [NCYC][M], s_l [NCYC][M];

  initial begin : main
    int t, last, tail;
    foreach (model[m, a]) model[m][a] = 0;
    foreach (s_load[c]) begin s_load[c] = 1'b0; s_wv[c] = 1'b0; s_nzv[c] = 0; end
    foreach (w_word[m]) w_word[m] = '0;
    t = 0;
    for (int j = 0; j < NCOL; j++) begin
      int v;
      v = int'($urandom_range(65535)) - 32768;
      s_load[t] = 1'b1;
      s_nzv[t] = v;
      for (int k = 0; k < BLEN; k++) begin
        s_wv[t + 1 + k] = 1'b1;
        for (int m = 0; m < M; m++) begin
          s_w[t + 1 + k][m] = int'($urandom_range(255)) - 128;
          s_l[t + 1 + k][m] = int'($urandom_range(DEPTH - 1));
          model[m][s_l[t + 1 + k][m]] += longint'(v) * s_w[t + 1 + k][m];
        end
      end
      last = t + BLEN;
      t += BLEN + (($urandom_range(3) == 0) ? int'($urandom_range(2)) : 0);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    clr_en = 1'b1;
    for (int a = 0; a < DEPTH; a++) begin
      clr_addr = ($bits(clr_addr))'(a);
      @(negedge clk);
    end
    clr_en = 1'b0;
    for (int c = 0; c <= last; c++) begin
      nzv_load = s_load[c];
      nzv_in   = act_t'(s_nzv[c]);
      w_valid  = s_wv[c];
      for (int m = 0; m < M; m++) begin
        w_word[m].w    = s_wv[c] ? wgt_t'(s_w[c][m]) : '0;
        w_word[m].lidx = s_wv[c] ? lidx_t'(s_l[c][m]) : '0;
      end
      @(negedge clk);
    end
    nzv_load = 1'b0;
    w_valid  = 1'b0;
    tail = 0;
    while (busy) begin
      @(negedge clk);
      tail++;
    end
    checks++;
    if (tail != 2) begin
      failures++;
      $display("busy stayed high %0d cycles after the last word, expected 2", tail);
    end
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = ($bits(rd_addr))'(a);
      #1;
      for (int m = 0; m < M; m++) begin
        checks++;
        if (acc_out[m] != acc_t'(model[m][a])) begin
          failures++;
          $display("PE %0d address %0d: %0d, expected %0d", m, a, acc_out[m], model[m][a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NCYC + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
