// Testbench of the MAC processing element (pe).
//
// Streams random (delta, weight, row-index) triples into one PE, with random gaps
// and frequent repeats of the same row index in consecutive cycles so that the
// partial-sum forwarding path is used, and keeps its own array of partial sums.
// After the stream, once busy has dropped, every address is read back and compared.
// The PE must accept one product per cycle: busy must fall exactly two cycles
// after the last input.
//
// The expected values come from a model written independently in this file; the
// stimulus, the protocol rules checked and the watchdog limit are this testbench's
// own choices, while the behaviour checked is the one the published design describes.
module tb_pe;
  import spartus_pkg::*;
  localparam int DEPTH = 8, NIN = 3000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic in_valid = 1'b0, clr_en = 1'b0, busy;
  act_t nzv = '0;
  wgt_t w = '0;
  lidx_t lidx = '0;
  logic [$clog2(DEPTH)-1:0] clr_addr = '0, rd_addr = '0;
  acc_t acc_out;

  pe #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  longint model [DEPTH];

  initial begin : main
    int n_fwd, last, tail;
    n_fwd = 0; last = -1;
    foreach (model[a]) model[a] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    clr_en = 1'b1;
    for (int a = 0; a < DEPTH; a++) begin
      clr_addr = ($bits(clr_addr))'(a);
      @(negedge clk);
    end
    clr_en = 1'b0;
    for (int k = 0; k < NIN; k++) begin
      in_valid = ($urandom_range(4) != 0);
      nzv  = act_t'(int'($urandom_range(65535)) - 32768);
      w    = wgt_t'(int'($urandom_range(255)) - 128);
      lidx = ($urandom_range(1) == 0 && last >= 0) ? lidx_t'(last) : lidx_t'($urandom_range(DEPTH - 1));
      if (in_valid) begin
        if (int'(lidx) == last) n_fwd++;
        model[lidx] += longint'(nzv) * longint'(w);
        last = int'(lidx);
      end else last = -1;
      @(negedge clk);
    end
    in_valid = 1'b0;
    tail = 0;
    while (busy) begin
      @(negedge clk);
      tail++;
    end
    checks++;
    if (tail != 2) begin
      failures++;
      $display("busy stayed high %0d cycles after the last input, expected 2", tail);
    end
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = ($bits(rd_addr))'(a);
      #1;
      checks++;
      if (acc_out != acc_t'(model[a])) begin
        failures++;
        $display("address %0d: %0d, expected %0d", a, acc_out, model[a]);
      end
    end
    checks++;
    if (n_fwd == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
