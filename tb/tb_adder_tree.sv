// Testbench of the adder tree that merges the N MAC arrays' partial sums.
//
// Applies random 48-bit partial sums (and occasionally extreme ones, to exercise
// saturation) with random gate tags on random cycles and checks that, exactly one
// cycle later, out_valid, out_gate and the saturated Q8.8 pre-activation
// sat16(sum >>> 6) appear.
//
// The expected values come from a model written independently in this file; the
// stimulus, the protocol rules checked and the watchdog limit are this testbench's
// own choices, while the behaviour checked is the one the published design describes.
module tb_adder_tree;
  import spartus_pkg::*;
  localparam int N = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic  in_valid = 1'b0, out_valid;
  gate_e in_gate = GATE_I, out_gate;
  acc_t  in_acc [N];
  act_t  out_at;

  adder_tree #(.N(N)) dut (.*);

  int checks = 0, failures = 0;

  initial begin : main
    logic  pv;
    gate_e pg;
    int    pat;
    pv = 1'b0; pg = GATE_I; pat = 0;
    foreach (in_acc[n]) in_acc[n] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 2000; k++) begin
      longint sum;
      in_valid = ($urandom_range(2) != 0);
      in_gate  = gate_e'($urandom_range(3));
      sum = 0;
      for (int n = 0; n < N; n++) begin
        longint v;
        v = (k % 50 == 7) ? longint'($urandom_range(1 << 30)) * 64 : longint'($urandom_range(1 << 21)) - (1 << 20);
        if ($urandom_range(1) == 0 && k % 50 == 7) v = -v;
        in_acc[n] = acc_t'(v);
        sum += v;
      end
      sum = sum >>> 6;
      @(posedge clk);
      checks++;
      if (out_valid != pv || (pv && (out_gate != pg || int'(out_at) != pat))) begin
        failures++;
        $display("cycle %0d: valid %0d gate %0d at %0d, expected %0d %0d %0d", k, out_valid, out_gate, out_at, pv, pg, pat);
      end
      pv  = in_valid;
      pg  = in_gate;
      pat = (sum > 32767) ? 32767 : (sum < -32768) ? -32768 : int'(sum);
      @(negedge clk);
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
