// Testbench of one weight-memory bank.
//
// Fills the bank with random CBCSC words (M lanes of weight and row index), then
// issues random reads with random gaps while occasionally rewriting words, and
// checks that each read returns, one cycle later with rvalid, the word last written.
//
// The expected values come from a model written independently in this file; the
// stimulus, the protocol rules checked and the watchdog limit are this testbench's
// own choices, while the behaviour checked is the one the published design describes.
module tb_wmem_bank;
  import spartus_pkg::*;
  localparam int M = 8, DEPTH = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic we = 1'b0, re = 1'b0, rvalid;
  logic [$clog2(DEPTH)-1:0] waddr = '0, raddr = '0;
  wentry_t wdata [M], rdata [M];

  wmem_bank #(.M(M), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] model [DEPTH][M];

  task automatic write_word(int a);
    waddr = ($bits(waddr))'(a);
    for (int m = 0; m < M; m++) begin
      model[a][m] = 16'($urandom);
      wdata[m] = model[a][m];
    end
    we = 1'b1;
  endtask

  initial begin : main
    logic pv;
    int   pa;
    pv = 1'b0; pa = 0;
    foreach (wdata[m]) wdata[m] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < DEPTH; a++) begin
      write_word(a);
      @(negedge clk);
    end
    we = 1'b0;
    for (int k = 0; k < 1000; k++) begin
      re = ($urandom_range(3) != 0);
      raddr = ($bits(raddr))'($urandom_range(DEPTH - 1));
      we = 1'b0;
      if ($urandom_range(7) == 0) begin
        int a;
        do a = int'($urandom_range(DEPTH - 1)); while (a == int'(raddr) || a == pa);
        write_word(a);
      end
      @(posedge clk);
      checks++;
      if (rvalid != pv) begin
        failures++;
        $display("rvalid %0d, expected %0d", rvalid, pv);
      end else if (pv) begin
        for (int m = 0; m < M; m++)
          if (rdata[m] != model[pa][m]) begin
            failures++;
            $display("address %0d lane %0d: %h, expected %h", pa, m, rdata[m], model[pa][m]);
            break;
          end
      end
      pv = re;
      pa = int'(raddr);
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
