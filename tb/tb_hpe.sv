// Testbench of one heterogeneous PE (hpe), a MAC PE that also computes the LSTM
// pointwise stage of its neurons.
//
// Phase 1 uses the array as a MAC array (as in tb_mac_array, shorter). Phase 2 runs
// the LSTM pointwise stage for several time steps: for each neuron slot the four
// pre-activations of all M lanes arrive on consecutive cycles in the order i, g, f,
// o, and a model in this file, with its own sigmoid/tanh tables, predicts
// c_t = f*c_{t-1} + i*g and h_t = o*tanh(c_t). h_valid must rise exactly ACT_LAT
// cycles after the gate-i input, and the cell state must persist across steps.
//
// The expected values come from a model written independently in this file; the
// stimulus, the protocol rules checked and the watchdog limit are this testbench's
// own choices, while the behaviour checked is the one the published design describes.
module tb_hpe;
  import spartus_pkg::*;
  localparam int M = 1, DEPTH = 16, SLOTS = 4, BLEN = 2, NCOL = 60, STEPS = 5;
  localparam int ACT_LAT = 8;   // clock edges from the one taking gate i to the one raising h_valid

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic nzv_load = 1'b0, w_valid = 1'b0, clr_en = 1'b0, busy, at_valid = 1'b0, h_valid, act_busy;
  act_t nzv_in = '0;
  wentry_t w_word [M];
  logic [$clog2(DEPTH)-1:0] clr_addr = '0, rd_addr = '0;
  acc_t acc_out [M];
  gate_e at_gate = GATE_I;
  act_t at [M], h [M];
  logic [$clog2(SLOTS)-1:0] slot = '0;

  hpe #(.DEPTH(DEPTH), .SLOTS(SLOTS)) dut (
    .clk, .rst_n, .in_valid(w_valid), .nzv(nzv_q), .w(w_word[0].w), .lidx(w_word[0].lidx),
    .clr_en, .clr_addr, .rd_addr, .acc_out(acc_out[0]), .busy, .at_valid, .at_gate, .at(at[0]),
    .slot, .h_valid, .h(h[0]), .act_busy
  );
  // the delta is held from its load until the next one, as the array does
  act_t nzv_q;
  always_ff @(posedge clk) if (!rst_n) nzv_q <= '0; else if (nzv_load) nzv_q <= nzv_in;

  int checks = 0, failures = 0;
  longint model [M][DEPTH];
  int sig_tab [256], tanh_tab [256];
  int cst [SLOTS][M];

  function automatic int lut_idx(int x);
    int c;
    c = (x > 2047) ? 2047 : (x < -2048) ? -2048 : x;
    return (c >>> 4) + 128;
  endfunction

  function automatic int sat16(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  initial begin : main
    int tail;
    for (int k = 0; k < 256; k++) begin
      real x, y;
      x = (k - 128) / 16.0;
      sig_tab[k] = $rtoi(256.0 / (1.0 + $exp(-x)) + 0.5);
      y = 256.0 * (2.0 / (1.0 + $exp(-2.0 * x)) - 1.0);
      tanh_tab[k] = (y >= 0.0) ? $rtoi(y + 0.5) : -$rtoi(-y + 0.5);
    end
    foreach (model[m, a]) model[m][a] = 0;
    foreach (cst[s, m]) cst[s][m] = 0;
    foreach (w_word[m]) w_word[m] = '0;
    foreach (at[m]) at[m] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    clr_en = 1'b1;
    for (int a = 0; a < DEPTH; a++) begin
      clr_addr = ($bits(clr_addr))'(a);
      @(negedge clk);
    end
    clr_en = 1'b0;
    // phase 1: multiply-accumulate
    for (int j = 0; j < NCOL; j++) begin
      int v;
      v = int'($urandom_range(65535)) - 32768;
      nzv_load = 1'b1;
      nzv_in = act_t'(v);
      @(negedge clk);
      nzv_load = 1'b0;
      for (int k = 0; k < BLEN; k++) begin
        w_valid = 1'b1;
        for (int m = 0; m < M; m++) begin
          w_word[m].w    = wgt_t'(int'($urandom_range(255)) - 128);
          w_word[m].lidx = lidx_t'($urandom_range(DEPTH - 1));
          model[m][w_word[m].lidx] += longint'(v) * longint'(w_word[m].w);
        end
        @(negedge clk);
      end
      w_valid = 1'b0;
    end
    tail = 0;
    while (busy) begin
      @(negedge clk);
      tail++;
    end
    checks++;
    if (tail != 2) begin
      failures++;
      $display("busy stayed high %0d cycles, expected 2", tail);
    end
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = ($bits(rd_addr))'(a);
      #1;
      for (int m = 0; m < M; m++) begin
        checks++;
        if (acc_out[m] != acc_t'(model[m][a])) begin
          failures++;
          $display("lane %0d address %0d: %0d, expected %0d", m, a, acc_out[m], model[m][a]);
        end
      end
    end
    // phase 2: pointwise LSTM stage
    @(negedge clk);
    for (int t = 0; t < STEPS; t++)
      for (int s = 0; s < SLOTS; s++) begin
        int d [4][M];
        int lat;
        for (int b = 0; b < 4; b++) begin
          at_valid = 1'b1;
          at_gate  = gate_e'(b);
          slot     = ($bits(slot))'(s);
          for (int m = 0; m < M; m++) begin
            d[b][m] = int'($urandom_range(2400)) - 1200;
            at[m] = act_t'(d[b][m]);
          end
          @(negedge clk);
        end
        at_valid = 1'b0;
        lat = 3;
        while (!h_valid && lat < 40) begin
          @(negedge clk);
          lat++;
        end
        checks++;
        if (lat != ACT_LAT) begin
          failures++;
          $display("h_valid %0d cycles after gate i, expected %0d", lat, ACT_LAT);
        end
        for (int m = 0; m < M; m++) begin
          int si, tg, sf, so, cn, hh;
          si = sig_tab[lut_idx(d[0][m])];
          tg = tanh_tab[lut_idx(d[1][m])];
          sf = sig_tab[lut_idx(d[2][m])];
          so = sig_tab[lut_idx(d[3][m])];
          cn = sat16((longint'(cst[s][m]) * sf + tg * si) >>> 8);
          cst[s][m] = cn;
          hh = sat16(longint'(tanh_tab[lut_idx(cn)] * so) >>> 8);
          checks++;
          if (int'(h[m]) != hh) begin
            failures++;
            $display("step %0d slot %0d lane %0d: h %0d, expected %0d", t, s, m, h[m], hh);
          end
        end
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
