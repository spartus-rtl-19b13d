// Reduced-size testbench of spartus_top (M = 8, N = 2, up to 64 hidden units),
// with small FIFOs so that every back-pressure path is exercised often.
//
// End-to-end test of the accelerator against an independent fixed-point DeltaLSTM
// reference written in this file. The testbench
//   * builds a random weight matrix with exactly BLEN nonzeros per subcolumn
//     (column-balanced sparsity), encodes it into CBCSC words and loads the N weight
//     banks through the weight port;
//   * runs two sequences (the second after seq_start, which must clear all state)
//     of slowly drifting random input vectors, streamed in E-element beats while
//     the previous step is still being computed;
//   * for every time step computes the deltas with threshold Theta, the delta
//     memories, the LSTM pointwise stage with its own sigmoid/tanh tables, and
//     compares every h_t element leaving the output stream;
//   * checks each step's cycle count against bounds derived from the nonzero
//     counts (state encoding, BLEN cycles per nonzero delta, 11 cycles per neuron
//     slot in the activation phase);
//   * counts how often each mechanism happened (skipped deltas, recurrent deltas
//     above the threshold, several nonzeros in
//     one DPE segment, delta-FIFO full, state-FIFO full, output-buffer full, input
//     transfer overlapping computation, partial-sum forwarding, clearing) and fails
//     if one never did.
//
// The expected values come from a model written independently in this file; the
// stimulus, the protocol rules checked and the watchdog limit are this testbench's
// own choices, while the behaviour checked is the one the published design describes.
module tb_spartus_small;
  import spartus_pkg::*;

  localparam int M        = 8;
  localparam int N        = 2;
  localparam int H        = 64;     // hidden units of the tested layer
  localparam int XL       = 20;    // input elements of the tested layer
  localparam int E        = 4;
  localparam int BLEN     = 3;
  localparam int THETA    = 77;        // 0.3 in Q8.8
  localparam int T1       = 6;    // steps of the first sequence
  localparam int T2       = 4;    // steps of the second sequence
  localparam int X_MAXW   = 4; // default-parameter x buffer words
  localparam int H_MAXW   = 8;
  localparam int WAW      = 8;
  localparam int XW       = (XL + M - 1) / M;
  localparam int HW       = H / M;
  localparam int SWD      = XW + HW;
  localparam int C        = SWD * M;   // state columns
  localparam int R        = 4 * H;     // stacked weight rows
  localparam int SUBH     = R / M;     // subcolumn height
  localparam int I        = M / N;
  localparam int T        = T1 + T2;
  localparam int WATCHDOG = 100000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = !clk;

  // ---------------- DUT ----------------
  logic [$clog2(X_MAXW*M+1)-1:0] cfg_x_len;
  logic [$clog2(X_MAXW):0]       cfg_x_words;
  logic [$clog2(H_MAXW):0]       cfg_h_words;
  logic [$clog2(4*H_MAXW):0]     cfg_blen;
  act_t                          cfg_theta;
  logic                          seq_start = 1'b0;
  logic                          x_valid = 1'b0, x_ready;
  act_t                          x_data [E];
  logic                          h_valid, h_last, h_ready = 1'b1;
  act_t                          h_data [E];
  logic                          wm_we = 1'b0;
  logic [((N > 1) ? $clog2(N) : 1)-1:0] wm_bank;
  logic [WAW-1:0]                wm_addr;
  wentry_t                       wm_wdata [M];
  logic                          busy, step_done;
  logic [31:0]                   step_cycles;

  spartus_top #(.M(8), .N(2), .H_MAX(64), .X_MAX(32), .E(4), .WMEM_DEPTH(256), .SF_DEPTH(2), .DF_DEPTH(4), .OB_DEPTH(4)) dut (
    .clk, .rst_n, .cfg_x_len, .cfg_x_words, .cfg_h_words, .cfg_blen, .cfg_theta, .seq_start,
    .x_valid, .x_data, .x_ready, .h_valid, .h_data, .h_last, .h_ready,
    .wm_we, .wm_bank, .wm_addr, .wm_wdata, .busy, .step_done, .step_cycles
  );

  // ---------------- reference data ----------------
  int            wv [C][M][BLEN];   // weight values
  int            wl [C][M][BLEN];   // local row indices
  int            xs [T][XL];
  longint        dm [R];
  int            shat [C];
  int            cst [H], hst [H];
  int            href [T][H];
  int            nz_arr [T][N];     // nonzero deltas per array and step
  int            enc_cyc [T];       // cycles the DPEs need to encode the step
  int            sig_tab [256], tanh_tab [256];
  int            checks = 0, failures = 0;

  // mechanism counters
  int n_skip = 0, n_multi = 0, n_dstall = 0, n_sstall = 0, n_obfull = 0, n_overlap = 0;
  int n_fwd = 0, n_clear = 0, n_hnz = 0;

  function automatic int lut_idx(int x);
    int c;
    c = (x > 2047) ? 2047 : (x < -2048) ? -2048 : x;
    return (c >>> 4) + 128;
  endfunction

  function automatic int sat16(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  task automatic build_tables();
    for (int k = 0; k < 256; k++) begin
      real x, y;
      x = (k - 128) / 16.0;
      sig_tab[k] = $rtoi(256.0 / (1.0 + $exp(-x)) + 0.5);
      y = 256.0 * (2.0 / (1.0 + $exp(-2.0 * x)) - 1.0);
      tanh_tab[k] = (y >= 0.0) ? $rtoi(y + 0.5) : -$rtoi(-y + 0.5);
    end
  endtask

  task automatic build_weights();
    for (int c = 0; c < C; c++)
      for (int m = 0; m < M; m++) begin
        int used [SUBH];
        foreach (used[r]) used[r] = 0;
        for (int k = 0; k < BLEN; k++) begin
          int r;
          do r = int'($urandom_range(SUBH - 1)); while (used[r] != 0);
          used[r] = 1;
          wl[c][m][k] = r;
          wv[c][m][k] = int'($urandom_range(128)) - 64;
        end
      end
  endtask

  task automatic build_inputs();
    for (int t = 0; t < T; t++)
      for (int i = 0; i < XL; i++) begin
        if (t == 0 || t == T1) xs[t][i] = int'($urandom_range(512)) - 256;
        else if ($urandom_range(3) == 0) xs[t][i] = xs[t-1][i] + int'($urandom_range(300)) - 150;
        else xs[t][i] = xs[t-1][i] + int'($urandom_range(20)) - 10;
        if (xs[t][i] > 600) xs[t][i] = 600;
        if (xs[t][i] < -600) xs[t][i] = -600;
      end
  endtask

  task automatic ref_reset();
    foreach (dm[r]) dm[r] = 0;
    foreach (shat[c]) shat[c] = 0;
    foreach (cst[j]) begin cst[j] = 0; hst[j] = 0; end
  endtask

  task automatic ref_step(int t);
    int s [C];
    int d;
    for (int c = 0; c < C; c++) begin
      if (c < XW * M) s[c] = (c < XL) ? xs[t][c] : 0;
      else            s[c] = hst[c - XW * M];
    end
    for (int n = 0; n < N; n++) nz_arr[t][n] = 0;
    enc_cyc[t] = 0;
    for (int w = 0; w < SWD; w++) begin
      int mx = 1;
      for (int n = 0; n < N; n++) begin
        int cnt = 0;
        for (int i = 0; i < I; i++) begin
          int c = w * M + i * N + n;
          int ad;
          d  = s[c] - shat[c];
          ad = (d < 0) ? -d : d;
          if (ad > THETA) begin
            int dv = sat16(d);
            cnt++;
            if (c >= XW * M) n_hnz++;
            shat[c] = s[c];
            for (int m = 0; m < M; m++)
              for (int k = 0; k < BLEN; k++)
                dm[wl[c][m][k] * M + m] += longint'(dv) * wv[c][m][k];
          end else if (c < XL || c >= XW * M) begin
            n_skip++;
          end
        end
        nz_arr[t][n] += cnt;
        if (cnt > mx) mx = cnt;
      end
      enc_cyc[t] += mx;
    end
    for (int j = 0; j < H; j++) begin
      int at [4];
      int si, tg, sf, so, p, cn, tc;
      for (int b = 0; b < 4; b++) at[b] = sat16(dm[b * H + j] >>> 6);
      si = sig_tab[lut_idx(at[0])];
      tg = tanh_tab[lut_idx(at[1])];
      sf = sig_tab[lut_idx(at[2])];
      so = sig_tab[lut_idx(at[3])];
      p  = tg * si;
      cn = sat16((longint'(cst[j]) * sf + p) >>> 8);
      tc = tanh_tab[lut_idx(cn)];
      cst[j] = cn;
      hst[j] = sat16(longint'(tc * so) >>> 8);
      href[t][j] = hst[j];
    end
  endtask

  // ---------------- stimulus ----------------
  int seq_b_go = 0;

  task automatic load_weights();
    for (int c = 0; c < C; c++)
      for (int k = 0; k < BLEN; k++) begin
        @(negedge clk);
        wm_we   = 1'b1;
        wm_bank = ($bits(wm_bank))'(c % N);
        wm_addr = WAW'((c / N) * BLEN + k);
        for (int m = 0; m < M; m++) begin
          wm_wdata[m].w    = wgt_t'(wv[c][m][k]);
          wm_wdata[m].lidx = lidx_t'(wl[c][m][k]);
        end
      end
    @(negedge clk);
    wm_we = 1'b0;
  endtask

  task automatic send_vector(int t);
    for (int b = 0; b < (XL + E - 1) / E; b++) begin
      while ($urandom_range(7) == 0) begin
        @(negedge clk);
        x_valid = 1'b0;
      end
      @(negedge clk);
      x_valid = 1'b1;
      for (int e = 0; e < E; e++) x_data[e] = (b * E + e < XL) ? act_t'(xs[t][b * E + e]) : '0;
      @(posedge clk);
      while (!x_ready) @(posedge clk);
    end
    @(negedge clk);
    x_valid = 1'b0;
  endtask

  // ---------------- output collection and checking ----------------
  int t_out = 0;
  int got [H];

  initial begin : collector
    int beat;
    beat = 0;
    forever begin
      @(posedge clk);
      if (rst_n && h_valid && h_ready) begin
        for (int e = 0; e < E; e++) got[beat * E + e] = int'(h_data[e]);
        beat++;
        if (h_last) begin
          int bad;
          bad = 0;
          checks++;
          if (beat != H / E) begin
            failures++;
            $display("step %0d: %0d output beats, expected %0d", t_out, beat, H / E);
          end
          for (int j = 0; j < H; j++) begin
            if (got[j] != href[t_out][j]) begin
              if (bad < 5) $display("step %0d h[%0d] = %0d, expected %0d", t_out, j, got[j], href[t_out][j]);
              bad++;
            end
          end
          checks++;
          if (bad != 0) failures++;
          beat = 0;
          t_out++;
        end
      end
    end
  end

  // cycle counts
  int t_done = 0;
  always @(posedge clk) begin
    if (rst_n && step_done) begin
      int mx, lo, hi;
      mx = 0;
      for (int n = 0; n < N; n++) if (nz_arr[t_done][n] > mx) mx = nz_arr[t_done][n];
      lo = ((mx * BLEN > enc_cyc[t_done]) ? mx * BLEN : enc_cyc[t_done]) + HW * 11;
      hi = enc_cyc[t_done] + mx * BLEN + 16 + HW * 11 + ((t_done >= 1 && t_done <= 3) ? HW * 60 : 0);
      checks++;
      if (int'(step_cycles) < lo || int'(step_cycles) > hi) begin
        failures++;
        $display("step %0d: %0d cycles outside [%0d, %0d]", t_done, step_cycles, lo, hi);
      end
      $display("step %0d: %0d cycles, busiest array %0d nonzero deltas, encode %0d cycles",
               t_done, step_cycles, mx, enc_cyc[t_done]);
      t_done++;
    end
  end

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ipu.g_dpe[0].u_dpe.out_valid && dut.u_ipu.g_dpe[0].u_dpe.out_ready &&
        !dut.u_ipu.g_dpe[0].u_dpe.seg_done) n_multi++;
    if (dut.u_ipu.dfifo_stall) n_dstall++;
    if (dut.s_valid && !dut.s_ready) n_sstall++;
    if (!dut.ob_ready) n_obfull++;
    if (x_valid && x_ready && busy && !dut.clr_en) n_overlap++;
    if (dut.clr_en) n_clear++;
  end

  // forwarding: a PE of array 0 updates the address it wrote in the previous cycle
  for (genvar m = 0; m < M; m++) begin : g_fwd_mon
    always @(posedge clk)
      if (rst_n && dut.g_array[0].u_array.g_pe[m].u_pe.a_v && dut.g_array[0].u_array.g_pe[m].u_pe.p_v &&
          dut.g_array[0].u_array.g_pe[m].u_pe.p_addr == dut.g_array[0].u_array.g_pe[m].u_pe.a_addr) n_fwd++;
  end

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never happened: %s", what);
    end else $display("mechanism %-34s %0d", what, n);
  endtask

  initial begin : main
    build_tables();
    build_weights();
    build_inputs();
    cfg_x_len   = ($bits(cfg_x_len))'(XL);
    cfg_x_words = ($bits(cfg_x_words))'(XW);
    cfg_h_words = ($bits(cfg_h_words))'(HW);
    cfg_blen    = ($bits(cfg_blen))'(BLEN);
    cfg_theta   = act_t'(THETA);
    foreach (x_data[e]) x_data[e] = '0;
    foreach (wm_wdata[m]) wm_wdata[m] = '0;
    wm_bank = '0;
    wm_addr = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    load_weights();
    // sequence A: compute the references as the vectors are sent
    ref_reset();
    for (int t = 0; t < T1; t++) ref_step(t);
    fork
      begin
        for (int t = 0; t < T1; t++) send_vector(t);
      end
      begin
        // the host stops collecting outputs for a while after step 0
        wait (t_done == 1);
        h_ready = 1'b0;
        repeat (HW * 60) @(negedge clk);
        h_ready = 1'b1;
      end
    join
    wait (t_out == T1);
    // sequence B
    @(negedge clk);
    seq_start = 1'b1;
    @(negedge clk);
    seq_start = 1'b0;
    ref_reset();
    for (int t = T1; t < T; t++) ref_step(t);
    for (int t = T1; t < T; t++) send_vector(t);
    wait (t_out == T);
    repeat (5) @(negedge clk);
    need("delta below threshold skipped", n_skip);
    need("hidden-state delta above threshold", n_hnz);
    need("several nonzeros in one DPE segment", n_multi);
    need("delta FIFO full stall", n_dstall);
    need("state FIFO full backpressure", n_sstall);
    need("output buffer full", n_obfull);
    need("input transfer during computation", n_overlap);
    need("partial-sum forwarding", n_fwd);
    need("state clearing sweep", n_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired: %0d of %0d steps checked", t_out, T);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
