// Spartus: a DeltaLSTM accelerator that skips work along two axes at once.
//
// Temporal sparsity: the layer works on deltas of its state vector s_t = [x_t;
// h_{t-1}] instead of the states themselves; only elements whose change since their
// last propagated value exceeds a threshold Theta produce a delta, and only those
// weight columns are fetched. Spatial sparsity: the stacked weight matrix is
// pruned so that every subcolumn (the rows of a column owned by one PE) holds
// exactly BLEN nonzeros, stored in the column-balanced CSC format (CBCSC), so each
// fetched column keeps all M PEs of an array busy for exactly BLEN cycles.
//
// Datapath (one time step):
//   smem        streams s_t words (M elements) into the IPU
//   ipu         N delta processing elements, one per MAC array, produce (NZV, NZI)
//               pairs into N delta FIFOs; element e of a word goes to array e mod N
//   ctrl        pops NZIs and reads BLEN words of the column from WMEM bank n
//   mac_array   arrays 0..N-2: M PEs multiply NZV by their weight lane and
//               accumulate into the partial-sum row given by the lane's LIDX
//   hpe_array   array N-1: the same, then the LSTM pointwise stage
//   adder_tree  M trees add the N partial sums of a row into the delta memory D
//   obuf        queues h_t words for the DMA back to the host
// After the MAC phase the controller walks the neuron slots: for slot q the trees
// deliver D_i, D_g, D_f, D_o of neurons q*M..q*M+M-1 to the HPEs, which produce c_t
// and h_t; h_t goes to the state memory (for the next step) and to the output
// buffer.
//
// Interfaces: x_t arrives as E-element beats (x_valid/x_ready) and h_t leaves as
// E-element beats (h_valid/h_ready, h_last on the last beat of a step); these stand
// for the AXI-Stream channels of the host's DMA engine. Weights are written through
// a plain memory port (wm_*), bank by bank, before inference. seq_start clears all
// state (DPE memories, delta memories, cell and hidden states) at the start of a
// sequence; step_done pulses after every time step, with step_cycles the number of
// cycles it took.
//
// Configuration: cfg_x_len input elements (multiple of E), padded to cfg_x_words
// words of M; cfg_h_words = hidden size / M; cfg_blen nonzeros per subcolumn;
// cfg_theta the delta threshold in Q8.8. Default parameters are the paper's main
// configuration (M = 64 PEs per array, N = 8 arrays, 512 MACs), sized for layers of
// up to 1024 inputs and 1024 hidden units.
//
// The block set and the wiring (state memory -> IPU -> MAC arrays with weight banks ->
// adder trees -> HPEs -> output buffer, with h_t fed back) follow the published block
// diagram; the port protocols, the stream width E and the FIFO depths are this
// design's own choices.
//
// Lint notes that stand: the upper LIDX bits are unused when a partial-sum memory has
// fewer than 256 entries (the 8-bit index width is kept as published); only lane 0's
// at_valid/at_gate drive the HPE array because all lanes run in lockstep, so the
// other lanes' copies are unused; dfifo_stall and act_busy are status signals that
// are only observed by testbenches; the FIFOs' occupancy outputs are left open.
module spartus_top
  import spartus_pkg::*;
#(
  parameter int M          = 64,
  parameter int N          = 8,
  parameter int H_MAX      = 1024,
  parameter int X_MAX      = 1024,
  parameter int E          = 4,
  parameter int WMEM_DEPTH = 1024,
  parameter int SF_DEPTH   = 4,
  parameter int DF_DEPTH   = 16,
  parameter int OB_DEPTH   = 16,
  localparam int I         = M / N,
  localparam int X_WORDS   = X_MAX / M,
  localparam int H_WORDS   = H_MAX / M,
  localparam int S_WORDS   = X_WORDS + H_WORDS,
  localparam int ACC_DEPTH = 4 * H_WORDS,
  localparam int NZI_W     = $clog2(S_WORDS) + ((I > 1) ? $clog2(I) : 1),
  localparam int WAW       = $clog2(WMEM_DEPTH),
  localparam int CLR_LEN   = (S_WORDS > ACC_DEPTH) ? S_WORDS : ACC_DEPTH,
  localparam int XAW       = (X_WORDS > 1) ? $clog2(X_WORDS) : 1,
  localparam int HAW       = (H_WORDS > 1) ? $clog2(H_WORDS) : 1,
  localparam int AAW       = $clog2(ACC_DEPTH),
  localparam int BLW       = AAW + 1,
  localparam int LW        = $clog2(X_WORDS * M + 1),
  localparam int NBW       = (N > 1) ? $clog2(N) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration
  input  logic [LW-1:0]   cfg_x_len,
  input  logic [XAW:0]    cfg_x_words,
  input  logic [HAW:0]    cfg_h_words,
  input  logic [BLW-1:0]  cfg_blen,
  input  act_t            cfg_theta,
  input  logic            seq_start,
  // input stream (from the DMA)
  input  logic            x_valid,
  input  act_t            x_data [E],
  output logic            x_ready,
  // output stream (to the DMA)
  output logic            h_valid,
  output act_t            h_data [E],
  output logic            h_last,
  input  logic            h_ready,
  // weight loading
  input  logic            wm_we,
  input  logic [NBW-1:0]  wm_bank,
  input  logic [WAW-1:0]  wm_addr,
  input  wentry_t         wm_wdata [M],
  // status
  output logic            busy,
  output logic            step_done,
  output logic [31:0]     step_cycles
);

  localparam int CAW = (CLR_LEN > 1) ? $clog2(CLR_LEN) : 1;
  localparam int SAW = $clog2(S_WORDS);

  // state memory <-> IPU
  logic             x_avail, streaming, step_start;
  logic             s_valid, s_last, s_ready;
  act_t             s_data [M];
  // IPU <-> CTRL / arrays
  logic [N-1:0]     d_valid, d_pop;
  act_t             d_nzv [N];
  logic [NZI_W-1:0] d_nzi [N];
  logic             ipu_idle, dfifo_stall;
  // weight memories
  logic [N-1:0]     wm_re, wm_rvalid;
  logic [WAW-1:0]   wm_raddr [N];
  wentry_t          wm_rdata [N][M];
  // arrays
  logic [N-1:0]     array_busy;
  acc_t             acc [N][M];
  logic [AAW-1:0]   acc_raddr;
  // activation
  logic             at_req, hpe_h_valid, h_we, ob_last, ob_ready, act_busy;
  gate_e            at_gate_req;
  logic [HAW-1:0]   slot;
  logic [M-1:0]     at_valid_m;
  gate_e            at_gate_m [M];
  act_t             at [M];
  act_t             h_word [M];
  // clearing
  logic             clr_en;
  logic [CAW-1:0]   clr_addr;

  smem #(.M(M), .E(E), .X_WORDS(X_WORDS), .H_WORDS(H_WORDS)) u_smem (
    .clk(clk), .rst_n(rst_n),
    .cfg_x_len(cfg_x_len), .cfg_x_words(cfg_x_words), .cfg_h_words(cfg_h_words),
    .x_valid(x_valid), .x_data(x_data), .x_ready(x_ready), .x_avail(x_avail),
    .step_start(step_start), .s_valid(s_valid), .s_data(s_data), .s_last(s_last),
    .s_ready(s_ready), .streaming(streaming),
    .h_we(h_we), .h_waddr(slot), .h_wdata(h_word),
    .clr_en(clr_en), .clr_addr(SAW'(clr_addr))
  );

  ipu #(.M(M), .N(N), .S_DEPTH(S_WORDS), .SF_DEPTH(SF_DEPTH), .DF_DEPTH(DF_DEPTH)) u_ipu (
    .clk(clk), .rst_n(rst_n), .theta(cfg_theta),
    .clr_en(clr_en), .clr_addr($clog2(S_WORDS)'(clr_addr)),
    .s_valid(s_valid), .s_data(s_data), .s_last(s_last), .s_ready(s_ready),
    .d_valid(d_valid), .d_nzv(d_nzv), .d_nzi(d_nzi), .d_pop(d_pop),
    .idle(ipu_idle), .dfifo_stall(dfifo_stall)
  );

  ctrl #(.N(N), .NZI_W(NZI_W), .WAW(WAW), .H_WORDS(H_WORDS), .CLR_LEN(CLR_LEN)) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .cfg_blen(cfg_blen), .cfg_h_words(cfg_h_words), .seq_start(seq_start),
    .x_avail(x_avail), .streaming(streaming), .step_start(step_start),
    .ipu_idle(ipu_idle), .d_valid(d_valid), .d_nzi(d_nzi), .d_pop(d_pop),
    .wm_re(wm_re), .wm_raddr(wm_raddr), .wm_rvalid(wm_rvalid), .array_busy(array_busy),
    .acc_raddr(acc_raddr), .at_req(at_req), .at_gate(at_gate_req), .slot(slot),
    .h_valid(hpe_h_valid), .h_we(h_we), .ob_last(ob_last), .ob_ready(ob_ready),
    .clr_en(clr_en), .clr_addr(clr_addr),
    .busy(busy), .step_done(step_done), .step_cycles(step_cycles)
  );

  for (genvar n = 0; n < N; n++) begin : g_bank
    wmem_bank #(.M(M), .DEPTH(WMEM_DEPTH)) u_wmem (
      .clk(clk), .rst_n(rst_n),
      .we(wm_we && wm_bank == NBW'(n)), .waddr(wm_addr), .wdata(wm_wdata),
      .re(wm_re[n]), .raddr(wm_raddr[n]), .rdata(wm_rdata[n]), .rvalid(wm_rvalid[n])
    );
  end

  for (genvar n = 0; n < N - 1; n++) begin : g_array
    mac_array #(.M(M), .DEPTH(ACC_DEPTH)) u_array (
      .clk(clk), .rst_n(rst_n),
      .nzv_load(d_pop[n]), .nzv_in(d_nzv[n]),
      .w_valid(wm_rvalid[n]), .w_word(wm_rdata[n]),
      .clr_en(clr_en), .clr_addr(AAW'(clr_addr)),
      .rd_addr(acc_raddr), .acc_out(acc[n]), .busy(array_busy[n])
    );
  end

  hpe_array #(.M(M), .DEPTH(ACC_DEPTH), .SLOTS(H_WORDS)) u_hpe_array (
    .clk(clk), .rst_n(rst_n),
    .nzv_load(d_pop[N-1]), .nzv_in(d_nzv[N-1]),
    .w_valid(wm_rvalid[N-1]), .w_word(wm_rdata[N-1]),
    .clr_en(clr_en), .clr_addr(AAW'(clr_addr)),
    .rd_addr(acc_raddr), .acc_out(acc[N-1]), .busy(array_busy[N-1]),
    .at_valid(at_valid_m[0]), .at_gate(at_gate_m[0]), .at(at), .slot(slot),
    .h_valid(hpe_h_valid), .h(h_word), .act_busy(act_busy)
  );

  for (genvar m = 0; m < M; m++) begin : g_tree
    acc_t col [N];
    always_comb
      for (int n = 0; n < N; n++) col[n] = acc[n][m];
    adder_tree #(.N(N)) u_tree (
      .clk(clk), .rst_n(rst_n),
      .in_valid(at_req), .in_gate(at_gate_req), .in_acc(col),
      .out_valid(at_valid_m[m]), .out_gate(at_gate_m[m]), .out_at(at[m])
    );
  end

  obuf #(.M(M), .E(E), .DEPTH(OB_DEPTH)) u_obuf (
    .clk(clk), .rst_n(rst_n),
    .in_valid(h_we), .in_data(h_word), .in_last(ob_last), .in_ready(ob_ready),
    .out_valid(h_valid), .out_data(h_data), .out_last(h_last), .out_ready(h_ready)
  );

endmodule
