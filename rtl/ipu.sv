// Input Processing Unit (IPU): converts the state vector s_t = [x_t; h_{t-1}] into N
// streams of nonzero deltas, one per MAC array.
//
// State words of M elements arrive from the state memory at up to one per cycle
// and are buffered in the state FIFO (S-FIFO); s_ready is low while it is full.
// The head word is split into N interleaved segments: DPE n receives elements
// i*N + n, i = 0..M/N-1 (the delta-state-vector partition that matches the way the
// weight columns are distributed over the WMEM banks). Each DPE emits its nonzero
// deltas one per cycle into its delta FIFO (D-FIFO) as (NZV, NZI) pairs; the word is
// popped from the S-FIFO when every DPE has sent all of its nonzero deltas, so the
// DPE with the most nonzeros in a word sets the pace. The controller pops D-FIFO n
// (d_pop[n]) for MAC array n.
//
// idle is high when both FIFO levels are empty, i.e. every delta of every accepted
// word has been handed to the MAC arrays. The structure (S-FIFO, N DPEs, N D-FIFOs)
// follows the paper; FIFO depths and the all-DPEs-done pop rule are this design's
// choices.
module ipu
  import spartus_pkg::*;
#(
  parameter int M        = 64,
  parameter int N        = 8,
  parameter int S_DEPTH  = 32,   // state words per vector
  parameter int SF_DEPTH = 4,
  parameter int DF_DEPTH = 16,
  localparam int I       = M / N,
  localparam int CW      = (S_DEPTH > 1) ? $clog2(S_DEPTH) : 1,
  localparam int SW      = (I > 1) ? $clog2(I) : 1,
  localparam int NZI_W   = CW + SW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  act_t             theta,
  input  logic             clr_en,
  input  logic [CW-1:0]    clr_addr,
  // state words from the state memory
  input  logic             s_valid,
  input  act_t             s_data [M],
  input  logic             s_last,
  output logic             s_ready,
  // delta FIFO heads, one per MAC array
  output logic [N-1:0]     d_valid,
  output act_t             d_nzv [N],
  output logic [NZI_W-1:0] d_nzi [N],
  input  logic [N-1:0]     d_pop,
  output logic             idle,
  // observation: a DPE had a delta ready but its D-FIFO was full
  output logic             dfifo_stall
);

  localparam int SFW = M * ACT_W + 1;
  localparam int DFW = ACT_W + NZI_W;

  logic [SFW-1:0] sf_wdata, sf_rdata;
  logic           sf_full, sf_empty, sf_pop;
  act_t           sf_word [M];
  logic           sf_last;
  logic [N-1:0]   seg_done, dp_valid, df_full, df_empty;
  act_t           dp_nzv [N];
  logic [NZI_W-1:0] dp_nzi [N];

  always_comb begin
    for (int e = 0; e < M; e++) sf_wdata[e*ACT_W +: ACT_W] = s_data[e];
    sf_wdata[SFW-1] = s_last;
    for (int e = 0; e < M; e++) sf_word[e] = act_t'(sf_rdata[e*ACT_W +: ACT_W]);
    sf_last = sf_rdata[SFW-1];
  end

  assign s_ready = !sf_full;

  sync_fifo #(.WIDTH(SFW), .DEPTH(SF_DEPTH)) u_sfifo (
    .clk(clk), .rst_n(rst_n),
    .wr_en(s_valid && !sf_full), .wdata(sf_wdata),
    .rd_en(sf_pop), .rdata(sf_rdata),
    .full(sf_full), .empty(sf_empty), .count()
  );

  assign sf_pop = !sf_empty && (&seg_done);

  for (genvar n = 0; n < N; n++) begin : g_dpe
    act_t             seg [I];
    logic [DFW-1:0]   df_rdata;

    always_comb
      for (int i = 0; i < I; i++) seg[i] = sf_word[i*N + n];

    dpe #(.I(I), .DEPTH(S_DEPTH)) u_dpe (
      .clk(clk), .rst_n(rst_n), .theta(theta),
      .clr_en(clr_en), .clr_addr(clr_addr),
      .in_valid(!sf_empty), .in_data(seg), .in_last(sf_last),
      .seg_done(seg_done[n]), .in_accept(sf_pop),
      .out_valid(dp_valid[n]), .out_nzv(dp_nzv[n]), .out_nzi(dp_nzi[n]),
      .out_ready(!df_full[n])
    );

    sync_fifo #(.WIDTH(DFW), .DEPTH(DF_DEPTH)) u_dfifo (
      .clk(clk), .rst_n(rst_n),
      .wr_en(dp_valid[n] && !df_full[n]), .wdata({dp_nzv[n], dp_nzi[n]}),
      .rd_en(d_pop[n]), .rdata(df_rdata),
      .full(df_full[n]), .empty(df_empty[n]), .count()
    );

    assign d_valid[n] = !df_empty[n];
    assign d_nzv[n]   = act_t'(df_rdata[DFW-1 -: ACT_W]);
    assign d_nzi[n]   = df_rdata[NZI_W-1:0];
  end

  assign idle        = sf_empty && (&df_empty);
  assign dfifo_stall = |(dp_valid & df_full);

endmodule
