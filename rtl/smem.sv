// State Memory (SMEM): buffers the input vector x_t and the layer output h_t and
// streams their concatenation s_t = [x_t; h_{t-1}] to the IPU, M elements per word.
//
// Input side. x_t arrives from the DMA as beats of E elements (x_valid/x_ready).
// Elements are packed into M-element words; the first beat of a word zeroes the
// rest of the word, so a vector whose length cfg_x_len is not a multiple of M is
// zero-padded to cfg_x_words words. Two x buffers are used in ping-pong fashion:
// while one holds the vector of the current time step, the host can already send
// the next one, hiding the transfer. x_avail is high when a complete vector is
// waiting. cfg_x_len must be a multiple of E.
//
// Output side. step_start begins streaming: the cfg_x_words words of the waiting x
// buffer, then the cfg_h_words words of the h buffer (h_{t-1}), with s_last on the
// final word; s_valid/s_ready handshake with the state FIFO. When the last word has
// been accepted, the x buffer is released and streaming is over (streaming low).
//
// The h buffer is written one M-element word per neuron slot by the HPE array
// (h_we, h_waddr) during the activation phase, and cleared by the sweep at the start
// of a sequence (the initial hidden state is zero).
//
// The roles (x buffering to hide DMA latency, h buffering, zero padding to a
// multiple of M, concatenation) follow the paper; the ping-pong organisation, beat
// width and handshakes are this design's choices.
module smem
  import spartus_pkg::*;
#(
  parameter int M       = 64,
  parameter int E       = 4,    // elements per DMA beat
  parameter int X_WORDS = 16,   // x buffer words (max input size / M)
  parameter int H_WORDS = 16,   // h buffer words (max hidden size / M)
  localparam int XAW    = (X_WORDS > 1) ? $clog2(X_WORDS) : 1,
  localparam int HAW    = (H_WORDS > 1) ? $clog2(H_WORDS) : 1,
  localparam int SAW    = $clog2(X_WORDS + H_WORDS),
  localparam int LW     = $clog2(X_WORDS * M + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [LW-1:0]  cfg_x_len,
  input  logic [XAW:0]   cfg_x_words,
  input  logic [HAW:0]   cfg_h_words,
  // x stream from the DMA
  input  logic           x_valid,
  input  act_t           x_data [E],
  output logic           x_ready,
  output logic           x_avail,
  // state stream to the IPU
  input  logic           step_start,
  output logic           s_valid,
  output act_t           s_data [M],
  output logic           s_last,
  input  logic           s_ready,
  output logic           streaming,
  // h words from the HPE array
  input  logic           h_we,
  input  logic [HAW-1:0] h_waddr,
  input  act_t           h_wdata [M],
  // clearing sweep
  input  logic           clr_en,
  input  logic [SAW-1:0] clr_addr
);

  typedef act_t word_t [M];

  word_t         xbuf [2][X_WORDS];
  word_t         hbuf [H_WORDS];
  logic [1:0]    xfull;
  logic          wsel, rsel;
  logic [LW-1:0] xcnt;
  logic [SAW:0]  rword;
  logic [SAW:0]  total;

  localparam int EPW = M / E;  // beats per word

  assign total   = (SAW+1)'(cfg_x_words) + (SAW+1)'(cfg_h_words);
  assign x_ready = !xfull[wsel];
  assign x_avail = xfull[rsel];

  // x write side
  always_ff @(posedge clk) begin
    if (x_valid && x_ready) begin
      logic [XAW-1:0] w;
      int             b;
      w = XAW'(int'(xcnt) / M);
      b = int'(xcnt) % M;
      if (b == 0) begin
        for (int e = 0; e < M; e++) xbuf[wsel][w][e] <= '0;
      end
      for (int e = 0; e < E; e++) xbuf[wsel][w][b + e] <= x_data[e];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      xcnt      <= '0;
      wsel      <= 1'b0;
      rsel      <= 1'b0;
      xfull     <= '0;
      rword     <= '0;
      streaming <= 1'b0;
    end else begin
      if (x_valid && x_ready) begin
        if (xcnt + LW'(E) >= cfg_x_len) begin
          xcnt        <= '0;
          xfull[wsel] <= 1'b1;
          wsel        <= !wsel;
        end else begin
          xcnt <= xcnt + LW'(E);
        end
      end
      if (step_start && !streaming) begin
        streaming <= 1'b1;
        rword     <= '0;
      end else if (s_valid && s_ready) begin
        if (s_last) begin
          streaming   <= 1'b0;
          xfull[rsel] <= 1'b0;
          rsel        <= !rsel;
        end else begin
          rword <= rword + 1'b1;
        end
      end
    end
  end

  // h buffer
  always_ff @(posedge clk) begin
    if (clr_en) begin
      if (int'(clr_addr) < H_WORDS) hbuf[HAW'(clr_addr)] <= '{default: '0};
    end else if (h_we) begin
      hbuf[h_waddr] <= h_wdata;
    end
  end

  // state stream
  always_comb begin
    s_valid = streaming;
    s_last  = streaming && (rword == total - 1'b1);
    if (rword < (SAW+1)'(cfg_x_words)) s_data = xbuf[rsel][XAW'(rword)];
    else                               s_data = hbuf[HAW'(rword - (SAW+1)'(cfg_x_words))];
  end

  a_start_needs_x: assert property (@(posedge clk) disable iff (!rst_n) (step_start && !streaming) |-> x_avail);
  initial assert (M % E == 0 && EPW > 0) else $error("smem: M must be a multiple of E");

endmodule
