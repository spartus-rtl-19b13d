// Output Buffer (OBUF): decouples the HPE array from the DMA that returns h_t to the
// host.
//
// The HPE array writes one M-element word per neuron slot (in_valid; in_last marks
// the final word of a time step). Words are queued in a FIFO of DEPTH words and
// sent to the DMA as M/E beats of E elements each (out_valid/out_ready); out_last
// marks the final beat of a time step. in_ready is low while the FIFO is full, which
// makes the controller wait before starting the next slot. That an output buffer
// hides the host transfer follows the paper; the FIFO depth, the beat width and
// the last flag are this design's choices.
module obuf
  import spartus_pkg::*;
#(
  parameter int M     = 64,
  parameter int E     = 4,
  parameter int DEPTH = 16,
  localparam int BW   = (M / E > 1) ? $clog2(M / E) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t in_data [M],
  input  logic in_last,
  output logic in_ready,
  output logic out_valid,
  output act_t out_data [E],
  output logic out_last,
  input  logic out_ready
);

  localparam int FW  = M * ACT_W + 1;
  localparam int NB  = M / E;

  logic [FW-1:0] wdata, rdata;
  logic          full, empty, pop;
  logic [BW-1:0] beat;

  always_comb begin
    for (int e = 0; e < M; e++) wdata[e*ACT_W +: ACT_W] = in_data[e];
    wdata[FW-1] = in_last;
    for (int e = 0; e < E; e++)
      out_data[e] = act_t'(rdata[(int'(beat) * E + e) * ACT_W +: ACT_W]);
  end

  assign in_ready  = !full;
  assign out_valid = !empty;
  assign out_last  = rdata[FW-1] && (int'(beat) == NB - 1);
  assign pop       = out_valid && out_ready && (int'(beat) == NB - 1);

  sync_fifo #(.WIDTH(FW), .DEPTH(DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n),
    .wr_en(in_valid && !full), .wdata(wdata),
    .rd_en(pop), .rdata(rdata),
    .full(full), .empty(empty), .count()
  );

  always_ff @(posedge clk) begin
    if (!rst_n)                      beat <= '0;
    else if (out_valid && out_ready) beat <= pop ? '0 : beat + 1'b1;
  end

  a_no_drop: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_ready);

endmodule
