// token_ring: token ring readout of the block FIFOs into the module FIFO.
//
// Each of the N detector blocks writes its frames into its own block FIFO.
// A token passes from block to block, one block per clock cycle; the block
// holding the token moves one frame from its FIFO into the shared module
// FIFO if it has one and the module FIFO has room.  With four blocks the
// token visits every block once in 4 cycles (32 ns at 125 MHz), far faster
// than the one frame per microsecond per block that the detector produces,
// so frames leave the module FIFO close to their order in time, as the
// paper requires.  The module FIFO is read with a valid/ready handshake.
// A frame written to a full block FIFO is dropped and flagged on `drop`.
// `in_afull` (four or fewer free entries) tells a producer that can stall
// (the histogram read-out, three cycles from request to frame) to wait.  One token ring of this kind serves each processing mode.  FIFO
// depths are this design's choices.
module token_ring
  import spu_pkg::*;
#(
  parameter int unsigned N        = N_BLOCKS,
  parameter int unsigned BF_DEPTH = 16,
  parameter int unsigned MF_DEPTH = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  input  frame_t       in_frame [N],
  output logic [N-1:0] in_afull,
  output logic [N-1:0] drop,
  output logic         out_valid,
  output frame_t       out_frame,
  input  logic         out_ready
);
  localparam int unsigned TW = (N > 1) ? $clog2(N) : 1;

  frame_t       bf_data [N];
  logic [N-1:0] bf_empty, bf_pop;
  logic [TW-1:0] token;
  logic         mf_full, mf_empty, mf_push;

  for (genvar b = 0; b < N; b++) begin : g_blk
    sync_fifo #(.WIDTH($bits(frame_t)), .DEPTH(BF_DEPTH), .AF_LEFT(4)) u_bf (
      .clk, .rst_n,
      .wr_en(in_valid[b]), .wr_data(in_frame[b]),
      .rd_en(bf_pop[b]), .rd_data(bf_data[b]),
      .empty(bf_empty[b]), .full(), .almost_full(in_afull[b]),
      .overflow(drop[b]), .count());
    assign bf_pop[b] = (token == TW'(b)) && !bf_empty[b] && !mf_full;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  token <= '0;
    else if (token == TW'(N-1))  token <= '0;
    else                         token <= token + 1'b1;
  end

  assign mf_push = |bf_pop;

  sync_fifo #(.WIDTH($bits(frame_t)), .DEPTH(MF_DEPTH)) u_mf (
    .clk, .rst_n,
    .wr_en(mf_push), .wr_data(bf_data[token]),
    .rd_en(out_ready && !mf_empty), .rd_data(out_frame),
    .empty(mf_empty), .full(mf_full), .almost_full(),
    .overflow(), .count());
  assign out_valid = !mf_empty;
endmodule
