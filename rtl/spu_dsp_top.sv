// spu_dsp_top: digital signal processing logic of one Singles Processing Unit.
//
// For each of the four detector blocks, area_calc integrates the eight
// ADC waveforms when the block's time channel fires, and block_dsp then
// processes their events in parallel in the
// mode chosen by the PC: regular data processing, flood map construction,
// energy spectrum construction or raw data.  Each mode has its own token
// ring that gathers the frames of the four block FIFOs into a module FIFO;
// a multiplexer driven by the mode select passes the active ring's frames
// to the packet builder (udp_tx), which also inserts the synchronization
// frames of sync_detect and sends UDP/IPv4 packets to the Ethernet link
// layer.  Commands from the PC arrive as UDP/IPv4 packets (udp_rx), are
// resolved by cmd_decoder into mode, registers and LUT writes.
//
// External interfaces (all on the 125 MHz clock):
//   per block: eight 12-bit ADC samples (new sample when smp_en, 62.5 MHz),
//     and the TDC result of the block's time channel with its hit strobe;
//   sync_in: synchronizing sequence from the clock and synchronization module;
//   ts: local time stamp, for the TDC's coarse count;
//   rx_*: command packets from the Ethernet link layer;
//   tx_*: data packets to the Ethernet link layer (valid/ready, last);
//   status: histogram busy and full flags, frame drops, pile-up counts.
// Blocks, rings and the multiplexer follow the paper's block diagrams; the
// signal-level interfaces are this design's choices.
module spu_dsp_top
  import spu_pkg::*;
#(
  parameter int unsigned H_AW = HADDR_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 smp_en,
  input  logic [N_CH-1:0][11:0] adc [N_BLOCKS],
  input  logic [N_BLOCKS-1:0]  hit,
  input  logic [TIME_W-1:0]    hit_time [N_BLOCKS],
  input  logic                 sync_in,
  output logic [TS_W-1:0]      ts,
  input  logic [7:0]           rx_data,
  input  logic                 rx_valid,
  input  logic                 rx_last,
  output logic [7:0]           tx_data,
  output logic                 tx_valid,
  output logic                 tx_last,
  input  logic                 tx_ready,
  output mode_e                mode,
  output logic [N_BLOCKS-1:0]  hist_busy,
  output logic [N_BLOCKS-1:0]  hist_full,
  output logic [N_BLOCKS-1:0]  frame_drop,
  output logic [15:0]          sync_mismatches,
  output logic [15:0]          pileup [N_BLOCKS]
);
  // ---------------- command path ----------------
  logic        cmd_valid;
  logic [63:0] cmd;
  logic        offline;
  logic [EKEV_W-1:0] win_lo, win_hi;
  logic [4:0]  eshift;
  logic [31:0] period;
  logic [N_BLOCKS-1:0] rd_start, clr_start;
  cfg_wr_t     cfg;

  udp_rx u_rx (.clk, .rst_n, .rx_data, .rx_valid, .rx_last, .cmd_valid, .cmd);
  cmd_decoder u_cmd (.clk, .rst_n, .cmd_valid, .cmd, .mode, .offline, .win_lo, .win_hi,
                     .eshift, .period, .hist_rd_start(rd_start),
                     .hist_clr_start(clr_start), .cfg);

  // ---------------- detector blocks ----------------
  logic   [N_BLOCKS-1:0] rv, fv, sv, wv;
  frame_t rf [N_BLOCKS], ff [N_BLOCKS], sf [N_BLOCKS], wf [N_BLOCKS];
  logic   [N_BLOCKS-1:0] f_afull, s_afull;
  logic   [N_BLOCKS-1:0] d_reg, d_fld, d_spc, d_raw;

  for (genvar b = 0; b < N_BLOCKS; b++) begin : g_blk
    logic              ev_valid;
    energies_t         e;
    logic [TIME_W-1:0] tdc;
    area_calc u_area (.clk, .rst_n, .smp_en, .adc(adc[b]), .hit(hit[b]), .hit_time(hit_time[b]),
                      .ev_valid, .e, .tdc, .pileup(pileup[b]));
    block_dsp #(.BLK(2'(b)), .H_AW(H_AW)) u_blk (
      .clk, .rst_n, .mode, .offline, .win_lo, .win_hi, .eshift,
      .hist_rd_start(rd_start[b]), .hist_clr_start(clr_start[b]), .cfg,
      .ev_valid, .e, .tdc,
      .reg_valid(rv[b]), .reg_frame(rf[b]), .fld_valid(fv[b]), .fld_frame(ff[b]),
      .spc_valid(sv[b]), .spc_frame(sf[b]), .raw_valid(wv[b]), .raw_frame(wf[b]),
      .hist_ready(mode == MODE_SPECTRUM ? !s_afull[b] : !f_afull[b]),
      .hist_busy(hist_busy[b]), .hist_full(hist_full[b]));
  end

  // ---------------- token rings, one per mode ----------------
  logic   [3:0] ring_valid, ring_ready;
  frame_t ring_frame [4];
  token_ring u_ring_reg (.clk, .rst_n, .in_valid(rv), .in_frame(rf), .in_afull(),
                         .drop(d_reg), .out_valid(ring_valid[0]), .out_frame(ring_frame[0]),
                         .out_ready(ring_ready[0]));
  token_ring u_ring_fld (.clk, .rst_n, .in_valid(fv), .in_frame(ff), .in_afull(f_afull),
                         .drop(d_fld), .out_valid(ring_valid[1]), .out_frame(ring_frame[1]),
                         .out_ready(ring_ready[1]));
  token_ring u_ring_spc (.clk, .rst_n, .in_valid(sv), .in_frame(sf), .in_afull(s_afull),
                         .drop(d_spc), .out_valid(ring_valid[2]), .out_frame(ring_frame[2]),
                         .out_ready(ring_ready[2]));
  token_ring u_ring_raw (.clk, .rst_n, .in_valid(wv), .in_frame(wf), .in_afull(),
                         .drop(d_raw), .out_valid(ring_valid[3]), .out_frame(ring_frame[3]),
                         .out_ready(ring_ready[3]));
  assign frame_drop = d_reg | d_fld | d_spc | d_raw;

  // ---------------- mode multiplexer ----------------
  logic   mux_valid, mux_ready;
  frame_t mux_frame;
  always_comb begin
    mux_valid  = ring_valid[mode];
    mux_frame  = ring_frame[mode];
    ring_ready = '0;
    ring_ready[mode] = mux_ready;
  end

  // ---------------- synchronization detection ----------------
  logic   sync_valid, sync_ready;
  frame_t sync_frame;
  sync_detect u_sync (.clk, .rst_n, .sync_in, .ts, .sync_valid, .sync_frame, .sync_ready,
                      .n_checked(), .n_mismatch(sync_mismatches));

  // ---------------- UDP interface ----------------
  udp_tx u_tx (.clk, .rst_n, .period, .mode,
               .in_valid(mux_valid), .in_frame(mux_frame), .in_ready(mux_ready),
               .sync_valid, .sync_frame, .sync_ready,
               .tx_data, .tx_valid, .tx_last, .tx_ready);
endmodule
