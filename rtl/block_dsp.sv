// block_dsp: signal processing of one detector block in all four modes.
//
// Regular data processing (the imaging mode) is a single pipeline with no
// dead time, timed as in the paper:
//   raw (X, Y) and DOI, K cycles      -> raw_pos_calc   (K = K_RAWPOS = 12)
//   crystal locating, 2 + 1 cycles    -> boundary_clt
//   energy and time correction, 2 + 1 -> energy_corr and time_corr in parallel
// so a regular frame leaves K+3+3 = 18 cycles after the event's energies
// and TDC result arrive (plus one register for the frame).  The eight
// energies are summed as they arrive (the Sigma of the paper's figure) and
// the sum and the TDC result are delayed to meet the crystal address.
// Events outside the energy window are dropped.  The 16-byte regular frame
// carries crystal address, DOI, energy in keV, raw X and Y and the corrected
// time.
//
// Flood map mode: raw (X, Y) addresses the histogram (online) or is sent out
// as an 8-byte frame with the DOI (offline).  Energy spectrum mode: the
// crystal address and an energy bin, the uncorrected sum shifted right by
// `eshift` and clamped to 255, address the histogram (online) or the crystal
// address and uncorrected sum are sent out (offline).  Raw data mode sends
// the eight energies and the TDC result as a 24-byte frame.
//
// Each mode has its own frame output, to its own token ring.  Configuration
// writes on the shared bus are taken when `cfg.blk` matches BLK.  The mode is
// expected to change only while no events are in the pipeline.  Frame
// layouts, the bin shift and the offline frame contents are this design's
// choices.  Reserved fields and the bits beyond each frame's byte count are
// constant zero.
module block_dsp
  import spu_pkg::*;
#(
  parameter logic [1:0] BLK  = 2'd0,
  parameter int unsigned H_AW = HADDR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  mode_e             mode,
  input  logic              offline,
  input  logic [EKEV_W-1:0] win_lo,
  input  logic [EKEV_W-1:0] win_hi,
  input  logic [4:0]        eshift,
  input  logic              hist_rd_start,
  input  logic              hist_clr_start,
  input  cfg_wr_t           cfg,
  // event from area calculation and TDC
  input  logic              ev_valid,
  input  energies_t         e,
  input  logic [TIME_W-1:0] tdc,
  // frame outputs, one per mode
  output logic              reg_valid,
  output frame_t            reg_frame,
  output logic              fld_valid,
  output frame_t            fld_frame,
  output logic              spc_valid,
  output frame_t            spc_frame,
  output logic              raw_valid,
  output frame_t            raw_frame,
  input  logic              hist_ready,
  output logic              hist_busy,
  output logic              hist_full
);
  localparam int unsigned D_CLT = K_RAWPOS + CLT_LAT;   // crystal address ready

  logic cfg_me;
  assign cfg_me = cfg.valid && (cfg.blk == BLK);

  // ---------------- Sigma: energy sum ----------------
  logic [ESUM_W-1:0] esum_in;
  always_comb begin
    esum_in = '0;
    for (int i = 0; i < N_CH; i++) esum_in = esum_in + ESUM_W'(e[i]);
  end

  // ---------------- raw (X, Y) and DOI ----------------
  logic             rp_valid;
  logic [POS_W-1:0] rx, ry;
  logic [DOI_W-1:0] rdoi;
  raw_pos_calc u_rawpos (
    .clk, .rst_n, .in_valid(ev_valid && mode != MODE_RAW), .e,
    .out_valid(rp_valid), .x(rx), .y(ry), .doi(rdoi));

  // ---------------- crystal locating ----------------
  logic             cl_valid;
  logic [XID_W-1:0] xid;
  boundary_clt u_clt (
    .clk, .rst_n,
    .wr_en(cfg_me && (cfg.tgt == CFG_CLT_X || cfg.tgt == CFG_CLT_Y)),
    .wr_tbl(cfg.tgt == CFG_CLT_Y), .wr_addr(cfg.addr), .wr_data(cfg.data),
    .in_valid(rp_valid), .x(rx), .y(ry),
    .out_valid(cl_valid), .col(), .row(), .xid);

  // values carried along to meet the crystal address
  logic [ESUM_W-1:0] esum_c;
  logic [TIME_W-1:0] tdc_c;
  logic [POS_W-1:0]  x_c, y_c;
  logic [DOI_W-1:0]  doi_c;
  delay_line #(.WIDTH(ESUM_W), .LAT(D_CLT)) u_d_esum (.clk, .d(esum_in), .q(esum_c));
  delay_line #(.WIDTH(TIME_W), .LAT(D_CLT)) u_d_tdc  (.clk, .d(tdc),     .q(tdc_c));
  delay_line #(.WIDTH(2*POS_W+DOI_W), .LAT(CLT_LAT)) u_d_pos
    (.clk, .d({rx, ry, rdoi}), .q({x_c, y_c, doi_c}));

  // ---------------- energy and time correction ----------------
  logic              ec_valid, ec_pass, tc_valid;
  logic [EKEV_W-1:0] ekev;
  logic [TIME_W-1:0] tcorr;
  energy_corr u_ecorr (
    .clk, .rst_n,
    .wr_en(cfg_me && cfg.tgt == CFG_PEAK), .wr_addr({cfg.addr_hi, cfg.addr}),
    .wr_data(cfg.data[COEF_W-1:0]),
    .win_lo, .win_hi,
    .in_valid(cl_valid), .xid, .esum(esum_c),
    .out_valid(ec_valid), .pass(ec_pass), .ekev);
  time_corr u_tcorr (
    .clk, .rst_n,
    .wr_en(cfg_me && cfg.tgt == CFG_TOFF), .wr_addr({cfg.addr_hi, cfg.addr}),
    .wr_data(cfg.data[TOFF_W-1:0]),
    .in_valid(cl_valid), .xid, .t_in(tdc_c),
    .out_valid(tc_valid), .t_out(tcorr));

  logic [XID_W-1:0]  xid_r;
  logic [POS_W-1:0]  x_r, y_r;
  logic [DOI_W-1:0]  doi_r;
  delay_line #(.WIDTH(XID_W+2*POS_W+DOI_W), .LAT(CORR_LAT)) u_d_res
    (.clk, .d({xid, x_c, y_c, doi_c}), .q({xid_r, x_r, y_r, doi_r}));

  // ---------------- regular data packaging ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) reg_valid <= 1'b0;
    else        reg_valid <= ec_valid && tc_valid && ec_pass && mode == MODE_REGULAR;
  end
  always_ff @(posedge clk) begin
    reg_frame.nbytes <= NBYTES_W'(16);
    reg_frame.data   <= {FT_REGULAR, BLK, 2'b00, xid_r, doi_r, 2'b00, ekev,
                         x_r, y_r, 26'h0, tcorr, (FRAME_W-128)'(0)};
  end

  // ---------------- flood map and energy spectrum ----------------
  logic [EBIN_W-1:0] ebin;
  logic [ESUM_W-1:0] esh;
  assign esh  = esum_c >> eshift;
  assign ebin = (esh > ESUM_W'(2**EBIN_W - 1)) ? '1 : esh[EBIN_W-1:0];

  logic   h_in, h_valid;
  frame_t h_frame;
  assign h_in = !offline && ((mode == MODE_FLOOD && rp_valid) ||
                             (mode == MODE_SPECTRUM && cl_valid));
  histogram #(.AW(H_AW)) u_hist (
    .clk, .rst_n, .blk_id(BLK), .spec_mode(mode == MODE_SPECTRUM),
    .in_valid(h_in), .x(rx), .y(ry), .xid, .ebin,
    .rd_start(hist_rd_start), .clr_start(hist_clr_start), .out_ready(hist_ready),
    .out_valid(h_valid), .out_frame(h_frame),
    .busy(hist_busy), .full_flag(hist_full));

  // offline frames, or histogram read-out frames
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fld_valid <= 1'b0; spc_valid <= 1'b0;
    end else begin
      fld_valid <= (offline && mode == MODE_FLOOD && rp_valid) ||
                   (h_valid && mode == MODE_FLOOD);
      spc_valid <= (offline && mode == MODE_SPECTRUM && cl_valid) ||
                   (h_valid && mode == MODE_SPECTRUM);
    end
  end
  always_ff @(posedge clk) begin
    if (h_valid) fld_frame <= h_frame;
    else begin
      fld_frame.nbytes <= NBYTES_W'(8);
      fld_frame.data   <= {FT_FLOOD_RAW, BLK, 2'b00, rx, ry, rdoi, 34'h0, (FRAME_W-64)'(0)};
    end
    if (h_valid) spc_frame <= h_frame;
    else begin
      spc_frame.nbytes <= NBYTES_W'(8);
      spc_frame.data   <= {FT_SPEC_RAW, BLK, 2'b00, xid, 2'b00, esum_c, 25'h0, (FRAME_W-64)'(0)};
    end
  end

  // ---------------- raw data mode ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) raw_valid <= 1'b0;
    else        raw_valid <= ev_valid && mode == MODE_RAW;
  end
  always_ff @(posedge clk) begin
    raw_frame.nbytes <= NBYTES_W'(24);
    raw_frame.data   <= {FT_RAW, BLK, 2'b00, e, tdc, 8'h00};
  end
endmodule
