// spu_pkg: types and constants shared by the SPU signal processing logic.
//
// Widths that follow the paper: raw X and Y are 9 bits each (an 18-bit
// flood-map address), DOI is 4 bits, a detector block has 23x23 = 529 crystals
// whose boundary look-up tables hold 22 nine-bit boundaries per row, the
// histogram memory is 512x512 cells of 10 bits, an energy spectrum has 256
// bins, and a regular data frame is 16 bytes.  The per-channel energy width
// (16 bits), the TDC result width (48 bits), the LUT word widths (16-bit peak
// coefficient, 18-bit signed time offset, chosen so that 4 blocks x 1024
// words match the 0.06 Mb and 0.07 Mb of the memory table) and every frame
// layout are this design's own choices.
package spu_pkg;

  localparam int unsigned N_BLOCKS  = 4;     // detector blocks per SPU
  localparam int unsigned N_CH      = 8;     // A1..D1, A2..D2
  localparam int unsigned E_W       = 16;    // energy integral per channel
  localparam int unsigned ESUM_W    = E_W + 3;
  localparam int unsigned POS_W     = 9;     // raw X / raw Y
  localparam int unsigned DOI_W     = 4;
  localparam int unsigned NXTAL     = 23;    // crystals per side
  localparam int unsigned NBND      = NXTAL - 1;      // 22 boundaries
  localparam int unsigned BND_W     = 9;
  localparam int unsigned CLT_W     = NBND * BND_W;   // 198-bit CLT row
  localparam int unsigned XID_W     = 10;    // crystal address 1..529
  localparam int unsigned LUT_AW    = 10;    // depth of peak / time LUTs
  localparam int unsigned COEF_W    = 16;
  localparam int unsigned TOFF_W    = 18;
  localparam int unsigned EKEV_W    = 12;    // corrected energy in keV
  localparam int unsigned TIME_W    = 48;    // TDC result, in TDC bins
  localparam int unsigned HADDR_W   = 18;    // histogram address
  localparam int unsigned HCNT_W    = 10;    // histogram count
  localparam int unsigned EBIN_W    = 8;     // 256 spectrum bins
  localparam int unsigned TS_W      = 40;    // time stamp counter
  localparam int unsigned FRAME_W   = 192;   // largest frame: 24 bytes
  localparam int unsigned NBYTES_W  = 5;

  // Latency of the raw position / DOI calculation: one cycle of sums, ten
  // divider stages, one cycle of averaging (the paper's K).
  localparam int unsigned K_RAWPOS  = 12;
  localparam int unsigned CLT_LAT   = 3;     // 2 cycles read + 1 compare
  localparam int unsigned CORR_LAT  = 3;     // 2 cycles read + 1 calculate

  typedef enum logic [1:0] {
    MODE_REGULAR  = 2'd0,
    MODE_FLOOD    = 2'd1,
    MODE_SPECTRUM = 2'd2,
    MODE_RAW      = 2'd3
  } mode_e;

  // Frame type codes, first nibble of every frame.
  typedef enum logic [3:0] {
    FT_REGULAR   = 4'h1,
    FT_FLOOD_HIST= 4'h2,
    FT_SPEC_HIST = 4'h3,
    FT_FLOOD_RAW = 4'h4,
    FT_SPEC_RAW  = 4'h5,
    FT_RAW       = 4'h6,
    FT_SYNC      = 4'hF
  } ftype_e;

  // A frame: up to 24 bytes, most significant byte first, left aligned.
  typedef struct packed {
    logic [NBYTES_W-1:0] nbytes;
    logic [FRAME_W-1:0]  data;
  } frame_t;

  // Configuration targets written by the command decoder.
  typedef enum logic [2:0] {
    CFG_NONE   = 3'd0,
    CFG_CLT_X  = 3'd1,   // CLT of Fig. 8(c): addressed by raw Y, X boundaries
    CFG_CLT_Y  = 3'd2,   // CLT of Fig. 8(d): addressed by raw X, Y boundaries
    CFG_PEAK   = 3'd3,
    CFG_TOFF   = 3'd4
  } cfg_tgt_e;

  typedef struct packed {
    logic              valid;
    cfg_tgt_e          tgt;
    logic [1:0]        blk;
    logic [8:0]        addr;    // CLT row, or LUT address (with addr_hi)
    logic              addr_hi; // bit 9 of a 10-bit LUT address
    logic [CLT_W-1:0]  data;
  } cfg_wr_t;

  // Eight channel energies, index 0..7 = A1, B1, C1, D1, A2, B2, C2, D2.
  typedef logic [N_CH-1:0][E_W-1:0] energies_t;

endpackage
