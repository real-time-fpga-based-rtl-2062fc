// energy_corr: photon peak correction and energy window filtering.
//
// The summed energy of an event (sum of the eight channel integrals) is
// converted to keV with a coefficient chosen per crystal, read from the
// photon peak LUT addressed by the crystal address, so that every crystal's
// 511 keV peak lands on 511:
//   E_keV = (E_sum * coef) >> COEF_FRAC, saturated to 12 bits.
// The event then passes the energy window if lo <= E_keV <= hi, which
// rejects Compton-scattered events.  The paper gives this function and its
// timing: two cycles to read the LUT and one to calculate, CORR_LAT = 3
// cycles from input to output, one event per cycle.  The coefficient width
// and fixed-point format, the 1024-word LUT depth and the inclusive window
// are this design's choices.  `pass` is only meaningful with `out_valid`.
module energy_corr
  import spu_pkg::*;
#(
  parameter int unsigned COEF_FRAC = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  // LUT write port
  input  logic              wr_en,
  input  logic [LUT_AW-1:0] wr_addr,
  input  logic [COEF_W-1:0] wr_data,
  // energy window (keV)
  input  logic [EKEV_W-1:0] win_lo,
  input  logic [EKEV_W-1:0] win_hi,
  // event
  input  logic              in_valid,
  input  logic [XID_W-1:0]  xid,
  input  logic [ESUM_W-1:0] esum,
  output logic              out_valid,
  output logic              pass,
  output logic [EKEV_W-1:0] ekev
);
  logic [COEF_W-1:0] lut [2**LUT_AW];
  always_ff @(posedge clk) if (wr_en) lut[wr_addr] <= wr_data;

  logic [LUT_AW-1:0] a1;
  logic [ESUM_W-1:0] e1, e2;
  logic [COEF_W-1:0] c2;
  logic [2:0]        vld;
  always_ff @(posedge clk) begin
    a1 <= LUT_AW'(xid);  e1 <= esum;   // cycle 1: address register
    c2 <= lut[a1];       e2 <= e1;     // cycle 2: LUT data register
  end

  // cycle 3: multiply, scale, saturate, window
  logic [ESUM_W+COEF_W-1:0] prod;
  logic [ESUM_W+COEF_W-1:0] scaled;
  logic [EKEV_W-1:0]        e_sat;
  assign prod   = (ESUM_W+COEF_W)'(e2) * (ESUM_W+COEF_W)'(c2);
  assign scaled = prod >> COEF_FRAC;
  assign e_sat  = (scaled > (ESUM_W+COEF_W)'(2**EKEV_W - 1)) ? '1 : scaled[EKEV_W-1:0];
  always_ff @(posedge clk) begin
    ekev <= e_sat;
    pass <= (e_sat >= win_lo) && (e_sat <= win_hi);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[1:0], in_valid};
  end
  assign out_valid = vld[2];
endmodule
