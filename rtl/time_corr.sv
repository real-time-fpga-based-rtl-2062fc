// time_corr: per-crystal time offset correction.
//
// The delay from interaction to TDC differs from crystal to crystal.  A
// 1024-word LUT, addressed by the crystal address, holds a signed 18-bit
// offset in TDC bins; the corrected time is the TDC result minus that
// offset.  Timing follows the paper: two cycles to read the LUT, one to
// subtract, CORR_LAT = 3 cycles, one event per cycle.  The offset format is
// this design's choice.
module time_corr
  import spu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [LUT_AW-1:0] wr_addr,
  input  logic [TOFF_W-1:0] wr_data,
  input  logic              in_valid,
  input  logic [XID_W-1:0]  xid,
  input  logic [TIME_W-1:0] t_in,
  output logic              out_valid,
  output logic [TIME_W-1:0] t_out
);
  logic [TOFF_W-1:0] lut [2**LUT_AW];
  always_ff @(posedge clk) if (wr_en) lut[wr_addr] <= wr_data;

  logic [LUT_AW-1:0] a1;
  logic [TIME_W-1:0] t1, t2;
  logic [TOFF_W-1:0] o2;
  logic [2:0]        vld;
  always_ff @(posedge clk) begin
    a1 <= LUT_AW'(xid); t1 <= t_in;
    o2 <= lut[a1];      t2 <= t1;
    t_out <= t2 - TIME_W'(signed'(o2));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[1:0], in_valid};
  end
  assign out_valid = vld[2];
endmodule
