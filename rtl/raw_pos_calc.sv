// raw_pos_calc: centre-of-gravity raw position and depth of interaction.
//
// From the eight channel energies of one event (A1..D1 on one end of the
// crystal array, A2..D2 on the other) it computes, as in the paper,
//   X   = 0.5 * ( (A1+D1)/S1 + (A2+D2)/S2 )
//   Y   = 0.5 * ( (A1+B1)/S1 + (C2+D2)/S2 )
//   DOI = S1 / (S1 + S2)
// with S1 = A1+B1+C1+D1 and S2 = A2+B2+C2+D2.  X and Y are scaled to 9 bits
// (0..511) and DOI to 4 bits (0..15); each ratio is floor(n * 2**F / d) and
// results are clamped to the top code.  The paper gives the formulas, the
// 9+9 bit raw position, the 4-bit DOI and a fully pipelined latency of K
// cycles from a divider core; here K = 12 (one cycle of sums, ten cycles of
// a restoring divider, one cycle to average and clamp), K_RAWPOS in spu_pkg.
// A new event may enter every cycle.  The scaling and the rounding are this
// design's choice.
module raw_pos_calc
  import spu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  energies_t         e,
  output logic              out_valid,
  output logic [POS_W-1:0]  x,
  output logic [POS_W-1:0]  y,
  output logic [DOI_W-1:0]  doi
);
  localparam int unsigned SW = E_W + 3;   // width of the sums

  // stage 1: sums
  logic [SW-1:0] s1, s2, st, nx1, nx2, ny1, ny2;
  always_ff @(posedge clk) begin
    s1  <= SW'(e[0]) + SW'(e[1]) + SW'(e[2]) + SW'(e[3]);
    s2  <= SW'(e[4]) + SW'(e[5]) + SW'(e[6]) + SW'(e[7]);
    st  <= SW'(e[0]) + SW'(e[1]) + SW'(e[2]) + SW'(e[3])
         + SW'(e[4]) + SW'(e[5]) + SW'(e[6]) + SW'(e[7]);
    nx1 <= SW'(e[0]) + SW'(e[3]);   // A1 + D1
    nx2 <= SW'(e[4]) + SW'(e[7]);   // A2 + D2
    ny1 <= SW'(e[0]) + SW'(e[1]);   // A1 + B1
    ny2 <= SW'(e[6]) + SW'(e[7]);   // C2 + D2
  end

  // stages 2..11: five parallel dividers (latency POS_W+1 = 10)
  logic [POS_W:0] qx1, qx2, qy1, qy2;
  logic [POS_W:0] qd_dly;
  logic [DOI_W:0] qd;
  pipe_divider #(.NW(SW), .F(POS_W)) u_dx1 (.clk, .num(nx1), .den(s1), .quo(qx1));
  pipe_divider #(.NW(SW), .F(POS_W)) u_dx2 (.clk, .num(nx2), .den(s2), .quo(qx2));
  pipe_divider #(.NW(SW), .F(POS_W)) u_dy1 (.clk, .num(ny1), .den(s1), .quo(qy1));
  pipe_divider #(.NW(SW), .F(POS_W)) u_dy2 (.clk, .num(ny2), .den(s2), .quo(qy2));
  pipe_divider #(.NW(SW), .F(DOI_W)) u_dd  (.clk, .num(s1),  .den(st), .quo(qd));
  // the DOI divider is shorter; align it with the position dividers
  delay_line #(.WIDTH(POS_W+1), .LAT(POS_W - DOI_W)) u_dd_align
    (.clk, .d({{(POS_W-DOI_W){1'b0}}, qd}), .q(qd_dly));

  // stage 12: average the two ends and clamp
  logic [POS_W+1:0] sx, sy;
  assign sx = {1'b0, qx1} + {1'b0, qx2};
  assign sy = {1'b0, qy1} + {1'b0, qy2};
  always_ff @(posedge clk) begin
    x   <= (sx[POS_W+1:1] > (POS_W+1)'(2**POS_W - 1)) ? '1 : sx[POS_W:1];
    y   <= (sy[POS_W+1:1] > (POS_W+1)'(2**POS_W - 1)) ? '1 : sy[POS_W:1];
    doi <= (qd_dly[DOI_W:0] > (DOI_W+1)'(2**DOI_W - 1)) ? '1 : qd_dly[DOI_W-1:0];
  end

  // valid pipeline
  logic [K_RAWPOS-1:0] vld;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[K_RAWPOS-2:0], in_valid};
  end
  assign out_valid = vld[K_RAWPOS-1];
endmodule
