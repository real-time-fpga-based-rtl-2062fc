// boundary_clt: crystal locating with boundary crystal look-up tables.
//
// Instead of a 512x512 table of crystal numbers, each of the two directions
// keeps a 512-deep RAM whose 198-bit row holds the 22 nine-bit boundaries
// between the 23 crystal columns (or rows) at that raw coordinate.  The
// X-boundary table (Fig. 8(c) of the paper) is addressed by raw Y; the X
// coordinate is compared with its 22 boundaries, and the column is one plus
// the number of boundaries not above X (so b[i-1] <= X < b[i] gives column
// i+1).  The Y-boundary table (Fig. 8(d)) is addressed by raw X and gives the
// row the same way.  The crystal address is (row-1)*23 + col, 1..529.  The
// first boundary sits in the most significant nine bits of a row, as the
// rows are printed in the paper ({9'd6, 9'd13, 9'd21, ...}).
//
// Timing, as in the paper: two cycles to read the RAMs (registered address,
// registered data) and one cycle to compare, so a result appears CLT_LAT = 3
// cycles after the input; one lookup per cycle.  Rows are written through a
// simple write port (table select, row, 198-bit data), from the command path.
module boundary_clt
  import spu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              wr_en,
  input  logic              wr_tbl,    // 0: X-boundary table, 1: Y-boundary table
  input  logic [POS_W-1:0]  wr_addr,
  input  logic [CLT_W-1:0]  wr_data,
  // lookup
  input  logic              in_valid,
  input  logic [POS_W-1:0]  x,
  input  logic [POS_W-1:0]  y,
  output logic              out_valid,
  output logic [4:0]        col,       // 1..23
  output logic [4:0]        row,       // 1..23
  output logic [XID_W-1:0]  xid        // 1..529
);
  logic [CLT_W-1:0] clt_x [2**POS_W];   // addressed by raw Y
  logic [CLT_W-1:0] clt_y [2**POS_W];   // addressed by raw X

  always_ff @(posedge clk) begin
    if (wr_en && !wr_tbl) clt_x[wr_addr] <= wr_data;
    if (wr_en &&  wr_tbl) clt_y[wr_addr] <= wr_data;
  end

  // cycle 1: address register
  logic [POS_W-1:0] ax, ay, x1, y1;
  // cycle 2: RAM output register
  logic [CLT_W-1:0] bx, by;
  logic [POS_W-1:0] x2, y2;
  logic [2:0]       vld;
  always_ff @(posedge clk) begin
    ay <= y;  ax <= x;  x1 <= x;  y1 <= y;
    bx <= clt_x[ay];
    by <= clt_y[ax];
    x2 <= x1; y2 <= y1;
  end

  // cycle 3: compare
  function automatic logic [4:0] region(input logic [CLT_W-1:0] b, input logic [POS_W-1:0] v);
    logic [4:0] n;
    n = 5'd1;
    for (int i = 0; i < NBND; i++)
      if (b[CLT_W-1-i*BND_W -: BND_W] <= v) n = n + 5'd1;
    return n;
  endfunction

  logic [4:0] c_n, r_n;
  assign c_n = region(bx, x2);
  assign r_n = region(by, y2);

  always_ff @(posedge clk) begin
    col <= c_n;
    row <= r_n;
    xid <= XID_W'(XID_W'(r_n - 5'd1) * XID_W'(NXTAL)) + XID_W'(c_n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[1:0], in_valid};
  end
  assign out_valid = vld[2];
endmodule
