// sync_fifo: single-clock first-in first-out buffer.
//
// A write with the FIFO full is dropped and reported on `overflow` for one
// cycle.  Read data is shown combinationally from the head entry (first-word
// fall-through): `rd_data` is valid whenever `empty` is low, and `rd_en`
// pops it.  `almost_full` is high when AF_LEFT or fewer entries are free, so a
// producer with a few cycles of latency can stop in time.  Depth and width are
// this design's choices; the paper names block and module FIFOs but not their
// sizes.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AF_LEFT = 2    // almost_full when this few entries are free
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic             almost_full,
  output logic             overflow,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  assign empty       = (count == 0);
  assign full        = (32'(count) == DEPTH);
  assign almost_full = (32'(count) + AF_LEFT >= DEPTH);
  assign do_rd       = rd_en && !empty;
  assign do_wr       = wr_en && (!full || do_rd);
  assign rd_data     = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0; overflow <= 1'b0;
    end else begin
      overflow <= wr_en && !do_wr;
      if (do_wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("sync_fifo: read while empty");
`endif
endmodule
