// histogram: online flood map and energy spectrum construction.
//
// One RAM of 2**AW cells of 10 bits (512x512 in the paper) per detector
// block is shared by the two statistic modes through an address multiplexer:
//   flood map  : address = {raw Y, raw X}                   (18 bits)
//   spectrum   : address = {crystal address - 1, energy bin} (529 x 256)
// For every event the cell is read, incremented by one unless it already
// holds 1023, and written back; an event that finds a cell at 1023 sets the
// sticky full flag instead (the "<1023 ?" test of the paper's figure).  A
// new event is accepted every cycle: the RAM is read in the cycle after the
// event arrives and written one cycle later, and a read that would see a
// cell still being written takes the value from the write register instead.
//
// Read-out, started by `rd_start`, sweeps a pointer over every cell; each
// cell's count is sent out as an 8-byte frame {type, block, address, count}
// and the cell is cleared, so the next acquisition starts from zero.  The
// sweep advances only while `out_ready` is high; the frame follows the read
// by one cycle, so the consumer must accept one more frame after lowering
// `out_ready`.  `clr_start` sweeps the same way, clearing without output.
// Events are ignored during a sweep.  Clearing on read-out, the clear
// sweep and the frame layout are this design's choices; the shared RAM,
// saturation at 1023 and pointer-driven read-out follow the paper.
// The frame bits below its 8 bytes, and its reserved fields, are constant
// zero by design.
module histogram
  import spu_pkg::*;
#(
  parameter int unsigned AW = HADDR_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [1:0]         blk_id,
  input  logic               spec_mode,   // 0: flood map, 1: energy spectrum
  input  logic               in_valid,
  input  logic [POS_W-1:0]   x,
  input  logic [POS_W-1:0]   y,
  input  logic [XID_W-1:0]   xid,
  input  logic [EBIN_W-1:0]  ebin,
  input  logic               rd_start,
  input  logic               clr_start,
  input  logic               out_ready,
  output logic               out_valid,
  output frame_t             out_frame,
  output logic               busy,
  output logic               full_flag
);
  logic [HCNT_W-1:0] ram [2**AW];

  // address multiplexer shared by the two modes
  logic [HADDR_W-1:0] ev_addr_full;
  logic [AW-1:0]      ev_addr;
  always_comb begin
    if (spec_mode) ev_addr_full = {XID_W'(xid - 1'b1), ebin};
    else           ev_addr_full = {y, x};
  end
  assign ev_addr = AW'(ev_addr_full);

  // sweep control
  logic          sweeping, sweep_out;
  logic [AW-1:0] ptr;
  logic          sw_issue;
  assign busy     = sweeping;
  assign sw_issue = sweeping && (out_ready || !sweep_out);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sweeping <= 1'b0; sweep_out <= 1'b0; ptr <= '0;
    end else if (!sweeping) begin
      if (rd_start || clr_start) begin
        sweeping <= 1'b1; sweep_out <= rd_start; ptr <= '0;
      end
    end else if (sw_issue) begin
      ptr <= ptr + 1'b1;
      if (ptr == '1) sweeping <= 1'b0;
    end
  end

  // stage 1: read
  logic          s1_ev, s1_sw, s1_out;
  logic [AW-1:0] s1_addr;
  logic [HCNT_W-1:0] dout;
  logic [AW-1:0] rd_addr;
  assign rd_addr = sweeping ? ptr : ev_addr;
  always_ff @(posedge clk) begin
    dout    <= ram[rd_addr];
    s1_addr <= rd_addr;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_ev <= 1'b0; s1_sw <= 1'b0; s1_out <= 1'b0;
    end else begin
      s1_ev  <= in_valid && !sweeping;
      s1_sw  <= sw_issue;
      s1_out <= sw_issue && sweep_out;
    end
  end

  // stage 2: count register, +1, write back.  The write register keeps the
  // last value written, which a read of the same cell in the same cycle
  // could not yet see.
  logic              w_en;
  logic [AW-1:0]     w_addr;
  logic [HCNT_W-1:0] w_data;
  logic [HCNT_W-1:0] cnt, nxt;
  logic              at_max;
  assign cnt    = (w_en && w_addr == s1_addr) ? w_data : dout;
  assign at_max = (cnt == '1);
  assign nxt    = s1_sw ? '0 : (at_max ? cnt : cnt + 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_en <= 1'b0; full_flag <= 1'b0;
    end else begin
      w_en <= s1_ev || s1_sw;
      if (rd_start || clr_start) full_flag <= 1'b0;
      else if (s1_ev && at_max)  full_flag <= 1'b1;
    end
  end
  always_ff @(posedge clk) begin
    w_addr <= s1_addr;
    w_data <= nxt;
    if (s1_ev || s1_sw) ram[s1_addr] <= nxt;
  end

  // histogram dout package
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s1_out;
  end
  always_ff @(posedge clk) begin
    out_frame.nbytes <= NBYTES_W'(8);
    out_frame.data   <= {spec_mode ? FT_SPEC_HIST : FT_FLOOD_HIST, blk_id, 2'b00,
                         6'b0, HADDR_W'(s1_addr), 6'b0, cnt, 16'h0000, (FRAME_W-64)'(0)};
  end
endmodule
