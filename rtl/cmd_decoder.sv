// cmd_decoder: command resolution, register and LUT configuration, mode
// select.
//
// Each 64-bit command word from the PC carries an opcode in bits 63:56:
//   01 SET_MODE    [1:0] mode (0 regular, 1 flood map, 2 spectrum, 3 raw),
//                  [4] offline construction
//   02 SET_EWIN    [27:16] window low, [11:0] window high (keV)
//   03 CLT_BND     [20:16] boundary index 0..21, [8:0] boundary value:
//                  loads one boundary of the 198-bit row shadow register
//   04 CLT_COMMIT  [17:16] block, [12] table (0: X boundaries, 1: Y),
//                  [8:0] row: writes the shadow row into that CLT row
//   05 PEAK_WR     [49:48] block, [41:32] crystal address, [15:0] coefficient
//   06 TOFF_WR     [49:48] block, [41:32] crystal address, [17:0] offset
//   07 HIST_READ   [3:0] block mask: start histogram read-out
//   08 HIST_CLEAR  [3:0] block mask: clear histograms
//   09 SET_PERIOD  [31:0] packet period in clock cycles
//   0A SET_ESHIFT  [4:0] energy spectrum bin shift
// Unknown opcodes are ignored.  Configuration writes leave on a single bus
// one cycle after the command.  The paper only names these functions
// (command resolution, LUT and register configuration, mode select); the
// command set and its encoding are this design's own.  Reset state: regular
// mode, online, window 0..4095, shift 8, period 12500 cycles (100 us).
module cmd_decoder
  import spu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  logic [63:0]       cmd,
  output mode_e             mode,
  output logic              offline,
  output logic [EKEV_W-1:0] win_lo,
  output logic [EKEV_W-1:0] win_hi,
  output logic [4:0]        eshift,
  output logic [31:0]       period,
  output logic [N_BLOCKS-1:0] hist_rd_start,
  output logic [N_BLOCKS-1:0] hist_clr_start,
  output cfg_wr_t           cfg
);
  logic [CLT_W-1:0] shadow;
  logic [7:0]       op;
  assign op = cmd[63:56];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= MODE_REGULAR; offline <= 1'b0; win_lo <= '0; win_hi <= '1;
      eshift <= 5'd8; period <= 32'd12500; hist_rd_start <= '0; hist_clr_start <= '0;
      cfg <= '0; shadow <= '0;
    end else begin
      hist_rd_start  <= '0;
      hist_clr_start <= '0;
      cfg.valid      <= 1'b0;
      if (cmd_valid) begin
        case (op)
          8'h01: begin mode <= mode_e'(cmd[1:0]); offline <= cmd[4]; end
          8'h02: begin win_lo <= cmd[27:16]; win_hi <= cmd[11:0]; end
          8'h03: if (cmd[20:16] < 5'(NBND))
                   shadow[CLT_W-1 - int'(cmd[20:16])*BND_W -: BND_W] <= cmd[8:0];
          8'h04: begin
            cfg.valid <= 1'b1; cfg.tgt <= cmd[12] ? CFG_CLT_Y : CFG_CLT_X;
            cfg.blk <= cmd[17:16]; cfg.addr <= cmd[8:0]; cfg.addr_hi <= 1'b0;
            cfg.data <= shadow;
          end
          8'h05, 8'h06: begin
            cfg.valid <= 1'b1; cfg.tgt <= (op == 8'h05) ? CFG_PEAK : CFG_TOFF;
            cfg.blk <= cmd[49:48]; cfg.addr <= cmd[40:32]; cfg.addr_hi <= cmd[41];
            cfg.data <= CLT_W'(cmd[17:0]);
          end
          8'h07: hist_rd_start  <= cmd[N_BLOCKS-1:0];
          8'h08: hist_clr_start <= cmd[N_BLOCKS-1:0];
          8'h09: period <= cmd[31:0];
          8'h0A: eshift <= cmd[4:0];
          default: ;
        endcase
      end
    end
  end
endmodule
