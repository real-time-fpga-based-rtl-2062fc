// tb_cmd_decoder: issues every command and checks the registers, the
// configuration bus writes (target, block, address, data, one-cycle valid)
// and the histogram start pulses.
module tb_cmd_decoder;
  import spu_pkg::*;
  import tb_net_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic cmd_valid = 0;
  logic [63:0] cmd = 0;
  mode_e mode;
  logic offline;
  logic [EKEV_W-1:0] win_lo, win_hi;
  logic [4:0] eshift;
  logic [31:0] period;
  logic [N_BLOCKS-1:0] hist_rd_start, hist_clr_start;
  cfg_wr_t cfg;
  int checks = 0, failures = 0;

  cmd_decoder dut (.*);

  task automatic issue(longint unsigned c);
    cmd = c; cmd_valid = 1; @(posedge clk); #1; cmd_valid = 0;
  endtask
  task automatic expect_cond(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [CLT_W-1:0] row;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    expect_cond(mode == MODE_REGULAR && !offline && win_lo == 0 && win_hi == 4095, "reset state");
    issue(c_mode(2, 1));
    expect_cond(mode == MODE_SPECTRUM && offline, "mode");
    issue(c_mode(3, 0));
    expect_cond(mode == MODE_RAW && !offline, "mode raw");
    issue(c_ewin(350, 650));
    expect_cond(win_lo == 350 && win_hi == 650, "window");
    issue(c_period(777));  expect_cond(period == 777, "period");
    issue(c_eshift(5));    expect_cond(eshift == 5, "eshift");
    for (int t = 0; t < 4; t++) begin
      for (int i = 0; i < NBND; i++) begin
        int v;
        v = $urandom_range(0, 511);
        row[CLT_W-1-9*i -: 9] = 9'(v);
        issue(c_bnd(i, v));
        expect_cond(!cfg.valid, "no write on boundary load");
      end
      issue(c_commit(t, t & 1, 100 + t));
      expect_cond(cfg.valid && cfg.tgt == ((t & 1) ? CFG_CLT_Y : CFG_CLT_X) && cfg.blk == 2'(t) &&
                  cfg.addr == 9'(100 + t) && cfg.data == row, "CLT commit");
      @(posedge clk); #1;
      expect_cond(!cfg.valid, "write lasts one cycle");
    end
    issue(c_peak(2, 1000, 16'hBEEF));
    expect_cond(cfg.valid && cfg.tgt == CFG_PEAK && cfg.blk == 2 && {cfg.addr_hi, cfg.addr} == 10'd1000 &&
                cfg.data[15:0] == 16'hBEEF, "peak write");
    issue(c_toff(3, 529, -1234));
    expect_cond(cfg.valid && cfg.tgt == CFG_TOFF && cfg.blk == 3 && {cfg.addr_hi, cfg.addr} == 10'd529 &&
                cfg.data[17:0] == 18'(-1234), "toff write");
    issue(c_hread(4'b1010));
    expect_cond(hist_rd_start == 4'b1010 && hist_clr_start == 0, "read start");
    @(posedge clk); #1;
    expect_cond(hist_rd_start == 0, "read start is a pulse");
    issue(c_hclear(4'b0101));
    expect_cond(hist_clr_start == 4'b0101, "clear start");
    issue(64'hFF00_0000_0000_0003);
    expect_cond(mode == MODE_RAW && !cfg.valid, "unknown opcode ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
