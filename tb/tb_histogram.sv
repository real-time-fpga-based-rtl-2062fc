// tb_histogram: full-size (512x512) histogram test.  Clears the RAM, sends
// flood-map events back to back (with many repeats of the same cell, so the
// read-modify-write forwarding is exercised) and more than 1023 hits on one
// cell (saturation and full flag), reads the whole map out against a
// reference count with random back-pressure, then does the same for an
// energy-spectrum run, and checks that read-out left the RAM cleared.
module tb_histogram;
  import spu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic [1:0] blk_id = 2'd2;
  logic spec_mode = 0, in_valid = 0, rd_start = 0, clr_start = 0, out_ready = 1;
  logic [POS_W-1:0] x = 0, y = 0;
  logic [XID_W-1:0] xid = 1;
  logic [EBIN_W-1:0] ebin = 0;
  logic out_valid, busy, full_flag;
  frame_t out_frame;
  int checks = 0, failures = 0, nframes = 0, nsat = 0, nfwd = 0;
  int ref_cnt [int];

  histogram dut (.*);

  task automatic hit(int addr);
    if (spec_mode) begin xid = XID_W'((addr >> 8) + 1); ebin = EBIN_W'(addr & 255); end
    else begin y = POS_W'(addr >> 9); x = POS_W'(addr & 511); end
    in_valid = 1;
    if (!ref_cnt.exists(addr)) ref_cnt[addr] = 0;
    if (ref_cnt[addr] < 1023) ref_cnt[addr]++; else nsat++;
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  // read-out checker
  always @(posedge clk) begin
    if (out_valid && rst_n) begin
      int a, c, expc;
      a = int'(out_frame.data[FRAME_W-15 -: 18]);
      c = int'(out_frame.data[FRAME_W-39 -: 10]);
      expc = ref_cnt.exists(a) ? ref_cnt[a] : 0;
      checks++;
      if (a != nframes || c != expc || out_frame.nbytes != 8 ||
          out_frame.data[FRAME_W-1 -: 4] != (spec_mode ? FT_SPEC_HIST : FT_FLOOD_HIST) ||
          out_frame.data[FRAME_W-5 -: 2] != blk_id) begin
        failures++;
        if (failures < 10) $display("MISMATCH addr %0d (exp %0d) count %0d exp %0d", a, nframes, c, expc);
      end
      nframes++;
    end
  end

  task automatic readout();
    nframes = 0;
    rd_start = 1; @(posedge clk); #1; rd_start = 0;
    while (busy) begin
      out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
    end
    out_ready = 1;
    repeat (3) @(posedge clk); #1;
    checks++;
    if (nframes != 2**18) begin failures++; $display("frames %0d", nframes); end
  endtask

  task automatic run_events(int base);
    for (int n = 0; n < 3000; n++) begin
      int a;
      case (n % 4)
        0: a = base;                                  // hot cell
        1: a = base + $urandom_range(0, 3);           // neighbours
        default: a = spec_mode ? $urandom_range(0, 529 * 256 - 1) : $urandom_range(0, 2**18 - 1);
      endcase
      hit(a);
      if (n % 13 == 0) begin @(posedge clk); #1; end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    clr_start = 1; @(posedge clk); #1; clr_start = 0;
    while (busy) begin @(posedge clk); #1; end
    // flood map
    run_events(12345);
    for (int n = 0; n < 1100; n++) hit(777);          // saturate one cell
    repeat (3) @(posedge clk); #1;
    checks++;
    if (!full_flag) begin failures++; $display("full flag not set"); end
    readout();
    checks++;
    if (full_flag) begin failures++; $display("full flag not cleared"); end
    // energy spectrum: RAM must start at zero after read-out
    ref_cnt.delete();
    spec_mode = 1;
    run_events(300 * 256 + 17);
    readout();
    // empty read-out
    ref_cnt.delete();
    readout();
    checks++;
    if (nsat == 0) failures++;
    $display("saturated hits %0d", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
