// tb_block_dsp: one detector block in all four modes.  Loads the boundary
// tables, the photon peak LUT and the time offset LUT over the
// configuration bus, then
//   regular mode : random events back to back; every frame that passes the
//                  energy window must carry the crystal address, DOI, keV,
//                  raw X/Y and corrected time computed here from the
//                  formulas, and leave 19 cycles after its event (K+3+3
//                  plus the frame register);
//   flood / spectrum offline : per-event frames checked likewise;
//   flood / spectrum online  : histograms read out and compared with
//                  counts accumulated here;
//   raw mode     : energies and TDC value passed through in a 24-byte frame.
module tb_block_dsp;
  import spu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  mode_e mode = MODE_REGULAR;
  logic offline = 0;
  logic [EKEV_W-1:0] win_lo = 300, win_hi = 700;
  logic [4:0] eshift = 9;
  logic hist_rd_start = 0, hist_clr_start = 0, hist_ready = 1;
  cfg_wr_t cfg = '0;
  logic ev_valid = 0;
  energies_t e = '0;
  logic [TIME_W-1:0] tdc = 0;
  logic reg_valid, fld_valid, spc_valid, raw_valid, hist_busy, hist_full;
  frame_t reg_frame, fld_frame, spc_frame, raw_frame;
  int checks = 0, failures = 0, cyc = 0;
  int n_reg = 0, n_rej = 0, n_hist = 0;

  block_dsp #(.BLK(2'd1)) dut (.*);

  int bx [512][22], by [512][22], coef [1024], toff [1024];
  typedef struct { logic [FRAME_W-1:0] d; int nb; int t; } exp_t;
  exp_t qreg[$], qfld[$], qspc[$], qraw[$];
  int href [int];

  function automatic int frac(longint n, longint d, int f);
    if (d == 0) return 0;
    return int'((n << f) / d);
  endfunction
  function automatic int find(int b [22], int v);
    for (int i = 0; i < 22; i++) if (v < b[i]) return i + 1;
    return 23;
  endfunction

  task automatic event_in(energies_t ee, longint t);
    longint s1, s2, esum, p;
    int x, y, doi, col, row, xid, ek, bin;
    exp_t ex;
    s1 = ee[0] + ee[1] + ee[2] + ee[3];
    s2 = ee[4] + ee[5] + ee[6] + ee[7];
    esum = s1 + s2;
    x = (frac(ee[0] + ee[3], s1, 9) + frac(ee[4] + ee[7], s2, 9)) / 2;  if (x > 511) x = 511;
    y = (frac(ee[0] + ee[1], s1, 9) + frac(ee[6] + ee[7], s2, 9)) / 2;  if (y > 511) y = 511;
    doi = frac(s1, esum, 4); if (doi > 15) doi = 15;
    col = find(bx[y], x); row = find(by[x], y); xid = (row - 1) * 23 + col;
    p = (esum * coef[xid]) >> 14; ek = (p > 4095) ? 4095 : int'(p);
    bin = int'(esum >> eshift); if (bin > 255) bin = 255;
    ex.t = cyc;
    case (mode)
      MODE_REGULAR: if (ek >= win_lo && ek <= win_hi) begin
        ex.nb = 16;
        ex.d = {FT_REGULAR, 2'd1, 2'b00, 10'(xid), 4'(doi), 2'b00, 12'(ek), 9'(x), 9'(y), 26'h0,
                48'(t - longint'(toff[xid])), 64'h0};
        qreg.push_back(ex); n_reg++;
      end else n_rej++;
      MODE_FLOOD: if (offline) begin
        ex.nb = 8; ex.d = {FT_FLOOD_RAW, 2'd1, 2'b00, 9'(x), 9'(y), 4'(doi), 34'h0, 128'h0};
        qfld.push_back(ex);
      end else begin
        int a; a = y * 512 + x;
        if (!href.exists(a)) href[a] = 0;
        href[a]++;
      end
      MODE_SPECTRUM: if (offline) begin
        ex.nb = 8; ex.d = {FT_SPEC_RAW, 2'd1, 2'b00, 10'(xid), 2'b00, 19'(esum), 25'h0, 128'h0};
        qspc.push_back(ex);
      end else begin
        int a; a = (xid - 1) * 256 + bin;
        if (!href.exists(a)) href[a] = 0;
        href[a]++;
      end
      MODE_RAW: begin
        ex.nb = 24; ex.d = {FT_RAW, 2'd1, 2'b00, ee, 48'(t), 8'h00};
        qraw.push_back(ex);
      end
    endcase
    e = ee; tdc = TIME_W'(t); ev_valid = 1;
    @(posedge clk); #1;
    ev_valid = 0;
  endtask

  function automatic void cmp(string nm, frame_t f, ref exp_t q[$], input int lat);
    exp_t ex;
    checks++;
    if (q.size() == 0) begin failures++; $display("%s: unexpected frame", nm); return; end
    ex = q.pop_front();
    if (f.data != ex.d || f.nbytes != ex.nb || (lat >= 0 && cyc - ex.t != lat)) begin
      failures++;
      if (failures < 10) $display("%s: MISMATCH got %h exp %h lat %0d", nm, f.data, ex.d, cyc - ex.t);
    end
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (reg_valid) cmp("regular", reg_frame, qreg, K_RAWPOS + CLT_LAT + CORR_LAT + 1);
      if (raw_valid) cmp("raw", raw_frame, qraw, 1);
      if (fld_valid && offline) cmp("flood", fld_frame, qfld, K_RAWPOS + 1);
      if (spc_valid && offline) cmp("spectrum", spc_frame, qspc, K_RAWPOS + CLT_LAT + 1);
      if ((fld_valid || spc_valid) && !offline) begin
        frame_t f; int a, c, ec;
        f = fld_valid ? fld_frame : spc_frame;
        a = int'(f.data[FRAME_W-15 -: 18]);
        c = int'(f.data[FRAME_W-39 -: 10]);
        ec = href.exists(a) ? href[a] : 0;
        n_hist++;
        if (c != 0 || ec != 0) begin
          checks++;
          if (c != ec || (fld_valid && mode != MODE_FLOOD) || (spc_valid && mode != MODE_SPECTRUM)) begin
            failures++; if (failures < 10) $display("hist addr %0d count %0d exp %0d", a, c, ec);
          end
          if (href.exists(a)) href.delete(a);
        end
      end
    end
  end

  task automatic cfg_write(cfg_tgt_e tg, int addr, logic [CLT_W-1:0] d);
    cfg.valid = 1; cfg.tgt = tg; cfg.blk = 2'd1; cfg.addr = 9'(addr); cfg.addr_hi = addr[9];
    cfg.data = d;
    @(posedge clk); #1;
    cfg.valid = 0;
  endtask

  function automatic energies_t rnd_event();
    energies_t ee;
    int scale;
    scale = $urandom_range(500, 7000);
    for (int i = 0; i < 8; i++) ee[i] = 16'($urandom_range(0, scale));
    return ee;
  endfunction

  task automatic run(mode_e m, bit off, int n);
    mode = m; offline = off;
    @(posedge clk); #1;
    for (int k = 0; k < n; k++) begin
      event_in(rnd_event(), {16'($urandom), 32'($urandom)});
      if (k % 9 == 0) begin @(posedge clk); #1; end
    end
    repeat (30) @(posedge clk); #1;
  endtask

  task automatic readout();
    hist_rd_start = 1; @(posedge clk); #1; hist_rd_start = 0;
    while (hist_busy) begin hist_ready = ($urandom_range(0, 4) != 0); @(posedge clk); #1; end
    hist_ready = 1;
    repeat (5) @(posedge clk); #1;
    checks++;
    if (href.size() != 0) begin failures++; $display("%0d histogram cells not read", href.size()); end
  endtask

  initial begin
    logic [CLT_W-1:0] row;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // configuration
    for (int a = 0; a < 512; a++) begin
      for (int i = 0; i < 22; i++) begin
        bx[a][i] = i * 22 + 11 + ((a >> 4) % 9) - 4;
        by[a][i] = i * 22 + 11 + ((a >> 5) % 7) - 3;
      end
      for (int i = 0; i < 22; i++) row[CLT_W-1-9*i -: 9] = 9'(bx[a][i]);
      cfg_write(CFG_CLT_X, a, row);
      for (int i = 0; i < 22; i++) row[CLT_W-1-9*i -: 9] = 9'(by[a][i]);
      cfg_write(CFG_CLT_Y, a, row);
    end
    for (int a = 0; a < 1024; a++) begin
      coef[a] = $urandom_range(200, 700);
      toff[a] = $urandom_range(0, 2000) - 1000;
      cfg_write(CFG_PEAK, a, CLT_W'(coef[a]));
      cfg_write(CFG_TOFF, a, CLT_W'(18'(toff[a])));
    end
    hist_clr_start = 1; @(posedge clk); #1; hist_clr_start = 0;
    while (hist_busy) begin @(posedge clk); #1; end

    run(MODE_REGULAR, 0, 3000);
    run(MODE_FLOOD, 1, 500);
    run(MODE_SPECTRUM, 1, 500);
    run(MODE_RAW, 0, 500);
    run(MODE_FLOOD, 0, 3000);
    readout();
    run(MODE_SPECTRUM, 0, 3000);
    readout();
    checks++;
    if (qreg.size() || qfld.size() || qspc.size() || qraw.size() || n_reg == 0 || n_rej == 0) begin
      failures++; $display("left frames or no window rejections (%0d passed, %0d rejected)", n_reg, n_rej);
    end
    $display("regular frames %0d, rejected by window %0d, histogram frames %0d", n_reg, n_rej, n_hist);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
