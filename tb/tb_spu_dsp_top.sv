// tb_spu_dsp_top: end-to-end test of the SPU processing logic at its full
// size.  Everything goes through the external interfaces: the PC's commands
// arrive as UDP/IPv4 packets and results leave as UDP/IPv4 packets, which
// are parsed here frame by frame.
//   1. Load all boundary tables (4 blocks x 2 x 512 rows), peak and time LUTs.
//   2. Regular mode: events on all four blocks; each frame must match the
//      formulas computed here; out-of-window events must be missing.
//      A wrong synchronizing sequence must give one sync frame and a right
//      one none.
//   3. Flood map offline, energy spectrum offline, raw data: frames checked.
//   4. Flood map online on all blocks, including >1023 hits on one cell
//      (full flag), then read-out of all four 512x512 maps.
//   5. Energy spectrum online, read-out of one block.
// Events enter as ADC waveforms: a flat baseline at a random pedestal, and
// after each hit a 16-sample pulse whose area above the baseline is the
// event's chosen channel energy.
// Each mechanism is counted and a failure is counted for any that never
// happened.
module tb_spu_dsp_top;
  import spu_pkg::*;
  import tb_net_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;

  logic smp_en = 0;
  logic [N_CH-1:0][11:0] adc [N_BLOCKS];
  logic [N_BLOCKS-1:0] hit = '0;
  logic [TIME_W-1:0] hit_time [N_BLOCKS];
  logic [15:0] pileup [N_BLOCKS];
  logic sync_in = 0;
  logic [TS_W-1:0] ts;
  logic [7:0] rx_data = 0;
  logic rx_valid = 0, rx_last = 0;
  logic [7:0] tx_data;
  logic tx_valid, tx_last, tx_ready = 1;
  mode_e mode;
  logic [N_BLOCKS-1:0] hist_busy, hist_full, frame_drop;
  logic [15:0] sync_mismatches;

  spu_dsp_top dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  // mechanism counters
  int m_regular = 0, m_window_reject = 0, m_sync = 0, m_fld_off = 0, m_spc_off = 0,
      m_raw = 0, m_fld_hist = 0, m_spc_hist = 0, m_full = 0, m_packets = 0;

  int bx [4][512][22], by [4][512][22], coef [4][1024], toff [4][1024];
  typedef logic [FRAME_W-1:0] fdata_t;
  fdata_t q [4][$];           // expected per-event frames, per block
  int href [4][int];
  int hist_rows_seen = 0;

  function automatic int frac(longint n, longint d, int f);
    if (d == 0) return 0;
    return int'((n << f) / d);
  endfunction
  function automatic int find(int b [22], int v);
    for (int i = 0; i < 22; i++) if (v < b[i]) return i + 1;
    return 23;
  endfunction

  // ---------------- command path ----------------
  task automatic send_cmds(longint unsigned w[$]);
    bytes_t p;
    p = cmd_packet(w, 5002);
    foreach (p[i]) begin
      rx_data = p[i]; rx_valid = 1; rx_last = (i == p.size() - 1);
      @(posedge clk); #1;
    end
    rx_valid = 0; rx_last = 0;
    repeat (4) @(posedge clk); #1;
  endtask

  // ---------------- output packets ----------------
  bytes_t pk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && tx_valid && tx_ready) begin
      pk.push_back(tx_data);
      if (tx_last) begin parse_packet(pk); pk.delete(); end
    end
  end

  function automatic int frame_len(int ft);
    case (ft)
      1, 15: return 16;
      6: return 24;
      default: return 8;
    endcase
  endfunction

  function automatic void parse_packet(bytes_t p);
    int i, nfr, nseen;
    checks++; m_packets++;
    if (p[0] != 8'h45 || p[9] != 17 || {p[2], p[3]} != p.size() || csum16(p, 0, 20) != 16'hFFFF) begin
      failures++; $display("bad packet header");
    end
    nfr = {p[34], p[35]};
    i = 36; nseen = 0;
    while (i < p.size()) begin
      fdata_t d; int ft, nb, blk;
      ft = p[i] >> 4; nb = frame_len(ft);
      d = '0;
      for (int k = 0; k < nb; k++) d[FRAME_W-1-8*k -: 8] = p[i+k];
      i += nb; nseen++;
      blk = int'(d[FRAME_W-5 -: 2]);
      case (ft)
        4'hF: m_sync++;
        4'h2, 4'h3: begin
          int a, c, ec;
          a = int'(d[FRAME_W-15 -: 18]); c = int'(d[FRAME_W-39 -: 10]);
          ec = href[blk].exists(a) ? href[blk][a] : 0;
          if (ft == 2) m_fld_hist++; else m_spc_hist++;
          if (c != 0 || ec != 0) begin
            checks++;
            if (c != ec) begin failures++; if (failures < 10) $display("hist blk %0d addr %0d: %0d vs %0d", blk, a, c, ec); end
            if (href[blk].exists(a)) href[blk].delete(a);
          end
        end
        default: begin
          checks++;
          if (ft == 1) m_regular++;
          if (ft == 4) m_fld_off++;
          if (ft == 5) m_spc_off++;
          if (ft == 6) m_raw++;
          if (q[blk].size() == 0 || q[blk][0] != d) begin
            failures++;
            if (failures < 10) $display("frame blk %0d type %0d: got %h exp %h", blk, ft, d,
                                        q[blk].size() ? q[blk][0] : '0);
          end
          if (q[blk].size()) void'(q[blk].pop_front());
        end
      endcase
    end
    checks++;
    if (nseen != nfr) begin failures++; $display("frame count %0d vs header %0d", nseen, nfr); end
  endfunction

  // ---------------- events ----------------
  mode_e cur_mode = MODE_REGULAR;
  bit cur_off = 0;
  int win_lo = 0, win_hi = 4095, eshift = 8;

  function automatic void expect_event(int b, energies_t ee, longint t);
    longint s1, s2, esum, p;
    int x, y, doi, col, row, xid, ek, bin, a;
    s1 = ee[0] + ee[1] + ee[2] + ee[3];
    s2 = ee[4] + ee[5] + ee[6] + ee[7];
    esum = s1 + s2;
    x = (frac(ee[0] + ee[3], s1, 9) + frac(ee[4] + ee[7], s2, 9)) / 2;  if (x > 511) x = 511;
    y = (frac(ee[0] + ee[1], s1, 9) + frac(ee[6] + ee[7], s2, 9)) / 2;  if (y > 511) y = 511;
    doi = frac(s1, esum, 4); if (doi > 15) doi = 15;
    col = find(bx[b][y], x); row = find(by[b][x], y); xid = (row - 1) * 23 + col;
    p = (esum * coef[b][xid]) >> 14; ek = (p > 4095) ? 4095 : int'(p);
    bin = int'(esum >> eshift); if (bin > 255) bin = 255;
    case (cur_mode)
      MODE_REGULAR:
        if (ek >= win_lo && ek <= win_hi)
          q[b].push_back({FT_REGULAR, 2'(b), 2'b00, 10'(xid), 4'(doi), 2'b00, 12'(ek), 9'(x), 9'(y),
                          26'h0, 48'(t - longint'(toff[b][xid])), 64'h0});
        else m_window_reject++;
      MODE_FLOOD:
        if (cur_off) q[b].push_back({FT_FLOOD_RAW, 2'(b), 2'b00, 9'(x), 9'(y), 4'(doi), 34'h0, 128'h0});
        else begin a = y * 512 + x; href[b][a] = (href[b].exists(a) ? href[b][a] : 0) + 1;
                   if (href[b][a] > 1023) href[b][a] = 1023; end
      MODE_SPECTRUM:
        if (cur_off) q[b].push_back({FT_SPEC_RAW, 2'(b), 2'b00, 10'(xid), 2'b00, 19'(esum), 25'h0, 128'h0});
        else begin a = (xid - 1) * 256 + bin; href[b][a] = (href[b].exists(a) ? href[b][a] : 0) + 1;
                   if (href[b][a] > 1023) href[b][a] = 1023; end
      MODE_RAW: q[b].push_back({FT_RAW, 2'(b), 2'b00, ee, 48'(t), 8'h00});
    endcase
  endfunction

  function automatic energies_t rnd_event();
    energies_t ee;
    int scale;
    scale = $urandom_range(500, 7000);
    for (int i = 0; i < 8; i++) ee[i] = 16'($urandom_range(0, scale));
    return ee;
  endfunction

  // ADC waveform generator, one per block: idx counts the samples of the
  // pulse after a hit (-1: baseline), gap the baseline samples since.
  int ped [4][N_CH], wen [4][N_CH], idx [4], gap [4];
  always @(posedge clk) begin
    smp_en <= ~smp_en;
    for (int b = 0; b < 4; b++) begin
      if (hit[b] && idx[b] < 0) idx[b] <= 0;
      else if (idx[b] >= 0 && smp_en) begin
        idx[b] <= (idx[b] == 15) ? -1 : idx[b] + 1;
        if (idx[b] == 15) gap[b] <= 0;
      end else if (idx[b] < 0 && smp_en && gap[b] < 100) gap[b] <= gap[b] + 1;
    end
  end
  always_comb
    for (int b = 0; b < 4; b++)
      for (int c = 0; c < N_CH; c++)
        adc[b][c] = 12'((idx[b] < 0) ? ped[b][c]
                        : ped[b][c] + wen[b][c] / 16 + ((idx[b] < wen[b][c] % 16) ? 1 : 0));

  // n cycles of random hits on all blocks; pct is the hit probability per
  // block and cycle once the block is idle (1% is close to the
  // 1 event/us/block the detector produces at most)
  task automatic events(int n, int pct = 1, bit fixed = 0);
    for (int k = 0; k < n; k++) begin
      for (int b = 0; b < 4; b++) begin
        hit[b] = (idx[b] < 0 && gap[b] >= 5 && $urandom_range(0, 99) < pct);
        if (hit[b]) begin
          longint t;
          energies_t ee;
          ee = fixed ? energies_t'({8{16'd1000}}) : rnd_event();
          for (int c = 0; c < N_CH; c++) wen[b][c] = int'(ee[c]);
          t = {16'($urandom), 32'($urandom)};
          hit_time[b] = TIME_W'(t);
          expect_event(b, ee, t);
        end
      end
      @(posedge clk); #1;
    end
    hit = '0;
    repeat (60) @(posedge clk); #1;
  endtask

  task automatic set_mode(mode_e m, bit off);
    longint unsigned w[$];
    cur_mode = m; cur_off = off;
    w.push_back(c_mode(int'(m), off));
    send_cmds(w);
  endtask

  task automatic flush_packets();
    // wait for the packet period to expire and the last packet to leave
    repeat (14000) @(posedge clk); #1;
  endtask

  task automatic readout(int mask);
    longint unsigned w[$];
    w.push_back(c_hread(mask));
    send_cmds(w);
    while (hist_busy != 0) begin @(posedge clk); #1; end
    flush_packets();
    checks++;
    for (int b = 0; b < 4; b++)
      if (mask[b] && href[b].size() != 0) begin
        failures++; $display("block %0d: %0d cells not read back", b, href[b].size());
      end
  endtask

  task automatic send_sync(longint err);
    longint v;
    sync_in = 1; @(posedge clk); #1;
    v = longint'(ts) + TS_W - 1 + err;
    for (int i = TS_W - 1; i >= 0; i--) begin sync_in = v[i]; @(posedge clk); #1; end
    sync_in = 0;
  endtask

  initial begin
    longint unsigned w[$];
    for (int b = 0; b < 4; b++) begin
      hit_time[b] = '0; idx[b] = -1; gap[b] = 0;
      for (int c = 0; c < N_CH; c++) begin ped[b][c] = $urandom_range(50, 400); wen[b][c] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk); #1;

    // 1. configuration through UDP
    for (int b = 0; b < 4; b++) begin
      for (int a = 0; a < 512; a++) begin
        for (int i = 0; i < 22; i++) begin
          bx[b][a][i] = i * 22 + 11 + ((a >> 4) + b) % 9 - 4;
          by[b][a][i] = i * 22 + 11 + ((a >> 5) + b) % 7 - 3;
        end
        for (int t = 0; t < 2; t++) begin
          for (int i = 0; i < 22; i++) w.push_back(c_bnd(i, t ? by[b][a][i] : bx[b][a][i]));
          w.push_back(c_commit(b, t, a));
          if (w.size() > 150) begin send_cmds(w); w.delete(); end
        end
      end
      for (int a = 0; a < 1024; a++) begin
        coef[b][a] = $urandom_range(200, 700);
        toff[b][a] = $urandom_range(0, 4000) - 2000;
        w.push_back(c_peak(b, a, coef[b][a]));
        w.push_back(c_toff(b, a, toff[b][a]));
        if (w.size() > 150) begin send_cmds(w); w.delete(); end
      end
    end
    win_lo = 300; win_hi = 700;
    w.push_back(c_ewin(win_lo, win_hi));
    w.push_back(c_eshift(eshift));
    w.push_back(c_hclear(4'hF));
    send_cmds(w); w.delete();
    while (hist_busy != 0) begin @(posedge clk); #1; end
    $display("configured at cycle %0d", cyc);

    // 2. regular mode with synchronization checks
    set_mode(MODE_REGULAR, 0);
    events(20000);
    send_sync(12345);          // wrong: sync frame expected
    events(2000);
    send_sync(0);              // right: nothing
    events(200, 100);          // every block at its highest rate
    events(20000);
    flush_packets();
    checks++;
    if (sync_mismatches != 1) begin failures++; $display("sync mismatches %0d", sync_mismatches); end

    // 3. offline modes and raw data
    set_mode(MODE_FLOOD, 1);    events(3000);  flush_packets();
    set_mode(MODE_SPECTRUM, 1); events(3000);  flush_packets();
    set_mode(MODE_RAW, 0);      events(3000);  flush_packets();

    // 4. online flood map, one cell driven into saturation
    set_mode(MODE_FLOOD, 0);
    events(20000);
    events(50000, 100, 1);     // one cell per block past 1023 counts
    if (hist_full == 4'hF) m_full++;
    readout(4'hF);

    // 5. online energy spectrum, block 2
    set_mode(MODE_SPECTRUM, 0);
    events(20000);
    readout(4'b0100);
    for (int b = 0; b < 4; b++) if (b != 2) href[b].delete();

    checks++;
    for (int b = 0; b < 4; b++) if (q[b].size() != 0) begin
      failures++; $display("block %0d: %0d frames never arrived", b, q[b].size());
    end
    checks++;
    if (frame_drop != 0) failures++;
    for (int b = 0; b < 4; b++) if (pileup[b] != 0) begin failures++; $display("unexpected pile-up"); end
    $display("packets %0d regular %0d rejected %0d sync %0d flood-offline %0d spectrum-offline %0d raw %0d",
             m_packets, m_regular, m_window_reject, m_sync, m_fld_off, m_spc_off, m_raw);
    $display("flood histogram frames %0d spectrum histogram frames %0d full-flag %0d",
             m_fld_hist, m_spc_hist, m_full);
    if (m_regular == 0) begin failures++; $display("never: regular frame"); end
    if (m_window_reject == 0) begin failures++; $display("never: window rejection"); end
    if (m_sync != 1) begin failures++; $display("sync frames: %0d", m_sync); end
    if (m_fld_off == 0) begin failures++; $display("never: offline flood"); end
    if (m_spc_off == 0) begin failures++; $display("never: offline spectrum"); end
    if (m_raw == 0) begin failures++; $display("never: raw frame"); end
    if (m_fld_hist != 4 * 2**18) begin failures++; $display("flood read-out frames %0d", m_fld_hist); end
    if (m_spc_hist != 2**18) begin failures++; $display("spectrum read-out frames %0d", m_spc_hist); end
    if (m_full == 0) begin failures++; $display("never: histogram full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
