// tb_rate_workload: the full-size SPU logic at the detector's highest event
// rate, 1,000,000 events per second on each of its four blocks.
// Hits arrive at random on every block; since a block cannot take a new hit
// while its 16-sample integration window and a short baseline gap are still
// open (about 42 cycles), the hit probability in an idle cycle is chosen so
// that the mean spacing is 125 cycles (1 us at 125 MHz).  The events go
// through the whole chain in regular mode: ADC waveforms, area integration,
// raw position, crystal locating, energy and time correction, token ring,
// packet builder.  All frames are compared with values computed here.  The
// test checks that no frame is dropped or lost, that the achieved event
// rate is within 10 % of 1 M/s per block, and reports the load of the
// 8-bit, 125 MB/s output stream.  The configuration (boundary tables, LUTs,
// energy window) is loaded through UDP command packets like the PC does.
module tb_rate_workload;
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

  int tx_bytes = 0;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) tx_bytes <= tx_bytes + 1;

  int n_hits [4];
  // n cycles of Poisson-like hits: probability 1/ppc per idle cycle
  task automatic events(int n, int ppc);
    for (int k = 0; k < n; k++) begin
      for (int b = 0; b < 4; b++) begin
        hit[b] = (idx[b] < 0 && gap[b] >= 5 && $urandom_range(1, ppc) == 1);
        if (hit[b]) begin
          longint t;
          energies_t ee;
          ee = rnd_event();
          for (int c = 0; c < N_CH; c++) wen[b][c] = int'(ee[c]);
          t = {16'($urandom), 32'($urandom)};
          hit_time[b] = TIME_W'(t);
          expect_event(b, ee, t);
          n_hits[b]++;
        end
      end
      @(posedge clk); #1;
    end
    hit = '0;
    repeat (60) @(posedge clk); #1;
  endtask

  localparam int RUN = 1250000;  // 10 ms
  initial begin
    longint unsigned w[$];
    int b0, t0, t1;
    for (int b = 0; b < 4; b++) begin
      hit_time[b] = '0; idx[b] = -1; gap[b] = 0; n_hits[b] = 0;
      for (int c = 0; c < N_CH; c++) begin ped[b][c] = $urandom_range(50, 400); wen[b][c] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk); #1;

    for (int b = 0; b < 4; b++) begin
      for (int a = 0; a < 512; a++) begin
        for (int i = 0; i < 22; i++) begin
          bx[b][a][i] = i * 22 + 11 + ((a >> 3) + b) % 5 - 2;
          by[b][a][i] = i * 22 + 11 + ((a >> 4) + b) % 7 - 3;
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
    w.push_back(c_ewin(0, 4095));
    w.push_back(c_mode(int'(MODE_REGULAR), 0));
    send_cmds(w); w.delete();
    repeat (14000) @(posedge clk); #1;   // let configuration traffic settle

    b0 = tx_bytes; t0 = cyc;
    events(RUN, 83);
    t1 = cyc;
    repeat (14000) @(posedge clk); #1;

    for (int b = 0; b < 4; b++) begin
      real rate;
      rate = real'(n_hits[b]) / (real'(t1 - t0) * 8.0e-9);
      $display("block %0d: %0d events, %.3f M events/s", b, n_hits[b], rate / 1.0e6);
      checks++;
      if (rate < 0.9e6 || rate > 1.1e6) begin failures++; $display("rate out of range"); end
      checks++;
      if (q[b].size() != 0) begin failures++; $display("block %0d: %0d frames never arrived", b, q[b].size()); end
      checks++;
      if (pileup[b] != 0) begin failures++; $display("unexpected pile-up"); end
    end
    checks++;
    if (frame_drop != 0) begin failures++; $display("frames dropped"); end
    checks++;
    if (m_regular != n_hits[0] + n_hits[1] + n_hits[2] + n_hits[3]) begin
      failures++; $display("regular frames %0d", m_regular);
    end
    $display("packets %0d, output stream load %.1f %% of 125 MB/s (%.1f Mbit/s)", m_packets,
             100.0 * real'(tx_bytes - b0) / real'(t1 - t0 + 14000),
             8.0 * real'(tx_bytes - b0) / (real'(t1 - t0 + 14000) * 8.0e-9) / 1.0e6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
