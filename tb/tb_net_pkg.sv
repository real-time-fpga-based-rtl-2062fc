// tb_net_pkg: testbench helpers for IPv4/UDP packets: header checksum,
// building a command packet, and command word encoders matching the
// command decoder's format.
package tb_net_pkg;
  typedef byte unsigned bytes_t[$];

  function automatic int unsigned csum16(bytes_t b, int from, int len);
    int unsigned s = 0;
    for (int i = from; i < from + len; i += 2) s += {b[i], b[i+1]};
    while (s >> 16) s = (s & 16'hFFFF) + (s >> 16);
    return s;
  endfunction

  // IPv4 + UDP packet carrying the given 64-bit words
  function automatic bytes_t cmd_packet(longint unsigned words[$], int unsigned dport);
    bytes_t p;
    int unsigned tot, ulen, cs;
    ulen = 8 + 8 * words.size();
    tot  = 20 + ulen;
    p = '{8'h45, 8'h00, 8'(tot >> 8), 8'(tot), 8'h12, 8'h34, 8'h40, 8'h00,
          8'd64, 8'd17, 8'h00, 8'h00, 8'd192, 8'd168, 8'd1, 8'd1, 8'd192, 8'd168, 8'd1, 8'd100,
          8'h13, 8'h88, 8'(dport >> 8), 8'(dport), 8'(ulen >> 8), 8'(ulen), 8'h00, 8'h00};
    cs = ~csum16(p, 0, 20) & 16'hFFFF;
    p[10] = 8'(cs >> 8); p[11] = 8'(cs);
    foreach (words[w]) for (int i = 7; i >= 0; i--) p.push_back(8'(words[w] >> (8 * i)));
    return p;
  endfunction

  function automatic longint unsigned c_mode(int m, bit off);
    return {8'h01, 56'(0)} | longint'(m & 3) | (longint'(off) << 4);
  endfunction
  function automatic longint unsigned c_ewin(int lo, int hi);
    return {8'h02, 56'(0)} | (longint'(lo) << 16) | longint'(hi);
  endfunction
  function automatic longint unsigned c_bnd(int idx, int val);
    return {8'h03, 56'(0)} | (longint'(idx) << 16) | longint'(val);
  endfunction
  function automatic longint unsigned c_commit(int blk, int tbl, int row);
    return {8'h04, 56'(0)} | (longint'(blk) << 16) | (longint'(tbl) << 12) | longint'(row);
  endfunction
  function automatic longint unsigned c_peak(int blk, int addr, int coef);
    return {8'h05, 56'(0)} | (longint'(blk) << 48) | (longint'(addr) << 32) | longint'(coef & 16'hFFFF);
  endfunction
  function automatic longint unsigned c_toff(int blk, int addr, int off);
    return {8'h06, 56'(0)} | (longint'(blk) << 48) | (longint'(addr) << 32) | longint'(off & 18'h3FFFF);
  endfunction
  function automatic longint unsigned c_hread(int mask);
    return {8'h07, 56'(0)} | longint'(mask);
  endfunction
  function automatic longint unsigned c_hclear(int mask);
    return {8'h08, 56'(0)} | longint'(mask);
  endfunction
  function automatic longint unsigned c_period(int p);
    return {8'h09, 56'(0)} | longint'(p);
  endfunction
  function automatic longint unsigned c_eshift(int s);
    return {8'h0A, 56'(0)} | longint'(s);
  endfunction
endpackage
