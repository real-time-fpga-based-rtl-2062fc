// tb_udp_tx: feeds frames of 8, 16 and 24 bytes and priority sync frames
// with random gaps, reads the byte stream with random back-pressure, and
// checks every packet: IPv4 header fields and checksum, UDP length, packet
// header frame count and sequence number, and that the payload is exactly
// the accepted frames in order.  Packets must be closed both by the period
// and by a full payload.
module tb_udp_tx;
  import spu_pkg::*;
  import tb_net_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic [31:0] period = 300;
  mode_e mode = MODE_REGULAR;
  logic in_valid = 0, sync_valid = 0, in_ready, sync_ready;
  frame_t in_frame, sync_frame;
  logic [7:0] tx_data;
  logic tx_valid, tx_last, tx_ready = 1;
  int checks = 0, failures = 0, npk = 0, nfull = 0, nper = 0, nsync = 0;
  byte unsigned exp_bytes [$];
  int exp_nfr [$];
  bytes_t pk;
  int acc_frames = 0;

  udp_tx dut (.*);

  function automatic void push_frame(frame_t f);
    for (int i = 0; i < int'(f.nbytes); i++) exp_bytes.push_back(f.data[FRAME_W-1-8*i -: 8]);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (sync_valid && sync_ready) begin push_frame(sync_frame); nsync++; end
    if (in_valid && in_ready) push_frame(in_frame);
    if (tx_valid && tx_ready) begin
      pk.push_back(tx_data);
      if (tx_last) begin
        check_packet(pk);
        pk.delete();
      end
    end
  end

  function automatic void check_packet(bytes_t p);
    int tot, ulen, nfr, seq, pay;
    checks++;
    tot  = {p[2], p[3]};
    ulen = {p[24], p[25]};
    seq  = {p[32], p[33]};
    nfr  = {p[34], p[35]};
    pay  = p.size() - 36;
    if (p[0] != 8'h45 || p[9] != 17 || tot != p.size() || ulen != p.size() - 20 ||
        csum16(p, 0, 20) != 16'hFFFF || {p[28], p[29]} != 16'h5350 || seq != (npk & 16'hFFFF) ||
        {p[22], p[23]} != 16'd5001) begin
      failures++; $display("bad header in packet %0d: tot %0d size %0d ulen %0d cs %h seq %0d", npk, tot, p.size(), ulen, csum16(p,0,20), seq);
    end
    for (int i = 36; i < p.size(); i++) begin
      checks++;
      if (exp_bytes.size() == 0 || exp_bytes.pop_front() != p[i]) begin
        failures++; if (failures < 10) $display("payload byte %0d differs", i);
      end
    end
    if (pay + 24 > 1400) nfull++; else nper++;
    npk++;
  endfunction

  task automatic random_frame(output frame_t f);
    int nb;
    nb = 8 * $urandom_range(1, 3);
    f.nbytes = NBYTES_W'(nb);
    f.data = {FT_REGULAR, 28'($urandom), 32'($urandom), 32'($urandom), 32'($urandom),
              32'($urandom), 32'($urandom)};
  endtask

  initial begin
    frame_t f;
    in_frame = '0; sync_frame = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 20000; n++) begin
      // sparse then dense traffic
      if (!in_valid || in_ready) begin
        in_valid = 0;
        if ($urandom_range(0, 99) < ((n < 8000) ? 3 : 90)) begin random_frame(f); in_frame = f; in_valid = 1; end
      end
      if (!sync_valid || sync_ready) begin
        sync_valid = 0;
        if ($urandom_range(0, 999) == 0) begin
          random_frame(f); f.nbytes = 16; f.data[FRAME_W-1 -: 4] = FT_SYNC;
          sync_frame = f; sync_valid = 1;
        end
      end
      tx_ready = ($urandom_range(0, 7) != 0);
      @(posedge clk); #1;
    end
    in_valid = 0; sync_valid = 0; tx_ready = 1;
    repeat (2000) @(posedge clk);
    checks++;
    if (exp_bytes.size() != 0 || nfull == 0 || nper == 0 || nsync == 0) begin
      failures++; $display("left %0d full %0d period %0d sync %0d", exp_bytes.size(), nfull, nper, nsync);
    end
    $display("packets %0d (closed by size %0d, by period %0d)", npk, nfull, nper);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
