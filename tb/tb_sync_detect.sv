// tb_sync_detect: sends synchronizing sequences that carry the right time
// stamp (no frame expected) and wrong ones (a sync frame with the local and
// received values, and the counter continuing from the received value).
// Between sequences the counter must advance by exactly one per cycle.
module tb_sync_detect;
  import spu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic sync_in = 0, sync_ready = 0;
  logic [TS_W-1:0] ts;
  logic sync_valid;
  frame_t sync_frame;
  logic [15:0] n_checked, n_mismatch;
  int checks = 0, failures = 0, nbad = 0;

  sync_detect dut (.*);

  // send a sequence whose value is `ts` of the cycle of the last bit plus `err`
  task automatic send(longint err, output longint sent, output longint local_at_last);
    longint v;
    sync_in = 1; @(posedge clk); #1;                  // start bit
    // last bit is TS_W cycles from now
    v = longint'(ts) + TS_W - 1 + err;
    for (int i = TS_W - 1; i >= 0; i--) begin
      sync_in = v[i];
      if (i == 0) local_at_last = longint'(ts);
      @(posedge clk); #1;
    end
    sync_in = 0;
    sent = v & ((longint'(1) << TS_W) - 1);
  endtask

  initial begin
    longint sent, loc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (100) @(posedge clk); #1;
    for (int k = 0; k < 200; k++) begin
      longint err;
      err = (k % 3 == 0) ? 0 : ((k % 3 == 1) ? longint'($urandom_range(1, 100000)) : -5);
      send(err, sent, loc);
      if (err != 0) nbad++;
      // after the last bit: frame iff mismatch, counter == sent + 1 at this cycle
      checks++;
      if (err == 0) begin
        if (sync_valid) begin failures++; $display("unexpected sync frame"); end
        if (longint'(ts) != loc + 1) begin failures++; $display("counter disturbed"); end
      end else begin
        if (!sync_valid) begin failures++; $display("no sync frame"); end
        else if (sync_frame.data[FRAME_W-1 -: 4] != FT_SYNC ||
                 longint'(sync_frame.data[FRAME_W-17 -: TS_W]) != loc ||
                 longint'(sync_frame.data[FRAME_W-17-TS_W -: TS_W]) != sent ||
                 sync_frame.nbytes != 16) begin
          failures++; $display("bad sync frame");
        end
        if (longint'(ts) != sent + 1) begin
          failures++; $display("counter not reloaded: %0d vs %0d", ts, sent + 1);
        end
      end
      sync_ready = 1; @(posedge clk); #1; sync_ready = 0;
      checks++;
      if (sync_valid) begin failures++; $display("frame not taken"); end
      begin
        longint t0;
        int n;
        t0 = longint'(ts); n = $urandom_range(0, 30);
        repeat (n) @(posedge clk); #1;
        checks++;
        if (longint'(ts) != ((t0 + n) & ((longint'(1) << TS_W) - 1))) begin
          failures++; $display("counter did not run freely");
        end
      end
    end
    checks++;
    if (n_checked != 200 || n_mismatch != 16'(nbad)) begin
      failures++; $display("counts %0d %0d", n_checked, n_mismatch);
    end
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
