// tb_token_ring: four blocks write numbered frames at random; the module
// FIFO is read with random back-pressure.  Every frame must come out once,
// in its block's order, unless the block FIFO was full (then `drop` must
// report it).  A burst of one frame per block must be fully moved within
// one token round (4 cycles), and a long stall must cause drops.
module tb_token_ring;
  import spu_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic [N-1:0] in_valid = '0;
  frame_t in_frame [N];
  logic [N-1:0] in_afull, drop;
  logic out_valid, out_ready = 1;
  frame_t out_frame;
  int checks = 0, failures = 0, ndrop = 0, nout = 0, seqno = 0;
  int expq [N][$];

  token_ring dut (.*);

  // scoreboard, sampled at each rising edge
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < N; b++) begin
      if (drop[b]) begin void'(expq[b].pop_back()); ndrop++; end
      if (in_valid[b]) expq[b].push_back(int'(in_frame[b].data[31:0]));
    end
    if (out_valid && out_ready) begin
      int b, id;
      b  = int'(out_frame.data[FRAME_W-5 -: 2]);
      id = int'(out_frame.data[31:0]);
      checks++; nout++;
      if (expq[b].size() == 0 || expq[b][0] != id) begin
        failures++; $display("MISMATCH block %0d id %0d", b, id);
      end else void'(expq[b].pop_front());
    end
  end

  task automatic put(int b);
    in_frame[b].nbytes = NBYTES_W'(16);
    in_frame[b].data = {FT_REGULAR, 2'(b), 2'b00, (FRAME_W-40)'(0), 32'(seqno)};
    seqno++;
    in_valid[b] = 1;
  endtask

  initial begin
    for (int b = 0; b < N; b++) in_frame[b] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // burst: one frame in each block FIFO at once
    for (int b = 0; b < N; b++) put(b);
    @(posedge clk); #1;
    in_valid = '0;
    repeat (5) @(posedge clk); #1;
    checks++;
    if (nout != N) begin failures++; $display("burst: %0d of 4 out after one round", nout); end
    // random traffic with back-pressure
    for (int n = 0; n < 5000; n++) begin
      for (int b = 0; b < N; b++) if ($urandom_range(0, 9) < 2) put(b);
      out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      in_valid = '0;
    end
    // stall: block 0 writes every cycle while nothing is read
    out_ready = 0;
    for (int n = 0; n < 120; n++) begin put(0); @(posedge clk); #1; end
    in_valid = '0;
    out_ready = 1;
    repeat (300) @(posedge clk); #1;
    checks++;
    if (ndrop == 0) begin failures++; $display("no drops"); end
    for (int b = 0; b < N; b++) begin
      checks++;
      if (expq[b].size() != 0) begin failures++; $display("block %0d left %0d", b, expq[b].size()); end
    end
    $display("frames out %0d, dropped %0d", nout, ndrop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
