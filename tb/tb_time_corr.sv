// tb_time_corr: loads random signed offsets, then corrects random TDC values
// back to back and checks the result and the 3-cycle latency.
module tb_time_corr;
  import spu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic wr_en = 0;
  logic [LUT_AW-1:0] wr_addr = 0;
  logic [TOFF_W-1:0] wr_data = 0;
  logic in_valid = 0;
  logic [XID_W-1:0] xid = 0;
  logic [TIME_W-1:0] t_in = 0;
  logic out_valid;
  logic [TIME_W-1:0] t_out;
  int checks = 0, failures = 0, cyc = 0;
  int off [1024];

  time_corr dut (.*);

  typedef struct { longint t; int c; } exp_t;
  exp_t q[$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid && rst_n) begin
      exp_t ex;
      checks++;
      ex = q.pop_front();
      if (t_out != TIME_W'(ex.t) || cyc - ex.c != CORR_LAT) begin
        failures++; $display("MISMATCH %0d/%0d lat %0d", t_out, ex.t, cyc - ex.c);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int a = 0; a < 1024; a++) begin
      off[a] = $urandom_range(0, 2**18 - 1) - 2**17;     // -131072 .. 131071
      wr_en = 1; wr_addr = LUT_AW'(a); wr_data = TOFF_W'(off[a]);
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      exp_t ex;
      xid = XID_W'($urandom_range(0, 1023));
      t_in = {16'($urandom), 32'($urandom)};
      ex.t = longint'(t_in) - longint'(off[xid]);
      ex.c = cyc;
      q.push_back(ex);
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      if (n % 10 == 0) begin @(posedge clk); #1; end
    end
    repeat (6) @(posedge clk);
    checks++;
    if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
