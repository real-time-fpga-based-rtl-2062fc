// tb_energy_corr: loads a random photon peak LUT, sends events with random
// crystal addresses and energy sums back to back, and checks the keV value,
// the saturation, the window decision and the 3-cycle latency against a
// reference computed here.  The window is moved during the test.
module tb_energy_corr;
  import spu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic wr_en = 0;
  logic [LUT_AW-1:0] wr_addr = 0;
  logic [COEF_W-1:0] wr_data = 0;
  logic [EKEV_W-1:0] win_lo = 350, win_hi = 650;
  logic in_valid = 0;
  logic [XID_W-1:0] xid = 0;
  logic [ESUM_W-1:0] esum = 0;
  logic out_valid, pass;
  logic [EKEV_W-1:0] ekev;
  int checks = 0, failures = 0, cyc = 0, npass = 0, nrej = 0;
  int coef [1024];

  energy_corr dut (.*);

  typedef struct { int e; bit p; int t; } exp_t;
  exp_t q[$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid && rst_n) begin
      exp_t ex;
      checks++;
      ex = q.pop_front();
      if (ekev != ex.e || pass != ex.p || cyc - ex.t != CORR_LAT) begin
        failures++;
        $display("MISMATCH e %0d/%0d pass %0d/%0d lat %0d", ekev, ex.e, pass, ex.p, cyc - ex.t);
      end
      if (pass) npass++; else nrej++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int a = 0; a < 1024; a++) begin
      coef[a] = $urandom_range(0, 65535);
      if (a % 5 == 0) coef[a] = $urandom_range(150, 260);   // realistic gains
      wr_en = 1; wr_addr = LUT_AW'(a); wr_data = COEF_W'(coef[a]);
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      exp_t ex;
      longint p;
      if (n == 1500) begin win_lo = 100; win_hi = 1000; repeat (4) @(posedge clk); #1; end
      xid = XID_W'($urandom_range(1, 529));
      esum = (n % 3 == 0) ? ESUM_W'($urandom_range(0, 524287)) : ESUM_W'($urandom_range(20000, 60000));
      if (n % 4 == 0) xid = XID_W'(5 * $urandom_range(0, 105));
      p = (longint'(esum) * coef[xid]) >> 14;
      ex.e = p > 4095 ? 4095 : int'(p);
      ex.p = (ex.e >= win_lo) && (ex.e <= win_hi);
      ex.t = cyc;
      q.push_back(ex);
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
    end
    repeat (6) @(posedge clk);
    checks++;
    if (q.size() != 0 || npass == 0 || nrej == 0) begin
      failures++; $display("left %0d pass %0d rej %0d", q.size(), npass, nrej);
    end
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
