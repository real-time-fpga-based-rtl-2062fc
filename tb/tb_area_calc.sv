// tb_area_calc: drives flat baselines with random pedestals and, after each
// hit, a 16-sample pulse whose area above the baseline is a chosen energy
// (including pulses that dip below the baseline, which must give 0); checks
// the eight energies, the TDC value passed along, the output timing and that
// a hit inside the window is counted as pile-up and starts nothing.
module tb_area_calc;
  import spu_pkg::*;
  localparam int NS = 16;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic smp_en = 0;
  logic [N_CH-1:0][11:0] adc;
  logic hit = 0;
  logic [TIME_W-1:0] hit_time = 0;
  logic ev_valid;
  energies_t e;
  logic [TIME_W-1:0] tdc;
  logic [15:0] pileup;
  int checks = 0, failures = 0, cyc = 0, hit_cyc = 0, nev = 0;

  area_calc dut (.*);

  int ped [N_CH], en [N_CH], idx = -1;
  bit neg = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    smp_en <= ~smp_en;
    if (hit && idx < 0) idx <= 0;
    else if (idx >= 0 && smp_en) idx <= (idx == NS - 1) ? -1 : idx + 1;
  end
  always_comb
    for (int c = 0; c < N_CH; c++) begin
      int v;
      v = ped[c];
      if (idx >= 0) begin
        if (neg) v = ped[c] - 20;
        else v = ped[c] + en[c] / NS + ((idx < en[c] % NS) ? 1 : 0);
      end
      adc[c] = 12'(v);
    end

  initial begin
    for (int c = 0; c < N_CH; c++) begin ped[c] = 100; en[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      for (int c = 0; c < N_CH; c++) ped[c] = $urandom_range(50, 400);
      repeat (12) @(posedge clk);      // at least four baseline samples
      #1;
      neg = (k % 10 == 9);
      for (int c = 0; c < N_CH; c++) en[c] = (k == 0) ? 0 : $urandom_range(0, NS * 3000);
      hit = 1; hit_time = {16'($urandom), 32'($urandom)}; hit_cyc = cyc;
      @(posedge clk); #1;
      hit = 0;
      if (k % 7 == 3) begin repeat (6) @(posedge clk); #1; hit = 1; @(posedge clk); #1; hit = 0; end
      while (!ev_valid) begin
        @(posedge clk); #1;
        if (cyc - hit_cyc > 3 * NS) break;
      end
      checks++;
      if (!ev_valid || tdc != hit_time || cyc - hit_cyc > 2 * NS + 2 || cyc - hit_cyc < 2 * NS) begin
        failures++; $display("event %0d: valid %0d time ok %0d latency %0d", k, ev_valid, tdc == hit_time, cyc - hit_cyc);
      end
      for (int c = 0; c < N_CH; c++) begin
        checks++;
        if (e[c] != (neg ? 0 : en[c])) begin
          failures++; $display("event %0d ch %0d: %0d vs %0d", k, c, e[c], en[c]);
        end
      end
      nev++;
    end
    checks++;
    if (pileup != 43) begin failures++; $display("pileup count %0d", pileup); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
