// tb_raw_pos_calc: checks raw (X, Y) and DOI against the centre-of-gravity
// formulas computed with plain integer division, for random and corner-case
// events issued back to back, and checks the K = 12 cycle latency.
module tb_raw_pos_calc;
  import spu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic in_valid = 0;
  energies_t e;
  logic out_valid;
  logic [POS_W-1:0] x, y;
  logic [DOI_W-1:0] doi;
  int checks = 0, failures = 0, cyc = 0;

  raw_pos_calc dut (.*);

  typedef struct { int x, y, doi, t; } exp_t;
  exp_t q[$];

  function automatic int frac(longint n, longint d, int f);
    if (d == 0) return 0;
    return int'((n << f) / d);
  endfunction

  function automatic exp_t model(energies_t ee, int t);
    exp_t r;
    longint s1, s2;
    int xx, yy, dd;
    s1 = ee[0] + ee[1] + ee[2] + ee[3];
    s2 = ee[4] + ee[5] + ee[6] + ee[7];
    xx = (frac(ee[0] + ee[3], s1, 9) + frac(ee[4] + ee[7], s2, 9)) / 2;
    yy = (frac(ee[0] + ee[1], s1, 9) + frac(ee[6] + ee[7], s2, 9)) / 2;
    dd = frac(s1, s1 + s2, 4);
    r.x = xx > 511 ? 511 : xx;  r.y = yy > 511 ? 511 : yy;  r.doi = dd > 15 ? 15 : dd;
    r.t = t;
    return r;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid && rst_n) begin
      exp_t ex;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        ex = q.pop_front();
        if (x != ex.x || y != ex.y || doi != ex.doi || cyc - ex.t != K_RAWPOS) begin
          failures++;
          $display("MISMATCH x=%0d/%0d y=%0d/%0d doi=%0d/%0d lat=%0d", x, ex.x, y, ex.y, doi, ex.doi, cyc - ex.t);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1;
    for (int n = 0; n < 400; n++) begin
      for (int i = 0; i < N_CH; i++) begin
        case (n)
          0: e[i] = 16'd0;                                    // empty event
          1: e[i] = (i == 0 || i == 4) ? 16'd1000 : 16'd0;    // all in corner A
          2: e[i] = 16'hFFFF;                                 // full scale
          default: e[i] = (n % 3 == 0) ? 16'($urandom_range(0, 65535)) : 16'($urandom_range(0, 4000));
        endcase
      end
      in_valid = (n % 7 != 5);       // mostly back to back, some gaps
      if (in_valid) q.push_back(model(e, cyc));
      @(posedge clk);
      #1;
    end
    in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("missing outputs %0d", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
