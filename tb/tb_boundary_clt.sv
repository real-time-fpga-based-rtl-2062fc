// tb_boundary_clt: fills both boundary tables with random sorted boundaries
// (plus the two rows of the worked example: raw (11,7) must give the
// two-direction address (2,2) and crystal 25), then looks up random raw
// positions back to back and compares column, row and crystal address with
// a search written independently here.  Also checks the 3-cycle latency.
module tb_boundary_clt;
  import spu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic wr_en = 0, wr_tbl = 0;
  logic [POS_W-1:0] wr_addr = 0;
  logic [CLT_W-1:0] wr_data = 0;
  logic in_valid = 0;
  logic [POS_W-1:0] x = 0, y = 0;
  logic out_valid;
  logic [4:0] col, row;
  logic [XID_W-1:0] xid;
  int checks = 0, failures = 0, cyc = 0;

  boundary_clt dut (.*);

  int bx [512][22];   // X boundaries, indexed by raw y
  int by [512][22];   // Y boundaries, indexed by raw x

  typedef struct { int c, r, id, t; } exp_t;
  exp_t q[$];

  function automatic int find(int b [22], int v);
    // first region whose upper boundary lies above v
    for (int i = 0; i < 22; i++) if (v < b[i]) return i + 1;
    return 23;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid && rst_n) begin
      exp_t ex;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        ex = q.pop_front();
        if (col != ex.c || row != ex.r || xid != ex.id || cyc - ex.t != CLT_LAT) begin
          failures++;
          $display("MISMATCH col %0d/%0d row %0d/%0d id %0d/%0d lat %0d",
                   col, ex.c, row, ex.r, xid, ex.id, cyc - ex.t);
        end
      end
    end
  end

  task automatic look(int xx, int yy);
    exp_t ex;
    x = POS_W'(xx); y = POS_W'(yy); in_valid = 1;
    ex.c = find(bx[yy], xx); ex.r = find(by[xx], yy);
    ex.id = (ex.r - 1) * 23 + ex.c; ex.t = cyc;
    q.push_back(ex);
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  initial begin
    for (int a = 0; a < 512; a++)
      for (int i = 0; i < 22; i++) begin
        bx[a][i] = i * 22 + $urandom_range(1, 21);
        by[a][i] = i * 22 + $urandom_range(1, 21);
      end
    // worked example rows
    bx[7][0] = 8;  bx[7][1] = 14; bx[7][2] = 20;
    // the figure prints the Y-table address as 0x00C for x = 11; the text
    // says raw X is the address, so the row is placed at 11
    by[11][0] = 7; by[11][1] = 11; by[11][2] = 20;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int t = 0; t < 2; t++)
      for (int a = 0; a < 512; a++) begin
        wr_en = 1; wr_tbl = t[0]; wr_addr = POS_W'(a);
        for (int i = 0; i < 22; i++)
          wr_data[CLT_W-1-9*i -: 9] = 9'(t == 0 ? bx[a][i] : by[a][i]);
        @(posedge clk); #1;
      end
    wr_en = 0;
    look(11, 7);
    repeat (5) @(posedge clk); #1;
    checks++;
    if (xid != 25 || col != 2 || row != 2) begin
      failures++; $display("worked example gave (%0d,%0d) %0d", col, row, xid);
    end
    // edge values and random values, back to back
    look(0, 0); look(511, 511); look(0, 511); look(511, 0);
    for (int n = 0; n < 2000; n++) begin
      int b;
      b = $urandom_range(0, 21);
      // half of the lookups sit on or next to a boundary
      if (n % 2 == 0) look(bx[n % 512][b] - (n % 4 == 0 ? 1 : 0), n % 512);
      else look($urandom_range(0, 511), $urandom_range(0, 511));
    end
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("missing outputs"); end
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
