// tb_udp_rx: sends command packets with random words, packets to another
// port, a non-UDP packet and a packet with a trailing partial word, with
// random gaps inside packets, and checks that exactly the words of the
// valid packets come out, in order.
module tb_udp_rx;
  import tb_net_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  logic [7:0] rx_data = 0;
  logic rx_valid = 0, rx_last = 0;
  logic cmd_valid;
  logic [63:0] cmd;
  int checks = 0, failures = 0;
  longint unsigned expq [$];

  udp_rx dut (.*);

  always @(posedge clk) if (rst_n && cmd_valid) begin
    checks++;
    if (expq.size() == 0 || expq.pop_front() != cmd) begin
      failures++; $display("unexpected command %h", cmd);
    end
  end

  task automatic send(bytes_t p);
    foreach (p[i]) begin
      while ($urandom_range(0, 4) == 0) begin rx_valid = 0; @(posedge clk); #1; end
      rx_data = p[i]; rx_valid = 1; rx_last = (i == p.size() - 1);
      @(posedge clk); #1;
    end
    rx_valid = 0; rx_last = 0;
    repeat (3) @(posedge clk); #1;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int k = 0; k < 60; k++) begin
      longint unsigned w [$];
      bytes_t p;
      int kind;
      kind = k % 5;
      w.delete();
      repeat ($urandom_range(1, 6)) w.push_back({32'($urandom), 32'($urandom)});
      p = cmd_packet(w, (kind == 1) ? 5003 : 5002);
      if (kind == 2) p[9] = 8'd6;                    // TCP: ignore
      if (kind == 3) p.push_back(8'hAA);             // partial trailing word
      if (kind == 0 || kind == 3 || kind == 4) foreach (w[i]) expq.push_back(w[i]);
      send(p);
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("missing %0d words", expq.size()); end
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
