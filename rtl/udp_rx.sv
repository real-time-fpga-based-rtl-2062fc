// udp_rx: command reception, IPv4 and UDP layers.
//
// Takes the IPv4 packets delivered by the Ethernet link layer as a byte
// stream with a last-byte marker.  A packet is accepted if its first byte is
// 0x45 (IPv4, no options), its protocol is 17 (UDP) and its UDP destination
// port is CMD_PORT.  Its UDP payload is cut into 64-bit command words, most
// significant byte first; each complete word is issued on `cmd_valid` for
// one cycle.  A trailing partial word is discarded.  Checksums are not
// checked (the link layer checks the Ethernet frame check sequence).  The
// paper states that commands and LUT data come from the PC over UDP; the
// word format is this design's own.
module udp_rx #(
  parameter logic [15:0] CMD_PORT = 16'd5002
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  rx_data,
  input  logic        rx_valid,
  input  logic        rx_last,
  output logic        cmd_valid,
  output logic [63:0] cmd
);
  logic [15:0] idx;
  logic        ok_ver, ok_proto;
  logic [7:0]  port_hi;
  logic        ok_port;
  logic [55:0] acc;
  logic [2:0]  nb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0; ok_ver <= 1'b0; ok_proto <= 1'b0; ok_port <= 1'b0; port_hi <= '0;
      nb <= '0; acc <= '0; cmd_valid <= 1'b0; cmd <= '0;
    end else begin
      cmd_valid <= 1'b0;
      if (rx_valid) begin
        idx <= rx_last ? '0 : ((idx == 16'hFFFF) ? idx : idx + 1'b1);
        case (idx)
          16'd0:  ok_ver   <= (rx_data == 8'h45);
          16'd9:  ok_proto <= (rx_data == 8'd17);
          16'd22: port_hi  <= rx_data;
          16'd23: ok_port  <= ({port_hi, rx_data} == CMD_PORT);
          default: ;
        endcase
        if (idx == 16'd27) nb <= '0;
        if (idx >= 16'd28 && ok_ver && ok_proto && ok_port) begin
          if (nb == 3'd7) begin
            cmd       <= {acc, rx_data};
            cmd_valid <= 1'b1;
          end else begin
            acc <= {acc[47:0], rx_data};
          end
          nb <= nb + 1'b1;
        end
        if (rx_last) nb <= '0;
      end
    end
  end
endmodule
