// udp_tx: packet builder with UDP transport and IPv4 network layers.
//
// Frames from the selected mode's module FIFO, and synchronization frames
// (which take priority), are collected into a packet buffer.  A packet is
// closed when its first frame has waited `period` cycles, or when the next
// frame would not fit (MAX_FRAMES frames or MAX_PAYLOAD bytes).  It is then
// sent on a byte stream to the Ethernet link layer as an IPv4 packet:
//   20-byte IPv4 header (no options, DF, TTL 64, protocol 17, checksum)
//   8-byte UDP header (checksum 0, which IPv4 allows)
//   8-byte packet header {16'h5350, SPU id, mode, sequence, frame count}
//   the frames, each sent as its nbytes most significant bytes.
// Input is refused while a packet is being sent; the module FIFOs upstream
// absorb the pause.  The byte stream has valid/ready handshaking and marks
// the last byte.  The paper gives this function (frames of a time period
// packaged with headers, UDP over IPv4 in logic, link layer in a core); the
// packet header, the closing rule and the sizes are this design's choices.
module udp_tx
  import spu_pkg::*;
#(
  parameter int unsigned MAX_FRAMES  = 176,
  parameter int unsigned MAX_PAYLOAD = 1400,
  parameter logic [7:0]  SPU_ID      = 8'd0,
  parameter logic [31:0] SRC_IP      = 32'hC0A8_0164,   // 192.168.1.100
  parameter logic [31:0] DST_IP      = 32'hC0A8_0101,   // 192.168.1.1
  parameter logic [15:0] SRC_PORT    = 16'd5000,
  parameter logic [15:0] DST_PORT    = 16'd5001
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] period,
  input  mode_e       mode,
  input  logic        in_valid,
  input  frame_t      in_frame,
  output logic        in_ready,
  input  logic        sync_valid,
  input  frame_t      sync_frame,
  output logic        sync_ready,
  output logic [7:0]  tx_data,
  output logic        tx_valid,
  output logic        tx_last,
  input  logic        tx_ready
);
  localparam int unsigned HDR_B = 36;
  localparam int unsigned FW    = $clog2(MAX_FRAMES + 1);

  typedef enum logic [1:0] {S_COLLECT, S_HDR, S_PAY} state_e;
  state_e state;

  frame_t            fbuf [MAX_FRAMES];
  logic [FW-1:0]     nfr, fi;
  logic [15:0]       pbytes;
  logic [31:0]       timer;
  logic [15:0]       seq;
  logic [HDR_B*8-1:0] hdr;
  logic [5:0]        hi;
  logic [NBYTES_W-1:0] bi;

  // accept logic
  frame_t cand;
  logic   take_sync, take_in, fits, close_now;
  assign cand      = sync_valid ? sync_frame : in_frame;
  assign fits      = (nfr < FW'(MAX_FRAMES)) &&
                     (pbytes + 16'(cand.nbytes) <= 16'(MAX_PAYLOAD));
  assign take_sync = (state == S_COLLECT) && sync_valid && fits && !close_now;
  assign take_in   = (state == S_COLLECT) && !sync_valid && in_valid && fits && !close_now;
  assign sync_ready = take_sync;
  assign in_ready   = take_in;
  assign close_now = (state == S_COLLECT) && (nfr != 0) &&
                     ((timer + 1 >= period) || ((sync_valid || in_valid) && !fits));

  function automatic logic [15:0] ip_csum(input logic [15:0] tot_len, input logic [15:0] id);
    logic [31:0] s;
    s = 32'h4500 + 32'(tot_len) + 32'(id) + 32'h4000 + 32'h4011
      + 32'(SRC_IP[31:16]) + 32'(SRC_IP[15:0]) + 32'(DST_IP[31:16]) + 32'(DST_IP[15:0]);
    s = 32'(s[15:0]) + 32'(s[31:16]);
    s = 32'(s[15:0]) + 32'(s[31:16]);
    return ~s[15:0];
  endfunction

  logic [15:0] ip_len, udp_len;
  assign udp_len = 16'd16 + pbytes;
  assign ip_len  = 16'd36 + pbytes;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_COLLECT; nfr <= '0; pbytes <= '0; timer <= '0; seq <= '0;
      hi <= '0; fi <= '0; bi <= '0;
    end else begin
      case (state)
        S_COLLECT: begin
          if (take_sync || take_in) begin
            fbuf[nfr] <= cand;
            nfr       <= nfr + 1'b1;
            pbytes    <= pbytes + 16'(cand.nbytes);
          end
          if (nfr != 0) timer <= timer + 1;
          if (close_now) begin
            state <= S_HDR; hi <= '0;
            hdr <= {16'h4500, ip_len, seq, 16'h4000, 8'd64, 8'd17, ip_csum(ip_len, seq),
                    SRC_IP, DST_IP,
                    SRC_PORT, DST_PORT, udp_len, 16'h0000,
                    16'h5350, SPU_ID, 6'b0, mode, seq, 16'(nfr)};
          end
        end
        S_HDR: if (tx_ready) begin
          hi <= hi + 1'b1;
          if (hi == 6'(HDR_B - 1)) begin state <= S_PAY; fi <= '0; bi <= '0; end
        end
        S_PAY: if (tx_ready) begin
          if (bi == fbuf[fi].nbytes - 1'b1) begin
            bi <= '0;
            fi <= fi + 1'b1;
            if (fi == nfr - 1'b1) begin
              state <= S_COLLECT; nfr <= '0; pbytes <= '0; timer <= '0;
              seq <= seq + 1'b1;
            end
          end else bi <= bi + 1'b1;
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

  always_comb begin
    tx_valid = (state == S_HDR) || (state == S_PAY);
    tx_last  = (state == S_PAY) && (fi == nfr - 1'b1) && (bi == fbuf[fi].nbytes - 1'b1);
    if (state == S_HDR) tx_data = hdr[(HDR_B*8-1) - 8*hi -: 8];
    else                tx_data = fbuf[fi].data[(FRAME_W-1) - 8*bi -: 8];
  end
endmodule
