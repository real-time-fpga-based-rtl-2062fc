// sync_detect: time stamp counter and synchronization detection.
//
// The SPU keeps a time stamp counter running on the 125 MHz system clock.
// The clock and synchronization module sends a synchronizing sequence on a
// one-bit line: idle low, a start bit of 1, then the TS_W-bit time stamp,
// most significant bit first.  The time stamp is the value the counter must
// hold in the cycle in which the last bit is on the line.  In that cycle the
// received value is compared with the counter.  On a match nothing happens.
// On a mismatch a 16-byte synchronization frame {type F, local value,
// received value} is emitted to be inserted into the data stream, and the
// counter is reloaded so that it continues from the received value.
// The paper gives this function; the serial format and the frame layout are
// this design's own.  The mismatch count is kept for status.  The frame's
// reserved fields and the bits below its 16 bytes are constant zero.
module sync_detect
  import spu_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sync_in,
  output logic [TS_W-1:0] ts,
  output logic            sync_valid,
  output frame_t          sync_frame,
  input  logic            sync_ready,
  output logic [15:0]     n_checked,
  output logic [15:0]     n_mismatch
);
  localparam int unsigned CW = $clog2(TS_W + 1);

  logic            receiving;
  logic [CW-1:0]   nbits;
  logic [TS_W-2:0] sh;
  logic            last_bit;
  logic [TS_W-1:0] rx_ts;

  assign last_bit = receiving && (nbits == CW'(TS_W - 1));
  assign rx_ts    = {sh, sync_in};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      receiving <= 1'b0; nbits <= '0; sh <= '0; ts <= '0;
      sync_valid <= 1'b0; n_checked <= '0; n_mismatch <= '0;
    end else begin
      ts <= ts + 1'b1;
      if (sync_valid && sync_ready) sync_valid <= 1'b0;
      if (!receiving) begin
        if (sync_in) begin receiving <= 1'b1; nbits <= '0; end
      end else if (!last_bit) begin
        sh    <= {sh[TS_W-3:0], sync_in};
        nbits <= nbits + 1'b1;
      end else begin
        receiving <= 1'b0;
        n_checked <= n_checked + 1'b1;
        if (rx_ts != ts) begin
          ts         <= rx_ts + 1'b1;
          n_mismatch <= n_mismatch + 1'b1;
          sync_valid <= 1'b1;
          sync_frame.nbytes <= NBYTES_W'(16);
          sync_frame.data   <= {FT_SYNC, 4'h0, 8'h00, ts, rx_ts, 32'h0, (FRAME_W-128)'(0)};
        end
      end
    end
  end
endmodule
