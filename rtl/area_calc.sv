// area_calc: area integral of the eight shaped ADC waveforms of one block.
//
// The eight channels are sampled by 12-bit ADCs at 62.5 MHz; `smp_en`
// marks the 125 MHz cycles that carry a new sample.  A hit on the block's
// time channel (the TDC result with its valid strobe) starts an integration:
// the next NSAMP samples of every channel are summed, and the baseline,
// taken as the mean of the last four samples before the hit, is subtracted
// NSAMP times.  The result, clamped to 0..65535, is the channel's energy.
// When the window closes, `ev_valid` is raised for one cycle with the eight
// energies and the TDC result of the hit, i.e. 2*NSAMP+1 cycles after the
// hit when samples arrive every other cycle.  Hits during an integration
// are ignored and counted in `pileup` (dead time of one window).
// The paper says only that the waveforms are integrated in the FPGA to
// obtain the energies; the trigger from the time channel, the window length
// and the baseline estimate are this design's own choices.
module area_calc
  import spu_pkg::*;
#(
  parameter int unsigned NSAMP = 16,    // samples per integration window
  parameter int unsigned ADC_W = 12
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        smp_en,
  input  logic [N_CH-1:0][ADC_W-1:0]  adc,
  input  logic                        hit,
  input  logic [TIME_W-1:0]           hit_time,
  output logic                        ev_valid,
  output energies_t                   e,
  output logic [TIME_W-1:0]           tdc,
  output logic [15:0]                 pileup
);
  localparam int unsigned AW = ADC_W + $clog2(NSAMP) + 2;   // accumulator width
  localparam int unsigned CW = $clog2(NSAMP + 1);

  logic [N_CH-1:0][3:0][ADC_W-1:0] hist;    // last four samples
  logic [N_CH-1:0][AW-1:0]         acc;
  logic [N_CH-1:0][ADC_W+1:0]      base4;   // sum of four baseline samples
  logic                            busy;
  logic [CW-1:0]                   n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; n <= '0; ev_valid <= 1'b0; pileup <= '0; hist <= '0;
      acc <= '0; base4 <= '0; tdc <= '0; e <= '0;
    end else begin
      ev_valid <= 1'b0;
      if (!busy) begin
        if (smp_en)
          for (int c = 0; c < N_CH; c++) hist[c] <= {hist[c][2:0], adc[c]};
        if (hit) begin
          busy <= 1'b1;
          n    <= '0;
          tdc  <= hit_time;
          for (int c = 0; c < N_CH; c++) begin
            acc[c]   <= '0;
            base4[c] <= (ADC_W+2)'(hist[c][0]) + (ADC_W+2)'(hist[c][1])
                      + (ADC_W+2)'(hist[c][2]) + (ADC_W+2)'(hist[c][3]);
          end
        end
      end else begin
        if (hit) pileup <= pileup + 1'b1;
        if (smp_en) begin
          for (int c = 0; c < N_CH; c++) acc[c] <= acc[c] + AW'(adc[c]);
          n <= n + 1'b1;
          if (n == CW'(NSAMP - 1)) begin
            busy     <= 1'b0;
            ev_valid <= 1'b1;
            for (int c = 0; c < N_CH; c++) begin
              logic [AW+1:0] tot, bl;
              tot = (AW+2)'(acc[c]) + (AW+2)'(adc[c]);
              bl  = ((AW+2)'(base4[c]) * (AW+2)'(NSAMP)) >> 2;
              if (tot <= bl)                     e[c] <= '0;
              else if (tot - bl > (AW+2)'(16'hFFFF)) e[c] <= '1;
              else                               e[c] <= E_W'(tot - bl);
            end
          end
        end
      end
    end
  end
endmodule
