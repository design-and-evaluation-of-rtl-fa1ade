`timescale 1ps/1ps
// Event-by-event baseline of one energy channel.
// Keeps the last NPTS (8, as in the paper) ADC samples and their running
// sum. When an event's onset is flagged, the sum of the NPTS samples that
// came before it is latched; the baseline is that sum / NPTS. The sum rather
// than the mean is passed on, so no fraction is lost before the subtraction.
// Timing: sample_valid pulses carry the 25 Msps stream; base_sum is valid
// from the cycle after onset until the next onset. Samples arriving in the
// onset cycle belong to the event, not to its baseline.
module baseline_calc
  import fpga_adc_pkg::*;
#(
  parameter int NPTS = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sample_valid,
  input  width_t sample,
  input  logic onset,
  output logic [WIDTH_BITS+$clog2(NPTS)-1:0] base_sum
);
  localparam int SB = WIDTH_BITS + $clog2(NPTS);
  width_t        win [NPTS];
  logic [SB-1:0] sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPTS; i++) win[i] <= '0;
      sum      <= '0;
      base_sum <= '0;
    end else begin
      if (onset) base_sum <= sum;
      if (sample_valid) begin
        win[0] <= sample;
        for (int i = 1; i < NPTS; i++) win[i] <= win[i-1];
        sum <= sum + SB'(sample) - SB'(win[NPTS-1]);
      end
    end
  end
endmodule
