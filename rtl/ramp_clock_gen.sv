`timescale 1ps/1ps
// Sampling-ramp clock and sample tick.
// Divides the TDC clock by CLK_DIV (10: 250 MHz to the paper's 25 MHz
// sampling rate) into a square wave that leaves the FPGA through an output
// pad; the off-chip series resistor and the pad capacitance turn it into the
// quasi-triangular sampling ramp. The ramp falls while ramp_clk is low (first
// half of a period) and rises while it is high. It also keeps a free-running
// coarse counter for all TDC channels and gives one sample_tick per ramp
// period, TICK_OFFSET cycles after the ramp starts to fall, which is when all
// edges of that period have left the TDC pipelines.
// In the paper the PLL makes this clock; generating it by division from the
// TDC clock, which keeps ramp and TDC in phase, is this design's choice.
module ramp_clock_gen
  import fpga_adc_pkg::*;
#(
  parameter int DIV         = CLK_DIV,
  parameter int TICK_OFFSET = 3
) (
  input  logic    clk,
  input  logic    rst_n,
  output logic    ramp_clk,
  output logic    sample_tick,
  output coarse_t coarse
);
  localparam int PB = $clog2(DIV);
  logic [PB-1:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase       <= '0;
      ramp_clk    <= 1'b0;
      sample_tick <= 1'b0;
      coarse      <= '0;
    end else begin
      coarse      <= coarse + 1'b1;
      phase       <= (int'(phase) == DIV-1) ? '0 : phase + 1'b1;
      // phase 0 .. DIV/2-1: low (ramp falls); DIV/2 .. DIV-1: high (ramp rises)
      ramp_clk    <= (int'(phase) == DIV-1) ? 1'b0 :
                     (int'(phase) == DIV/2 - 1) ? 1'b1 : ramp_clk;
      sample_tick <= (int'(phase) == (TICK_OFFSET + DIV - 1) % DIV);
    end
  end
endmodule
