`timescale 1ps/1ps
// One FPGA-ADC channel: TDC plus width calculation.
// Outside the FPGA, the shaped analog signal and the shared RC sampling ramp
// meet at an LVDS input pair used as a comparator; `comp` is that receiver's
// output. The TDC time-stamps both edges of each comparator pulse and the
// width calculation turns each ramp period into one 13-bit sample, a
// 25 Msps stream when the ramp runs at 25 MHz. The width-to-voltage relation
// follows the ramp shape and is not linearised here (the paper leaves that
// correction to future work).
// Timing: one sample_valid pulse per sample_tick, which must come
// TICK_OFFSET = 3 cycles after the ramp starts to fall (see ramp_clock_gen).
// Structure per the paper (LVDS receiver, TDC, width calc.); the integration
// stage of the paper's ADC figure is the separate integrator module.
module fpga_adc
  import fpga_adc_pkg::*;
#(
  parameter int TAPS     = 256,
  parameter int WIN      = 250,
  parameter int CAL_LOG2 = 14
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    comp,
  input  coarse_t coarse,
  input  logic    sample_tick,
  input  logic    cal_start,
  output logic    cal_busy,
  output logic    cal_done,
  output logic    sample_valid,
  output width_t  sample,
  output logic    over_range,
  output logic    under_range
);
  logic rv, fv;
  ts_t  rts, fts;

  tdc_channel #(.TAPS(TAPS), .WIN(WIN), .CAL_LOG2(CAL_LOG2)) u_tdc (
    .clk, .rst_n, .sig(comp), .coarse, .cal_start, .cal_busy, .cal_done,
    .rise_valid(rv), .rise_ts(rts), .fall_valid(fv), .fall_ts(fts));

  width_calc u_width (
    .clk, .rst_n, .sample_tick,
    .rise_valid(rv), .rise_ts(rts), .fall_valid(fv), .fall_ts(fts),
    .sample_valid, .sample, .over_range, .under_range);
endmodule
