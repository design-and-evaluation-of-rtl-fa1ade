`timescale 1ps/1ps
// One carry-chain TDC channel: delay line, edge encoder, code-density
// calibration and time-stamp assembly. It time-stamps both the rising and
// the falling edges of its input, at most one of each per clock cycle.
// A time stamp is coarse * 512 - fine: the coarse count of the sampling clock
// edge minus the calibrated time the edge spent in the chain before it,
// on the 9-bit scale (7.8125 ps per LSB at 250 MHz).
// Timing: an edge sampled at clock edge n is reported in the cycle after
// edge n+2 (rise_valid / fall_valid high for one cycle).
// cal_start / cal_busy / cal_done control the calibration (see tdc_calib).
// The paper's TDC is a carry-chain TDC normalised to 9 bits after correction;
// its internals here are this design's own.
module tdc_channel
  import fpga_adc_pkg::*;
#(
  parameter int TAPS     = 256,
  parameter int WIN      = 250,
  parameter int CAL_LOG2 = 14
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    sig,
  input  coarse_t coarse,
  input  logic    cal_start,
  output logic    cal_busy,
  output logic    cal_done,
  output logic    rise_valid,
  output ts_t     rise_ts,
  output logic    fall_valid,
  output ts_t     fall_ts
);
  localparam int RAW_BITS = $clog2(TAPS + 1);

  logic [TAPS-1:0]      taps;
  logic                 rv, fv;
  logic [RAW_BITS-1:0]  rp, fp;
  coarse_t              c1, c2;
  logic                 rv2, fv2;
  logic [FINE_BITS-1:0] rfine, ffine;

  carry_chain #(.TAPS(TAPS)) u_chain (.clk, .sig, .taps);

  tdc_encoder #(.TAPS(TAPS), .WIN(WIN)) u_enc (
    .clk, .rst_n, .taps, .coarse_i(coarse),
    .rise_valid(rv), .rise_pos(rp), .fall_valid(fv), .fall_pos(fp), .coarse_o(c1));

  tdc_calib #(.TAPS(TAPS), .WIN(WIN), .CAL_LOG2(CAL_LOG2)) u_cal (
    .clk, .rst_n, .start(cal_start), .busy(cal_busy), .done(cal_done),
    .hit_valid(rv), .hit_pos(rp), .pos_a(rp), .pos_b(fp), .fine_a(rfine), .fine_b(ffine));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rv2 <= 1'b0; fv2 <= 1'b0; c2 <= '0;
    end else begin
      rv2 <= rv; fv2 <= fv; c2 <= c1;
    end
  end

  assign rise_valid = rv2;
  assign fall_valid = fv2;
  assign rise_ts    = {c2, {FINE_BITS{1'b0}}} - TS_BITS'(rfine);
  assign fall_ts    = {c2, {FINE_BITS{1'b0}}} - TS_BITS'(ffine);
endmodule
