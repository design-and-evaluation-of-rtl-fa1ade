`timescale 1ps/1ps
// Pulse-width calculation of one FPGA-ADC channel.
// The comparator output goes high when the falling ramp drops below the
// input and low again when the rising ramp passes it, so each ramp period
// holds one pulse whose width grows with the input voltage. Between two
// sample_ticks (one ramp period, TDC latency included) the module keeps the
// last rising and falling time stamp; at the tick it emits
//   fall - rise                     if both arrived, fall after rise,
//   WMAX (all ones)                 if the input stayed above the ramp for
//                                   part or all of the period (over range),
//   0                               if no pulse came (under range).
// Width LSB = 7.8125 ps; 40 ns (a full period) is 5120, so 13 bits suffice.
// Output: sample_valid for one cycle per tick, with sample and the flags.
// The paper gives the block's name and task; the over/under range handling
// is this design's choice.
module width_calc
  import fpga_adc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   sample_tick,
  input  logic   rise_valid,
  input  ts_t    rise_ts,
  input  logic   fall_valid,
  input  ts_t    fall_ts,
  output logic   sample_valid,
  output width_t sample,
  output logic   over_range,
  output logic   under_range
);
  localparam width_t WMAX = '1;

  logic got_rise, got_fall, level;
  ts_t  r_ts, f_ts, diff;

  assign diff = f_ts - r_ts;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got_rise <= 1'b0; got_fall <= 1'b0; level <= 1'b0;
      r_ts <= '0; f_ts <= '0;
      sample_valid <= 1'b0; sample <= '0;
      over_range <= 1'b0; under_range <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      if (sample_tick) begin
        sample_valid <= 1'b1;
        over_range   <= 1'b0;
        under_range  <= 1'b0;
        if (got_rise && got_fall && !diff[TS_BITS-1]) begin
          sample <= (diff > TS_BITS'(WMAX)) ? WMAX : width_t'(diff);
        end else if (got_rise || got_fall || level) begin
          sample <= WMAX; over_range <= 1'b1;
        end else begin
          sample <= '0;   under_range <= 1'b1;
        end
      end
      // capture edges; those arriving with the tick open the next period
      got_rise <= rise_valid || (got_rise && !sample_tick);
      got_fall <= fall_valid || (got_fall && !sample_tick);
      if (rise_valid) begin r_ts <= rise_ts; level <= 1'b1; end
      if (fall_valid) begin f_ts <= fall_ts; level <= 1'b0; end
      if (rise_valid && fall_valid) level <= (rise_ts > fall_ts);
    end
  end
endmodule
