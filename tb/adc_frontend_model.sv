`timescale 1ps/1ps
// Behavioural model of the analog part of one FPGA-ADC channel for the
// testbenches: RC ramp (series resistor and pad capacitance) and LVDS
// comparator. On each falling edge of ramp_clk the input voltage (vin_uv,
// microvolts, taken as constant over the 40 ns period) is compared with the
// ramp and comp is driven high and low at the crossing times of
// frontend_pkg. In cal_mode comp toggles at random times instead (2.1 to
// 9 ns apart), giving the code-density calibration phase-random edges.
module adc_frontend_model (
  input  logic ramp_clk,
  input  int   vin_uv,
  input  logic cal_mode,
  output logic comp
);
  import frontend_pkg::*;

  initial comp = 1'b0;

  // avoid edges exactly on a 4 ns clock edge
  function automatic int unsigned nudge(input real t);
    int unsigned d = int'($floor(t));
    return (d % 4000 == 0) ? d + 1 : d;
  endfunction

  always begin
    if (cal_mode) begin
      #($urandom_range(9000, 2100)) comp = ~comp;
    end else begin
      real v;
      int unsigned tr, tf;
      @(negedge ramp_clk);
      v = real'(vin_uv) / 1.0e6;
      // the ramp clock changes on a TDC clock edge: keep 1 ps away from it
      if (v >= vmax()) #1 comp = 1'b1;
      else if (v > vmin()) begin
        tr = nudge(t_rise_ps(v));
        tf = nudge(t_fall_ps(v));
        // the ramp starts at its top, above v: a pulse left over from an
        // over-range period ends here
        #1 comp = 1'b0;
        #(tr - 1) comp = 1'b1;
        #(tf - tr) comp = 1'b0;
      end else #1 comp = 1'b0;
    end
  end
endmodule
