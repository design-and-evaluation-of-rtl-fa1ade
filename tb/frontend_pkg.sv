`timescale 1ps/1ps
// Analog reference model shared by the testbenches: the RC-filtered sampling
// ramp and the comparator crossing times it implies.
// The 25 MHz clock (3.3 V swing) charges the pad capacitance Cp = 180 pF
// through Rs = 90 ohm (tau = 16.2 ns) for 20 ns and discharges it for 20 ns.
// In steady state the ramp swings between VMIN = a*VMAX and
// VMAX = VDD / (1 + a), a = exp(-20 ns / tau): about 0.74 V to 2.56 V.
// With the comparator high while the input exceeds the ramp, the pulse
// starts tau*ln(VMAX/v) after the ramp starts to fall and ends
// 20 ns + tau*ln((VDD-VMIN)/(VDD-v)) after it.
package frontend_pkg;
  localparam real VDD     = 3.3;
  localparam real TAU_PS  = 16200.0;
  localparam real HALF_PS = 20000.0;
  localparam real LSB_PS  = 4000.0 / 512.0;

  function automatic real vmax();
    return VDD / (1.0 + $exp(-HALF_PS / TAU_PS));
  endfunction
  function automatic real vmin();
    return vmax() * $exp(-HALF_PS / TAU_PS);
  endfunction
  function automatic real t_rise_ps(input real v);
    return TAU_PS * $ln(vmax() / v);
  endfunction
  function automatic real t_fall_ps(input real v);
    return HALF_PS + TAU_PS * $ln((VDD - vmin()) / (VDD - v));
  endfunction
  // expected pulse width in 7.8125 ps LSBs; -1 under range, -2 over range
  function automatic real width_lsb(input real v);
    if (v <= vmin()) return -1.0;
    if (v >= vmax()) return -2.0;
    return (t_fall_ps(v) - t_rise_ps(v)) / LSB_PS;
  endfunction
endpackage
