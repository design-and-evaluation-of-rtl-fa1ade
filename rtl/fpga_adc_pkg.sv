`timescale 1ps/1ps
// Shared constants and types of the FPGA-ADC PET front end.
//
// One clock, the TDC clock (250 MHz, 4 ns period), runs all logic. A time
// stamp is {coarse count, 9-bit fine part}: one LSB is 4 ns / 512 = 7.8125 ps,
// the "normalised 9-bit" TDC bin of the design. The 25 MHz sampling ramp is
// this clock divided by ten, so one ADC sample spans 5120 time-stamp LSBs and
// a pulse width fits in 13 bits.
//
// Numbers taken from the paper: 9-bit fine time, 25 Msps, >12-bit width,
// 8-point baseline, 8-period start delay, 512-point position grid,
// 8 boundaries of 9 bits, 14-bit correction tables. The 250 MHz TDC clock
// (512 x 7.8 ps = 4 ns), the delay-line length, the counter widths and the
// configuration address map are this design's own choices.
package fpga_adc_pkg;

  localparam int FINE_BITS   = 9;             // normalised TDC fine time
  localparam int COARSE_BITS = 31;            // free-running 250 MHz counter
  localparam int TS_BITS     = COARSE_BITS + FINE_BITS;
  localparam int WIDTH_BITS  = 13;            // pulse width, 7.8 ps LSB
  localparam int CLK_DIV     = 10;            // 250 MHz / 25 MHz
  localparam int POS_BITS    = 9;             // 512-point flood grid
  localparam int PIX_BITS    = 8;             // room for up to 16 x 16 pixels
  localparam int ENERGY_BITS = 18;            // signed baseline-corrected integral
  localparam int PE_BITS     = 20;            // corrected energy (photon scale)
  localparam int LUT_BITS    = 14;            // width of the correction tables

  typedef logic [TS_BITS-1:0]     ts_t;
  typedef logic [COARSE_BITS-1:0] coarse_t;
  typedef logic [WIDTH_BITS-1:0]  width_t;

  // Configuration write port. addr[19:16] selects a table, the rest the entry.
  typedef struct packed {
    logic        we;
    logic [19:0] addr;
    logic [31:0] data;
  } cfg_wr_t;

  localparam logic [3:0] CFG_LUT_BY_X  = 4'd0; // {raw X(9), boundary(4)} : row boundaries
  localparam logic [3:0] CFG_LUT_BY_Y  = 4'd1; // {raw Y(9), boundary(4)} : column boundaries
  localparam logic [3:0] CFG_PIX_COEF  = 4'd2; // pixel -> b/N coefficient, 14 bits
  localparam logic [3:0] CFG_LN_TABLE  = 4'd3; // x(14) -> -ln(x), 14 bits
  localparam logic [3:0] CFG_T_OFFSET  = 4'd4; // pixel -> time offset, signed 16 bits
  localparam logic [3:0] CFG_REGS      = 4'd5; // 0: N cells, 1: walk slope
  localparam logic [3:0] CFG_TDC_CAL   = 4'd6; // any write starts TDC calibration

  // One detected event as sent to the data acquisition.
  typedef struct packed {
    ts_t                   time_ps;   // corrected hit time, 7.8125 ps LSB
    logic [PE_BITS-1:0]    energy;    // saturation-corrected energy
    logic [PIX_BITS-1:0]   pixel;     // crystal pixel index
    logic [POS_BITS-1:0]   raw_x;     // flood-map position
    logic [POS_BITS-1:0]   raw_y;
  } event_t;

endpackage
