`timescale 1ps/1ps
// FPGA digital signal processor of a PET detector front end built on
// FPGA-ADCs: one hit-timing TDC and three ramp-compare ADCs (E, Ex, Ey),
// followed by the event processing chain.
//
// Data flow: the hit (OR of four discriminators) is time-stamped by a TDC
// channel and, after an 8-period delay, starts the integration of 15 samples
// (~600 ns) of each ADC stream; the mean of the 8 samples before the hit is
// subtracted. X = Ex/E and Y = Ey/E locate the event on a 512 x 512 flood map,
// the boundary tables give the crystal pixel, and per-pixel tables correct
// the energy (SiPM saturation) and the time (delay and walk). Each event
// leaves as one event_t word.
//
// Ports: clk is the 250 MHz TDC clock (from the FPGA PLL); ramp_clk_o, the
// 25 MHz clock that the external series resistor filters into the shared
// sampling ramp; comp_i[0..2], the LVDS comparator outputs of E, Ex, Ey;
// hit_i, the timing trigger; cfg, a write port for all tables and registers
// (map in fpga_adc_pkg; a write to CFG_TDC_CAL runs the code-density
// calibration of all four TDC channels, cal_busy_o while it runs).
// Events outside the crystal map or with E <= 0 are dropped.
// Status signals with no consumer here (ADC over/under range, the hit
// TDC's falling edge, hit_delay busy/hit_ignored, energy clipping) are left
// unconnected on purpose; the lint reports them as unused.
module fpga_adc_pet_top
  import fpga_adc_pkg::*;
#(
  parameter int TAPS     = 256,
  parameter int WIN      = 250,
  parameter int CAL_LOG2 = 14,
  parameter int NB       = 8,
  parameter int NINT     = 15,
  parameter int NPTS     = 8,
  parameter int DELAY    = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    hit_i,
  input  logic    comp_i [3],
  output logic    ramp_clk_o,
  input  cfg_wr_t cfg,
  output logic    cal_busy_o,
  output logic    cal_done_o,
  output logic    event_valid_o,
  output event_t  event_o
);
  localparam int NPIX = NB * NB;
  localparam int IW   = WIDTH_BITS + $clog2(NINT + 1);
  localparam int SB   = WIDTH_BITS + $clog2(NPTS);

  // ---------------- clocks, ramp, calibration control ----------------
  logic    sample_tick;
  coarse_t coarse;
  ramp_clock_gen u_ramp (.clk, .rst_n, .ramp_clk(ramp_clk_o), .sample_tick, .coarse);

  wire cal_start = cfg.we && cfg.addr[19:16] == CFG_TDC_CAL;
  logic [3:0] cal_busy, cal_done;
  assign cal_busy_o = |cal_busy;
  assign cal_done_o = &cal_done;

  // ---------------- hit TDC ----------------
  logic hit_valid, hit_fall_valid;
  ts_t  hit_ts, hit_fall_ts;
  tdc_channel #(.TAPS(TAPS), .WIN(WIN), .CAL_LOG2(CAL_LOG2)) u_hit_tdc (
    .clk, .rst_n, .sig(hit_i), .coarse, .cal_start,
    .cal_busy(cal_busy[3]), .cal_done(cal_done[3]),
    .rise_valid(hit_valid), .rise_ts(hit_ts),
    .fall_valid(hit_fall_valid), .fall_ts(hit_fall_ts));

  // ---------------- three FPGA-ADCs, baselines, integrators ----------------
  logic    s_valid [3];
  width_t  sample  [3];
  logic    over_r  [3], under_r [3];
  logic [SB-1:0] base_sum [3];
  logic [IW-1:0] integral [3];
  logic          integ_done [3];
  logic onset, start, busy, hit_ignored;
  ts_t  event_ts;

  for (genvar c = 0; c < 3; c++) begin : g_ch
    fpga_adc #(.TAPS(TAPS), .WIN(WIN), .CAL_LOG2(CAL_LOG2)) u_adc (
      .clk, .rst_n, .comp(comp_i[c]), .coarse, .sample_tick, .cal_start,
      .cal_busy(cal_busy[c]), .cal_done(cal_done[c]),
      .sample_valid(s_valid[c]), .sample(sample[c]),
      .over_range(over_r[c]), .under_range(under_r[c]));

    baseline_calc #(.NPTS(NPTS)) u_base (
      .clk, .rst_n, .sample_valid(s_valid[c]), .sample(sample[c]), .onset,
      .base_sum(base_sum[c]));

    integrator #(.NINT(NINT)) u_int (
      .clk, .rst_n, .start, .sample_valid(s_valid[c]), .sample(sample[c]),
      .done(integ_done[c]), .integral(integral[c]));
  end

  hit_delay #(.DELAY(DELAY)) u_delay (
    .clk, .rst_n, .hit_valid, .hit_ts, .sample_valid(s_valid[0]),
    .integ_done(integ_done[0]), .onset, .start, .busy, .hit_ignored, .event_ts);

  // ---------------- energy and position ----------------
  logic ec_valid;
  logic signed [ENERGY_BITS-1:0] energy [3];
  energy_calc #(.NCH(3), .NINT(NINT), .NPTS(NPTS)) u_ecalc (
    .clk, .rst_n, .in_valid(integ_done[0]), .integral, .base_sum,
    .out_valid(ec_valid), .energy);

  // hold the event's energy and hit time while it is processed
  logic signed [ENERGY_BITS-1:0] ev_e;
  ts_t ev_t;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin ev_e <= '0; ev_t <= '0; end
    else if (ec_valid) begin ev_e <= energy[0]; ev_t <= event_ts; end
  end

  logic pos_valid, pos_ok;
  logic [POS_BITS-1:0] pos_x, pos_y;
  position_calc u_pos (
    .clk, .rst_n, .in_valid(ec_valid), .e(energy[0]), .ex(energy[1]), .ey(energy[2]),
    .out_valid(pos_valid), .ok(pos_ok), .x(pos_x), .y(pos_y));

  // ---------------- pixel index and corrections ----------------
  logic pix_valid, in_map;
  logic [PIX_BITS-1:0] pixel;
  pixel_index_lut #(.NB(NB)) u_pix (
    .clk, .rst_n, .cfg, .in_valid(pos_valid && pos_ok), .x(pos_x), .y(pos_y),
    .out_valid(pix_valid), .in_map, .pixel);

  wire accept = pix_valid && in_map;

  logic ecor_valid, clipped;
  logic [PE_BITS-1:0] ecor;
  energy_correction #(.NPIX(NPIX)) u_ecor (
    .clk, .rst_n, .cfg, .in_valid(accept), .pixel, .k(ev_e),
    .out_valid(ecor_valid), .clipped, .energy(ecor));

  logic tcor_valid;
  ts_t  tcor;
  time_correction #(.NPIX(NPIX)) u_tcor (
    .clk, .rst_n, .cfg, .in_valid(accept), .pixel, .t_raw(ev_t), .k(ev_e),
    .out_valid(tcor_valid), .t_corr(tcor));

  // the position may change before the packer is done; hold it
  logic [POS_BITS-1:0] px_q, py_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin px_q <= '0; py_q <= '0; end
    else if (pos_valid) begin px_q <= pos_x; py_q <= pos_y; end
  end

  data_package u_pack (
    .clk, .rst_n, .info_valid(accept), .pixel, .raw_x(px_q), .raw_y(py_q),
    .t_valid(tcor_valid), .t_corr(tcor), .e_valid(ecor_valid), .energy(ecor),
    .event_valid(event_valid_o), .event_o);
endmodule
