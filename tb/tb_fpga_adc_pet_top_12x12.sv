`timescale 1ps/1ps
// End-to-end testbench of fpga_adc_pet_top configured for a light-sharing
// detector: 12 x 12 crystals on the 8 x 8 SiPM array (NB = 12, 144-entry
// pixel tables). Same procedure as the 8 x 8 test (tables loaded through the
// configuration port, TDC calibration, then gamma events compared with a
// model of the analog chain), but the light of a crystal is shared between
// the two SiPM rows/columns nearest to its centre: a crystal centred at u
// (in SiPM pitches, u = (i + 0.5) * 8/12 - 0.5, clamped to 0..7) sees the
// gain (1 - w) * g[floor(u)] + w * g[floor(u) + 1], w = u - floor(u), g being
// the gradient gains 1 ... 0.125 of the multiplexing network. The 12
// resulting flood positions per axis set the boundary tables.
// Mechanisms counted (each must occur): calibration, accepted events, hits
// ignored during the dead time, events outside the crystal map (dropped),
// over-range ADC samples.
module tb_fpga_adc_pet_top_12x12;
  import fpga_adc_pkg::*;
  import frontend_pkg::*;

  localparam int  NCELL = 14410;
  localparam real GAIN [8] = '{1.0, 0.77, 0.59, 0.5, 0.4, 0.33, 0.25, 0.125};
  localparam int  NEV = 40;
  localparam int  NB = 12;
  localparam int  NPIX = NB * NB;

  logic clk = 1'b0, rst_n = 1'b0, hit_i = 1'b0, cal_mode = 1'b0;
  logic comp_i [3];
  logic ramp_clk_o, cal_busy_o, cal_done_o, event_valid_o;
  cfg_wr_t cfg = '0;
  event_t event_o;
  int vin_uv [3];

  int checks = 0, failures = 0;
  int n_accept = 0, n_ignored = 0, n_outside = 0, n_over = 0, n_cal = 0;

  fpga_adc_pet_top #(.NB(NB)) dut (.clk, .rst_n, .hit_i, .comp_i, .ramp_clk_o, .cfg,
    .cal_busy_o, .cal_done_o, .event_valid_o, .event_o);

  for (genvar c = 0; c < 3; c++) begin : g_fe
    adc_frontend_model u_fe (.ramp_clk(ramp_clk_o), .vin_uv(vin_uv[c]), .cal_mode, .comp(comp_i[c]));
  end

  always #2000 clk = ~clk;
  initial begin
    #3_000_000_000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- analog stimulus ----------------
  real ev_t = -1.0e12, ev_a = 0.0, ev_gx = 0.0, ev_gy = 0.0;
  localparam real TAU_S = 170000.0;    // shaper time constant, ps
  function automatic real shape(input real t);
    real u;
    if (t <= 0.0) return 0.0;
    u = t / TAU_S;
    return (u * u * u / 27.0) * $exp(3.0 - u);
  endfunction

  always @(negedge clk) begin
    real s, t;
    t = real'($time);
    s = ev_a * shape(t - ev_t);
    vin_uv[0] = int'((0.9 + s) * 1.0e6);
    vin_uv[1] = int'((0.9 + s * ev_gx) * 1.0e6);
    vin_uv[2] = int'((0.9 + s * ev_gy) * 1.0e6);
  end

  // per ramp period: the width each channel should measure
  localparam int NPER = 20000;
  real wlog [3][NPER];
  int  period = 0;
  function automatic real wideal(input int uv);
    real w;
    w = width_lsb(real'(uv) / 1.0e6);
    return (w == -1.0) ? 0.0 : (w == -2.0) ? 8191.0 : w;
  endfunction
  always @(negedge ramp_clk_o) if (rst_n) begin
    if (period < NPER) for (int c = 0; c < 3; c++) wlog[c][period] = wideal(vin_uv[c]);
    period++;
  end

  // ---------------- DUT observation ----------------
  event_t evq [$];
  always @(posedge clk) begin
    if (event_valid_o) evq.push_back(event_o);
    if (dut.u_delay.hit_ignored) n_ignored++;
    for (int c = 0; c < 3; c++) if (dut.s_valid[c] && dut.over_r[c]) n_over++;
  end

  // ---------------- configuration ----------------
  task automatic wr(input logic [3:0] region, input int a, input int d);
    @(negedge clk);
    cfg.we = 1'b1; cfg.addr = {region, 16'(a)}; cfg.data = 32'(d);
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  int coef [NPIX], toff [NPIX];
  real geff [NB];       // light-shared gain of crystal row/column i
  int bnd [NB];         // lower edges of the NB regions (same for rows and columns)
  int slope = 3;

  // expected flood position of a gain at a reference amplitude, from the
  // same integration the design performs (used only to place boundaries)
  function automatic real ref_pos(input real g);
    real e, ex, v;
    e = 0.0; ex = 0.0;
    for (int k = 8; k <= 22; k++) begin
      v = 0.8 * shape(real'(k) * 40000.0 - 26000.0);
      e  += wideal(int'((0.9 + v) * 1.0e6)) - wideal(900000);
      ex += wideal(int'((0.9 + v * g) * 1.0e6)) - wideal(900000);
    end
    return 512.0 * ex / e;
  endfunction

  function automatic int region_of(input int v);
    int r = -1;
    for (int j = 0; j < NB; j++) if (v >= bnd[j]) r = j;
    return r;
  endfunction

  // ---------------- main sequence ----------------
  longint t_first_edge;
  initial begin
    real pos [NB];
    for (int c = 0; c < 3; c++) vin_uv[c] = 900000;
    for (int i = 0; i < NB; i++) begin
      real u, w;
      int f;
      u = (real'(i) + 0.5) * 8.0 / real'(NB) - 0.5;
      if (u < 0.0) u = 0.0;
      if (u > 7.0) u = 7.0;
      f = int'($floor(u));
      if (f > 6) f = 6;
      w = u - real'(f);
      geff[i] = (1.0 - w) * GAIN[f] + w * GAIN[f + 1];
    end
    // region m (ascending position) belongs to crystal index NB - 1 - m
    for (int m = 0; m < NB; m++) pos[m] = ref_pos(geff[NB - 1 - m]);
    bnd[0] = int'(pos[0] / 2.0);
    for (int m = 1; m < NB; m++) bnd[m] = int'((pos[m - 1] + pos[m]) / 2.0);
    for (int m = 0; m < NB; m++) $display("boundary %0d: %0d", m, bnd[m]);

    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    @(posedge clk) t_first_edge = longint'($time);

    for (int x = 1; x < 16384; x++) wr(CFG_LN_TABLE, x, int'($floor(-$ln(real'(x) / 16384.0) * 1024.0 + 0.5)));
    for (int i = 0; i < NPIX; i++) begin
      coef[i] = 2500 + 20 * i;                       // b/N * 2**28
      toff[i] = int'($urandom_range(2000)) - 1000;   // 7.8 ps units
      wr(CFG_PIX_COEF, i, coef[i]);
      wr(CFG_T_OFFSET, i, toff[i]);
    end
    wr(CFG_REGS, 0, NCELL);
    wr(CFG_REGS, 1, slope);
    for (int p = 0; p < 512; p++)
      for (int j = 0; j < NB; j++) begin
        wr(CFG_LUT_BY_X, (p << 4) | j, bnd[j]);
        wr(CFG_LUT_BY_Y, (p << 4) | j, bnd[j]);
      end

    // TDC calibration with phase-random edges on all four channels
    cal_mode = 1'b1;
    wr(CFG_TDC_CAL, 0, 0);
    @(negedge clk);
    while (cal_busy_o) begin #($urandom_range(9000, 2100)); hit_i = ~hit_i; end
    cal_mode = 1'b0; hit_i = 1'b0;
    checks++; if (!cal_done_o) failures++; else n_cal++;
    #2000000;             // longer than the dead time of an event the calibration edges started
    // the calibration edges on hit_i started events; forget them
    evq.delete(); n_ignored = 0; n_over = 0;

    for (int n = 0; n < NEV; n++) begin
      int j, row, col, kind, t_off;
      real a, e_exp [3], xs, ys, k_exp, p_exp, t_exp, tol;
      bit in_map_exp, ambiguous;
      // kind 0..6 normal, 7 pile-up hit during the event, 8 large (over range),
      // 9 Ex = 0 (position outside the crystal map)
      kind = (n < 4) ? 0 : int'($urandom_range(9));
      row = int'($urandom_range(NB - 1)); col = int'($urandom_range(NB - 1));
      a = (kind == 8) ? 1.9 : 0.6 + 0.4 * real'($urandom_range(1000)) / 1000.0;
      @(negedge ramp_clk_o);
      j = period - 1;
      t_off = 24000 + int'($urandom_range(3998)) + 1;
      #(t_off);
      ev_t = real'($time); ev_a = a;
      ev_gx = (kind == 9) ? 0.0 : geff[col]; ev_gy = geff[row];
      hit_i = 1'b1; #20000 hit_i = 1'b0;
      if (kind == 7) begin #200000 hit_i = 1'b1; #20000 hit_i = 1'b0; end
      #3000000;
      // expected energies
      for (int c = 0; c < 3; c++) begin
        real si, sb;
        si = 0.0; sb = 0.0;
        for (int k = j + 8; k <= j + 22; k++) si += wlog[c][k];
        for (int k = j - 8; k <= j - 1; k++) sb += wlog[c][k];
        e_exp[c] = si - 15.0 * sb / 8.0;
      end
      xs = 512.0 * e_exp[1] / e_exp[0]; ys = 512.0 * e_exp[2] / e_exp[0];
      if (xs > 511.0) xs = 511.0;
      if (ys > 511.0) ys = 511.0;
      if (xs < 0.0) xs = 0.0;
      if (ys < 0.0) ys = 0.0;
      in_map_exp = region_of(int'(xs)) >= 0 && region_of(int'(ys)) >= 0;
      ambiguous = 1'b0;
      for (int m = 0; m < NB; m++)
        if ((xs - real'(bnd[m])) < 4.0 && (real'(bnd[m]) - xs) < 4.0 ||
            (ys - real'(bnd[m])) < 4.0 && (real'(bnd[m]) - ys) < 4.0) ambiguous = 1'b1;
      if (!in_map_exp) begin
        checks++;
        if (evq.size() != 0) begin failures++; $display("ev %0d: outside the map but sent", n); end
        else n_outside++;
        evq.delete();
        continue;
      end
      checks++;
      if (evq.size() != 1) begin
        failures++; $display("ev %0d: %0d event words", n, evq.size()); evq.delete(); continue;
      end
      n_accept++;
      begin
        event_t ev;
        int pix_exp;
        ev = evq.pop_front();
        // position
        checks++;
        if (real'(ev.raw_x) - xs > 4.0 || xs - real'(ev.raw_x) > 4.0 ||
            real'(ev.raw_y) - ys > 4.0 || ys - real'(ev.raw_y) > 4.0) begin
          failures++; $display("ev %0d: pos %0d,%0d expected %f,%f", n, ev.raw_x, ev.raw_y, xs, ys);
        end
        // pixel
        pix_exp = region_of(int'(ys)) * NB + region_of(int'(xs));
        if (!ambiguous) begin
          checks++;
          if (int'(ev.pixel) != pix_exp || (kind != 8 && pix_exp != (NB - 1 - row) * NB + (NB - 1 - col))) begin
            failures++; $display("ev %0d: pixel %0d expected %0d (row %0d col %0d)", n, ev.pixel, pix_exp, row, col);
          end
        end
        // corrected energy: p = -N ln(1 - b k / N)
        k_exp = e_exp[0];
        p_exp = -real'(NCELL) * $ln(1.0 - real'(coef[ev.pixel]) / 268435456.0 * k_exp);
        // allowance: 1 % plus what a 0.5 % error of k becomes through the log
        tol = 0.01 * p_exp + 20.0 + real'(NCELL) * (real'(coef[ev.pixel]) / 268435456.0) * 0.005 * k_exp
              / (1.0 - real'(coef[ev.pixel]) / 268435456.0 * k_exp);
        checks++;
        if (real'(ev.energy) - p_exp > tol || p_exp - real'(ev.energy) > tol) begin
          failures++; $display("ev %0d: energy %0d expected %f (k %f)", n, ev.energy, p_exp, k_exp);
        end
        // corrected time, 7.8125 ps units
        t_exp = (ev_t - real'(t_first_edge) + 4000.0) / LSB_PS - real'(toff[ev.pixel])
                - real'(slope) * k_exp / 256.0;
        checks++;
        if (real'(ev.time_ps) - t_exp > 12.0 || t_exp - real'(ev.time_ps) > 12.0) begin
          failures++; $display("ev %0d: time %0d expected %f", n, ev.time_ps, t_exp);
        end
        if (n < 6) $display("ev %0d: E %0d (k %0.0f) pixel %0d pos %0d,%0d time %0d", n, ev.energy, k_exp, ev.pixel, ev.raw_x, ev.raw_y, ev.time_ps);
      end
    end
    $display("calibrations %0d, accepted %0d, ignored hits %0d, outside map %0d, over-range samples %0d",
             n_cal, n_accept, n_ignored, n_outside, n_over);
    checks++; if (n_cal == 0 || n_accept == 0 || n_ignored == 0 || n_outside == 0 || n_over == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
