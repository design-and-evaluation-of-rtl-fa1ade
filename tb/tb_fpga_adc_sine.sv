`timescale 1ps/1ps
// Dynamic test of one FPGA-ADC channel with sine inputs near 1 MHz and
// 5 MHz of nearly full swing (1.65 V +- 0.85 V, i.e. 0.8 V to 2.5 V). The
// frequencies are coherent with the 25 Msps sampling: k cycles in N = 1000
// samples, k = 41 (1.025 MHz) and k = 199 (4.975 MHz), both prime to N so
// every phase is visited once.
// Checks:
//  - every sample against the pulse width the RC-ramp model gives for the
//    input at the start of its ramp period (within 8 LSB = 62 ps);
//  - one sample every 10 clock cycles;
//  - the effective number of bits. A sine of the known frequency is fitted
//    to the width stream (with coherent sampling the least-squares fit is
//    a = 2/N sum y cos, b = 2/N sum y sin, c = mean) and
//    ENOB = (SINAD_dB - 1.76) / 6.02. The ENOB of the channel's samples
//    must be within 0.3 bit of that of the ideal model widths: the
//    digitisation (TDC and calibration) may add only a little to the error
//    that the exponential shape of the ramp already causes. The widths are
//    used uncorrected, as in the design.
module tb_fpga_adc_sine;
  import fpga_adc_pkg::*;
  import frontend_pkg::*;

  localparam int  N   = 1000;
  localparam int  KF [2] = '{41, 199};
  localparam real PI  = 3.14159265358979;

  logic clk = 1'b0, rst_n = 1'b0, cal_start = 1'b0, cal_mode = 1'b1;
  logic ramp_clk, tick, comp, cal_busy, cal_done, sv, over, under;
  coarse_t coarse;
  width_t sample;
  int vin_uv = 1650000;
  int checks = 0, failures = 0;

  ramp_clock_gen u_rg (.clk, .rst_n, .ramp_clk, .sample_tick(tick), .coarse);
  adc_frontend_model u_fe (.ramp_clk, .vin_uv, .cal_mode, .comp);
  fpga_adc dut (.clk, .rst_n, .comp, .coarse, .sample_tick(tick), .cal_start, .cal_busy, .cal_done,
    .sample_valid(sv), .sample, .over_range(over), .under_range(under));

  always #2000 clk = ~clk;
  initial begin
    #1_000_000_000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input: sine of the current frequency, updated between clock edges
  real f_hz = 0.0, t0 = 0.0;
  bit  run = 1'b0;
  always @(negedge clk)
    if (run) vin_uv = int'((1.65 + 0.85 * $sin(2.0 * PI * f_hz * (real'($time) - t0) * 1.0e-12)) * 1.0e6);
    else     vin_uv = 1650000;

  // model width of each ramp period, with the period's start time
  real    w_model [$];
  longint t_start [$];
  always @(negedge ramp_clk) if (run) begin
    w_model.push_back(width_lsb(real'(vin_uv) / 1.0e6));
    t_start.push_back(longint'($time));
  end

  // sample rate
  int cyc = 0, last_sv = -1;
  always @(posedge clk) begin
    cyc++;
    if (sv && rst_n) begin
      if (last_sv >= 0) begin checks++; if (cyc - last_sv != CLK_DIV) failures++; end
      last_sv = cyc;
    end
  end

  function automatic real enob(input real y [N], input int k);
    real a = 0.0, b = 0.0, c = 0.0, ps, pn, r;
    for (int n = 0; n < N; n++) begin
      a += y[n] * $cos(2.0 * PI * real'(k * n) / real'(N));
      b += y[n] * $sin(2.0 * PI * real'(k * n) / real'(N));
      c += y[n];
    end
    a = 2.0 * a / real'(N); b = 2.0 * b / real'(N); c = c / real'(N);
    ps = (a * a + b * b) / 2.0;
    pn = 0.0;
    for (int n = 0; n < N; n++) begin
      r = y[n] - c - a * $cos(2.0 * PI * real'(k * n) / real'(N)) - b * $sin(2.0 * PI * real'(k * n) / real'(N));
      pn += r * r;
    end
    pn = pn / real'(N);
    return (10.0 * $log10(ps / pn) - 1.76) / 6.02;
  endfunction

  initial begin
    real y_dut [N], y_mod [N], e_dut, e_mod;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk) cal_start = 1'b1; @(negedge clk) cal_start = 1'b0;
    while (cal_busy) @(negedge clk);
    cal_mode = 1'b0;
    checks++; if (!cal_done) failures++;
    repeat (40) @(posedge clk);

    for (int fi = 0; fi < 2; fi++) begin
      int n, bad;
      n = 0; bad = 0;
      f_hz = 25.0e6 * real'(KF[fi]) / real'(N);
      w_model.delete(); t_start.delete();
      @(negedge ramp_clk);
      t0 = real'($time);
      run = 1'b1;
      while (n < N) begin
        @(posedge clk iff sv); #1;
        // the sample closes the period that started 40 to 80 ns ago
        while (t_start.size() > 0 && longint'($time) - t_start[0] >= 80000) begin
          void'(t_start.pop_front()); void'(w_model.pop_front());
        end
        if (t_start.size() == 0 || longint'($time) - t_start[0] < 40000) continue;
        y_mod[n] = w_model.pop_front();
        void'(t_start.pop_front());
        y_dut[n] = real'(sample);
        checks++;
        if (y_mod[n] < 0.0 || over || under ||
            y_dut[n] - y_mod[n] > 8.0 || y_mod[n] - y_dut[n] > 8.0) begin
          failures++; bad++;
          if (bad < 5) $display("f %0.3f MHz sample %0d: got %0d expected %f o%b u%b",
                                f_hz / 1.0e6, n, sample, y_mod[n], over, under);
        end
        n++;
      end
      run = 1'b0;
      e_dut = enob(y_dut, KF[fi]);
      e_mod = enob(y_mod, KF[fi]);
      $display("f %0.3f MHz: ENOB of samples %0.2f bits, of the ideal ramp model %0.2f bits",
               f_hz / 1.0e6, e_dut, e_mod);
      checks++;
      if (e_mod - e_dut > 0.3 || e_dut - e_mod > 0.3) failures++;
      repeat (100) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
