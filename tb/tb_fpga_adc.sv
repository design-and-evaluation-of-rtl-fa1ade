`timescale 1ps/1ps
// Testbench of fpga_adc with the ramp clock generator and the analog
// front-end model: calibrates the TDC, then holds input voltages from below
// to above the ramp range and checks each sample against the pulse width the
// RC ramp implies (within 8 LSB = 62 ps), the under/over range flags, and
// the sample rate of one sample per 10 clock cycles (25 Msps at 250 MHz).
module tb_fpga_adc;
  import fpga_adc_pkg::*;
  import frontend_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, cal_start = 1'b0, cal_mode = 1'b1;
  logic ramp_clk, tick, comp, cal_busy, cal_done, sv, over, under;
  coarse_t coarse;
  width_t sample;
  int vin_uv = 0;
  int checks = 0, failures = 0, n_over = 0, n_under = 0, n_in = 0;

  ramp_clock_gen u_rg (.clk, .rst_n, .ramp_clk, .sample_tick(tick), .coarse);
  adc_frontend_model u_fe (.ramp_clk, .vin_uv, .cal_mode, .comp);
  fpga_adc dut (.clk, .rst_n, .comp, .coarse, .sample_tick(tick), .cal_start, .cal_busy, .cal_done,
    .sample_valid(sv), .sample, .over_range(over), .under_range(under));

  always #2000 clk = ~clk;
  initial begin #2_000_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // sample rate: exactly 10 cycles between samples
  int cyc = 0, last_sv = -1;
  always @(posedge clk) begin
    cyc++;
    if (sv && rst_n) begin
      if (last_sv >= 0) begin checks++; if (cyc - last_sv != CLK_DIV) failures++; end
      last_sv = cyc;
    end
  end

  initial begin
    real v, w;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk) cal_start = 1'b1; @(negedge clk) cal_start = 1'b0;
    while (cal_busy) @(negedge clk);
    cal_mode = 1'b0;
    checks++; if (!cal_done) failures++;
    for (int mv = 500; mv <= 2800; mv += 23) begin
      vin_uv = mv * 1000 + int'($urandom_range(999));
      v = real'(vin_uv) / 1.0e6;
      w = width_lsb(v);
      // skip the period in progress, then check three samples
      repeat (2) @(posedge clk iff sv);
      repeat (3) begin
        @(posedge clk iff sv); #1;
        checks++;
        if (w == -1.0) begin
          if (!under || sample != 0) begin failures++; if (failures < 10) $display("%0d uV under: got %0d o%b u%b", vin_uv, sample, over, under); end
          n_under++;
        end else if (w == -2.0) begin
          if (!over || sample != '1) begin failures++; if (failures < 10) $display("%0d uV over: got %0d o%b u%b", vin_uv, sample, over, under); end
          n_over++;
        end else begin
          n_in++;
          if (over || under || real'(sample) - w > 8.0 || w - real'(sample) > 8.0) begin
            failures++;
            if (failures < 10) $display("%0d uV: exp %f got %0d o%b u%b", vin_uv, w, sample, over, under);
          end
        end
      end
    end
    checks++; if (n_over == 0 || n_under == 0 || n_in < 100) failures++;
    $display("in range %0d, over %0d, under %0d samples", n_in, n_over, n_under);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
