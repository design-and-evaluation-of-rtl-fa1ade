`timescale 1ps/1ps
// Testbench of ramp_clock_gen: checks the 25 MHz ramp clock (10 TDC cycles,
// 5 low then 5 high), one sample_tick per period 3 cycles after the ramp
// clock falls, and the coarse counter stepping by one per cycle.
module tb_ramp_clock_gen;
  import fpga_adc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, ramp_clk, sample_tick;
  coarse_t coarse;
  int checks = 0, failures = 0;

  ramp_clock_gen dut (.clk, .rst_n, .ramp_clk, .sample_tick, .coarse);

  always #2000 clk = ~clk;
  initial begin #10_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int last_fall, last_rise, last_tick, cyc, nfall, ntick;
    logic prev_r;
    coarse_t prev_c;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // out of reset the ramp clock is low at phase 0, as if it had just fallen
    last_fall = 0; last_rise = -1; last_tick = -1; cyc = 0; nfall = 0; ntick = 0;
    prev_r = ramp_clk; prev_c = coarse;
    repeat (400) begin
      @(negedge clk); cyc++;
      checks++; if (coarse != prev_c + 1'b1) failures++;
      prev_c = coarse;
      if (prev_r && !ramp_clk) begin
        if (last_fall >= 0) begin checks++; if (cyc - last_fall != CLK_DIV) failures++; end
        if (last_rise >= 0) begin checks++; if (cyc - last_rise != CLK_DIV/2) failures++; end
        last_fall = cyc; nfall++;
      end
      if (!prev_r && ramp_clk) begin
        if (last_fall >= 0) begin checks++; if (cyc - last_fall != CLK_DIV/2) failures++; end
        last_rise = cyc;
      end
      if (sample_tick) begin
        checks++; if (last_fall < 0 || cyc - last_fall != 3) begin failures++; $display("tick at %0d fall %0d", cyc, last_fall); end
        ntick++;
      end
      prev_r = ramp_clk;
    end
    checks++; if (nfall < 39 || ntick < 39) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
