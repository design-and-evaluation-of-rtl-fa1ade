`timescale 1ps/1ps
// Testbench of position_calc: random E, Ex, Ey (including Ex > E, negative
// values and E <= 0); checks x = floor(512 Ex / E) clamped to 0..511, the
// same for y, the ok flag and the POS_BITS + 2 cycle latency.
module tb_position_calc;
  import fpga_adc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, iv = 1'b0, ov, ok;
  logic signed [ENERGY_BITS-1:0] e = '0, ex = '0, ey = '0;
  logic [POS_BITS-1:0] x, y;
  int checks = 0, failures = 0;

  position_calc dut (.clk, .rst_n, .in_valid(iv), .e, .ex, .ey, .out_valid(ov), .ok, .x, .y);

  always #2000 clk = ~clk;
  initial begin #100_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int ref_pos(input int n, input int d);
    longint q;
    if (d <= 0 || n <= 0) return 0;
    q = (longint'(n) * 512) / d;
    return (q > 511) ? 511 : int'(q);
  endfunction

  initial begin
    int ee, xx, yy, lat;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 1000; n++) begin
      ee = int'($urandom_range(131071)) - ((n % 10 == 0) ? 131072 : 0);
      xx = int'($urandom_range(131071)) % ((ee > 0 ? ee : 1000) + 2000) - 1000;
      yy = int'($urandom_range(131071)) % ((ee > 0 ? ee : 1000) + 2000) - 1000;
      e = ENERGY_BITS'(ee); ex = ENERGY_BITS'(xx); ey = ENERGY_BITS'(yy);
      iv = 1'b1; @(negedge clk); iv = 1'b0;
      lat = 1;
      while (!ov && lat < 40) begin @(negedge clk); lat++; end
      checks++;
      if (lat != POS_BITS + 2 || ok != (ee > 0) || int'(x) != ref_pos(xx, ee) || int'(y) != ref_pos(yy, ee)) begin
        failures++;
        if (failures < 8) $display("E %0d Ex %0d Ey %0d: got x %0d y %0d ok %b lat %0d", ee, xx, yy, x, y, ok, lat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
