`timescale 1ps/1ps
// Testbench of width_calc: per period, feeds a rise and a fall time stamp
// (or only one, or none) between ticks and checks the emitted sample:
// fall - rise, saturation to all ones when over range, 0 when under range.
module tb_width_calc;
  import fpga_adc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, tick = 1'b0, rv = 1'b0, fv = 1'b0;
  ts_t rts = '0, fts = '0;
  logic sv, over, under;
  width_t s;
  int checks = 0, failures = 0, n_over = 0, n_under = 0;

  width_calc dut (.clk, .rst_n, .sample_tick(tick), .rise_valid(rv), .rise_ts(rts),
    .fall_valid(fv), .fall_ts(fts), .sample_valid(sv), .sample(s), .over_range(over), .under_range(under));

  always #2000 clk = ~clk;
  initial begin #100_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    longint base;
    int w, kind, exp_s;
    logic exp_o, exp_u;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    base = 1000;
    // first tick to open a period
    tick = 1'b1; @(negedge clk); tick = 1'b0;
    for (int n = 0; n < 600; n++) begin
      kind = int'($urandom_range(9));
      w = int'($urandom_range(5119));
      // cycle 2: rise ; cycle 6: fall ; cycle 9: tick
      for (int c = 0; c < 10; c++) begin
        rv = 1'b0; fv = 1'b0; tick = 1'b0;
        if (c == 2 && kind != 8 && kind != 9) begin rv = 1'b1; rts = ts_t'(base * 5120 + 700); end
        if (c == 6 && kind != 7 && kind != 9) begin fv = 1'b1; fts = ts_t'(base * 5120 + 700 + w); end
        if (c == 9) tick = 1'b1;
        @(negedge clk);
      end
      rv = 1'b0; fv = 1'b0; tick = 1'b0;
      // kind 7: rise only, high at the end -> over; 8: fall only -> over
      // 9: nothing; level is low after kinds 0..6 and 8, high after 7
      exp_o = (kind == 7 || kind == 8); exp_u = 1'b0;
      exp_s = w;
      if (kind == 7 || kind == 8) exp_s = 8191;
      if (kind == 9) begin exp_s = 0; exp_u = 1'b1; end
      checks++;
      if (!sv || int'(s) != exp_s || over != exp_o || under != exp_u) begin
        failures++;
        if (failures < 10) $display("n%0d kind %0d exp %0d o%b u%b got v%b %0d o%b u%b", n, kind, exp_s, exp_o, exp_u, sv, s, over, under);
      end
      n_over += int'(over); n_under += int'(under);
      // after a rise-only period the input stays high: close it with a fall
      if (kind == 7) begin
        fv = 1'b1; fts = ts_t'(base * 5120 + 5000); @(negedge clk); fv = 1'b0;
        tick = 1'b1; @(negedge clk); tick = 1'b0;
        checks++; if (!sv || int'(s) != 8191 || !over) failures++;
      end
      base++;
    end
    checks++; if (n_over == 0 || n_under == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
