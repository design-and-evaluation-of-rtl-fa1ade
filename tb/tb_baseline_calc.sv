`timescale 1ps/1ps
// Testbench of baseline_calc: random sample stream, onsets at random times;
// checks that base_sum equals the sum of the 8 samples before each onset,
// kept in a reference queue here.
module tb_baseline_calc;
  import fpga_adc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, sv = 1'b0, onset = 1'b0;
  width_t s = '0;
  logic [WIDTH_BITS+2:0] bsum;
  int checks = 0, failures = 0;
  int hist [$];

  baseline_calc #(.NPTS(8)) dut (.clk, .rst_n, .sample_valid(sv), .sample(s), .onset, .base_sum(bsum));

  always #2000 clk = ~clk;
  initial begin #100_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int exp_sum;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 8; i++) hist.push_back(0);
    for (int n = 0; n < 3000; n++) begin
      sv = (n % 10 == 0); s = width_t'($urandom_range(8191));
      onset = (n > 20 && $urandom_range(40) == 0);
      exp_sum = 0;
      foreach (hist[i]) exp_sum += hist[i];
      @(negedge clk);
      if (sv) begin hist.push_back(int'(s)); void'(hist.pop_front()); end
      if (onset) begin
        checks++;
        if (int'(bsum) != exp_sum) begin failures++; $display("n%0d exp %0d got %0d", n, exp_sum, bsum); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
