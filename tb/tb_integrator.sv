`timescale 1ps/1ps
// Testbench of integrator: checks that the sum of the 15 samples that follow
// a start pulse is reported with done right after the 15th sample.
module tb_integrator;
  import fpga_adc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, sv = 1'b0, done;
  width_t s = '0;
  logic [WIDTH_BITS+3:0] integral;
  int checks = 0, failures = 0;

  integrator #(.NINT(15)) dut (.clk, .rst_n, .start, .sample_valid(sv), .sample(s), .done, .integral);

  always #2000 clk = ~clk;
  initial begin #100_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int sum, k, ndone;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int e = 0; e < 50; e++) begin
      start = 1'b1; @(negedge clk); start = 1'b0;
      sum = 0; k = 0; ndone = 0;
      for (int c = 0; c < 200; c++) begin
        sv = (c % 10 == 3); s = width_t'($urandom_range(8191));
        if (sv && k < 15) begin sum += int'(s); k++; end
        @(negedge clk);
        sv = 1'b0;
        if (done) begin
          ndone++;
          checks++;
          if (int'(integral) != sum || k != 15 || c != 143) begin
            failures++; $display("e%0d exp %0d got %0d at c%0d", e, sum, integral, c);
          end
        end
      end
      checks++; if (ndone != 1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
