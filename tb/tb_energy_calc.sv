`timescale 1ps/1ps
// Testbench of energy_calc: random integrals and baseline sums; checks
// integral - 15 * base_sum / 8 (floor) on all three channels.
module tb_energy_calc;
  import fpga_adc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, iv = 1'b0, ov;
  logic [16:0] integral [3];
  logic [15:0] base_sum [3];
  logic signed [ENERGY_BITS-1:0] energy [3];
  int checks = 0, failures = 0;

  energy_calc #(.NCH(3), .NINT(15), .NPTS(8)) dut (.clk, .rst_n, .in_valid(iv), .integral, .base_sum,
    .out_valid(ov), .energy);

  always #2000 clk = ~clk;
  initial begin #100_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int e;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      for (int c = 0; c < 3; c++) begin
        integral[c] = 17'($urandom_range(122865));
        base_sum[c] = 16'($urandom_range(65535));
      end
      iv = 1'b1; @(negedge clk); iv = 1'b0;
      for (int c = 0; c < 3; c++) begin
        e = int'($floor((real'(integral[c]) * 8.0 - 15.0 * real'(base_sum[c])) / 8.0));
        checks++;
        if (!ov || int'(energy[c]) != e) begin failures++; if (failures < 5) $display("exp %0d got %0d", e, energy[c]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
