`timescale 1ps/1ps
// Digital integration of one ADC channel over NINT samples.
// After a start pulse it sums the next NINT samples of the 25 Msps stream
// and then pulses done with the sum. NINT = 15 gives the paper's ~600 ns
// integration time at 25 MHz (15 x 40 ns).
module integrator
  import fpga_adc_pkg::*;
#(
  parameter int NINT = 15
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   sample_valid,
  input  width_t sample,
  output logic   done,
  output logic [WIDTH_BITS+$clog2(NINT+1)-1:0] integral
);
  localparam int IW = WIDTH_BITS + $clog2(NINT + 1);
  logic          active;
  logic [IW-1:0] acc;
  logic [$clog2(NINT+1)-1:0] n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; acc <= '0; n <= '0; done <= 1'b0; integral <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        active <= 1'b1; acc <= '0; n <= '0;
      end else if (active && sample_valid) begin
        if (int'(n) == NINT-1) begin
          active   <= 1'b0;
          done     <= 1'b1;
          integral <= acc + IW'(sample);
        end
        acc <= acc + IW'(sample);
        n   <= n + 1'b1;
      end
    end
  end
endmodule
