`timescale 1ps/1ps
// Baseline subtraction for the three energy channels E, Ex and Ey.
// energy = integral - NINT * baseline, with baseline = base_sum / NPTS.
// Computed as (NPTS * integral - NINT * base_sum) / NPTS, arithmetic shift
// (NPTS a power of two), so the fraction of the mean is kept until the end.
// The result is signed (noise can make it negative). One cycle latency.
module energy_calc
  import fpga_adc_pkg::*;
#(
  parameter int NCH  = 3,
  parameter int NINT = 15,
  parameter int NPTS = 8,
  parameter int IW   = WIDTH_BITS + $clog2(NINT + 1),
  parameter int SB   = WIDTH_BITS + $clog2(NPTS)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic [IW-1:0] integral [NCH],
  input  logic [SB-1:0] base_sum [NCH],
  output logic out_valid,
  output logic signed [ENERGY_BITS-1:0] energy [NCH]
);
  localparam int CW = IW + SB + 2;
  initial assert ((1 << $clog2(NPTS)) == NPTS) else $error("NPTS must be a power of two");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int c = 0; c < NCH; c++) energy[c] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int c = 0; c < NCH; c++) begin
          logic signed [CW-1:0] d;
          d = (signed'(CW'(integral[c])) <<< $clog2(NPTS)) - signed'(CW'(NINT)) * signed'(CW'(base_sum[c]));
          d = d >>> $clog2(NPTS);
          energy[c] <= ENERGY_BITS'(d);
        end
    end
  end
endmodule
