`timescale 1ps/1ps
// Anger-type position of an event: X = Ex / E and Y = Ey / E, on a grid of
// 2**POS_BITS (512) points, i.e. x = floor(512 * Ex / E) clamped to 0..511.
// Both quotients come from a restoring divider that produces one quotient
// bit per cycle (POS_BITS cycles; events are at least 600 ns apart, so a
// serial divider keeps up). Ex <= 0 gives 0, Ex >= E gives 511; E <= 0 makes
// the event invalid (ok = 0).
// Timing: in_valid while idle starts a division; out_valid pulses
// POS_BITS + 2 cycles later. Inputs arriving while busy are ignored.
// The formula is the paper's Eq. 1; the 512-point scale follows its
// 512-point flood histogram; the divider is this design's choice.
module position_calc
  import fpga_adc_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic signed [ENERGY_BITS-1:0] e,
  input  logic signed [ENERGY_BITS-1:0] ex,
  input  logic signed [ENERGY_BITS-1:0] ey,
  output logic out_valid,
  output logic ok,
  output logic [POS_BITS-1:0] x,
  output logic [POS_BITS-1:0] y
);
  localparam int RW = ENERGY_BITS + 1;
  logic                busy;
  logic [$clog2(POS_BITS+1)-1:0] n;
  logic [RW-1:0]       den, rx, ry;
  logic [POS_BITS-1:0] qx, qy;
  logic                sat_x, sat_y, zero_x, zero_y, ok_q;

  function automatic logic [ENERGY_BITS-1:0] mag(input logic signed [ENERGY_BITS-1:0] v);
    return (v < 0) ? '0 : ENERGY_BITS'(v);
  endfunction

  logic [RW-1:0] rx2, ry2;
  assign rx2 = rx << 1;
  assign ry2 = ry << 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; n <= '0; den <= '0; rx <= '0; ry <= '0; qx <= '0; qy <= '0;
      sat_x <= 1'b0; sat_y <= 1'b0; zero_x <= 1'b0; zero_y <= 1'b0; ok_q <= 1'b0;
      out_valid <= 1'b0; ok <= 1'b0; x <= '0; y <= '0;
    end else begin
      out_valid <= 1'b0;
      if (!busy) begin
        if (in_valid) begin
          busy   <= 1'b1;
          n      <= '0;
          ok_q   <= (e > 0);
          den    <= RW'(mag(e));
          rx     <= RW'(mag(ex));
          ry     <= RW'(mag(ey));
          zero_x <= (ex <= 0);
          zero_y <= (ey <= 0);
          sat_x  <= (ex >= e);
          sat_y  <= (ey >= e);
        end
      end else if (int'(n) < POS_BITS) begin
        n  <= n + 1'b1;
        if (rx2 >= den) begin rx <= rx2 - den; qx <= {qx[POS_BITS-2:0], 1'b1}; end
        else            begin rx <= rx2;       qx <= {qx[POS_BITS-2:0], 1'b0}; end
        if (ry2 >= den) begin ry <= ry2 - den; qy <= {qy[POS_BITS-2:0], 1'b1}; end
        else            begin ry <= ry2;       qy <= {qy[POS_BITS-2:0], 1'b0}; end
      end else begin
        busy      <= 1'b0;
        out_valid <= 1'b1;
        ok        <= ok_q;
        x <= !ok_q || zero_x ? '0 : sat_x ? '1 : qx;
        y <= !ok_q || zero_y ? '0 : sat_y ? '1 : qy;
      end
    end
  end
endmodule
