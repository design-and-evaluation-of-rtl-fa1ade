`timescale 1ps/1ps
// Crystal pixel index from the raw flood-map position.
// The flood map (512 x 512) is divided into NB x NB regions, one per crystal
// (a Voronoi division made off line). Two tables hold the division
// boundaries, each 512 entries of NB boundaries of 9 bits:
//   lut_by_x[raw X] : the NB row boundaries (in Y) valid at that X,
//   lut_by_y[raw Y] : the NB column boundaries (in X) valid at that Y.
// Boundary j is the lower edge of region j (region NB-1 ends at 511), so
// the row index is the number of row boundaries at or below raw Y, minus
// one (likewise the column); a position below boundary 0 is outside the
// crystal map (in_map = 0). pixel = row * NB + col.
// Timing: table read in the cycle after in_valid, compare in the next;
// out_valid two cycles after in_valid. Tables are written through cfg
// (regions CFG_LUT_BY_X / CFG_LUT_BY_Y, addr = {pos[8:0], boundary[3:0]}).
// Table size (512 x 8 x 9 bits each) is the paper's; which coordinate
// addresses which table and the boundary convention are this design's.
module pixel_index_lut
  import fpga_adc_pkg::*;
#(
  parameter int NB = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_wr_t             cfg,
  input  logic                in_valid,
  input  logic [POS_BITS-1:0] x,
  input  logic [POS_BITS-1:0] y,
  output logic                out_valid,
  output logic                in_map,
  output logic [PIX_BITS-1:0] pixel
);
  localparam int NPOS = 1 << POS_BITS;
  initial assert (NB <= 16 && NB * NB <= (1 << PIX_BITS)) else $error("NB too large");

  localparam int BW   = (NB > 1) ? $clog2(NB) : 1;   // boundary index width
  typedef logic [POS_BITS-1:0] bnd_t;
  bnd_t lut_by_x [NPOS][NB];
  bnd_t lut_by_y [NPOS][NB];
  bnd_t rowb [NB];
  bnd_t colb [NB];
  logic [POS_BITS-1:0] x1, y1;
  logic v1;

  wire cfg_hit_x = cfg.we && cfg.addr[19:16] == CFG_LUT_BY_X && int'(cfg.addr[3:0]) < NB;
  wire cfg_hit_y = cfg.we && cfg.addr[19:16] == CFG_LUT_BY_Y && int'(cfg.addr[3:0]) < NB;

  always_ff @(posedge clk) begin
    if (cfg_hit_x) lut_by_x[cfg.addr[12:4]][BW'(cfg.addr[3:0])] <= bnd_t'(cfg.data);
    if (cfg_hit_y) lut_by_y[cfg.addr[12:4]][BW'(cfg.addr[3:0])] <= bnd_t'(cfg.data);
    rowb <= lut_by_x[x];
    colb <= lut_by_y[y];
    x1   <= x;
    y1   <= y;
  end

  function automatic int unsigned region(input bnd_t v, input bnd_t b [NB]);
    int unsigned cnt = 0;
    for (int j = 0; j < NB; j++) if (v >= b[j]) cnt++;
    return cnt;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; out_valid <= 1'b0; in_map <= 1'b0; pixel <= '0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
      if (v1) begin
        int unsigned r, c;
        r = region(y1, rowb);
        c = region(x1, colb);
        in_map <= (r != 0) && (c != 0);
        pixel  <= PIX_BITS'((r - 1) * NB + (c - 1));
      end
    end
  end
endmodule
