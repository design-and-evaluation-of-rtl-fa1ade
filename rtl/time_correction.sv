`timescale 1ps/1ps
// Hit-time correction: removes each pixel's propagation delay and the
// leading-edge time walk, modelled as linear in the measured energy:
//   t = t_raw - offset[pixel] - (slope * k) >>> WALK_SHIFT
// offset[pixel] (CFG_T_OFFSET, signed 16 bits, 7.8 ps LSB) and slope
// (CFG_REGS address 1, signed 16 bits) are written through cfg.
// Timing: two cycles of latency, one event per cycle.
// The paper calibrates per-pixel delays and corrects walk with a linear
// energy-time relation; table widths and the single global slope are this
// design's choices.
module time_correction
  import fpga_adc_pkg::*;
#(
  parameter int NPIX       = 64,
  parameter int WALK_SHIFT = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_wr_t             cfg,
  input  logic                in_valid,
  input  logic [PIX_BITS-1:0] pixel,
  input  ts_t                 t_raw,
  input  logic signed [ENERGY_BITS-1:0] k,
  output logic                out_valid,
  output ts_t                 t_corr
);
  logic signed [15:0] offset [NPIX];
  logic signed [15:0] slope;
  logic signed [15:0] off1;
  logic signed [ENERGY_BITS+15:0] walk1;
  ts_t t1;
  logic v1;

  wire cfg_off   = cfg.we && cfg.addr[19:16] == CFG_T_OFFSET && int'(cfg.addr[15:0]) < NPIX;
  wire cfg_slope = cfg.we && cfg.addr[19:16] == CFG_REGS && cfg.addr[15:0] == 16'd1;

  always_ff @(posedge clk) begin
    if (cfg_off) offset[cfg.addr[$clog2(NPIX)-1:0]] <= cfg.data[15:0];
    off1 <= offset[pixel[$clog2(NPIX)-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slope <= '0; walk1 <= '0; t1 <= '0; v1 <= 1'b0; out_valid <= 1'b0; t_corr <= '0;
    end else begin
      if (cfg_slope) slope <= cfg.data[15:0];
      v1    <= in_valid;
      t1    <= t_raw;
      walk1 <= (slope * k) >>> WALK_SHIFT;
      out_valid <= v1;
      t_corr    <= t1 - TS_BITS'(signed'(off1)) - TS_BITS'(walk1);
    end
  end
endmodule
