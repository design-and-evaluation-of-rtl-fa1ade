`timescale 1ps/1ps
// SiPM saturation correction of the event energy, p = -N * ln(1 - b*k/N).
// k is the measured (baseline-corrected) energy integral, b the pixel's
// gain coefficient and N the number of microcells of an SiPM pixel.
// Tables, written through cfg:
//   coef[pixel]  (CFG_PIX_COEF, 14 bits)  c = round(b / N * 2**COEF_SHIFT)
//   ln_tab[x]    (CFG_LN_TABLE, 2**14 x 14 bits) = round(-ln(x / 2**14) * 2**LN_FRAC)
//   N            (CFG_REGS address 0, 16 bits)
// Pipeline (one event per cycle, 4 cycles latency):
//   1 read c;  2 u = 1 - b*k/N as a 14-bit fraction x = 2**14 - (c*k >> (COEF_SHIFT-14)),
//   clipped to 1..2**14-1 (clipped flags b*k/N >= 1); 3 read -ln(x);
//   4 p = N * (-ln x) >> LN_FRAC.
// The formula, the 64-entry pixel table, the 14-bit widths and the ln table
// addressed by a 14-bit x follow the paper. Storing b/N per pixel and the
// fixed-point scales (COEF_SHIFT, LN_FRAC) are this design's choices.
module energy_correction
  import fpga_adc_pkg::*;
#(
  parameter int NPIX       = 64,
  parameter int COEF_SHIFT = 28,
  parameter int LN_FRAC    = 10
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_wr_t             cfg,
  input  logic                in_valid,
  input  logic [PIX_BITS-1:0] pixel,
  input  logic signed [ENERGY_BITS-1:0] k,
  output logic                out_valid,
  output logic                clipped,
  output logic [PE_BITS-1:0]  energy
);
  localparam int LN_N = 1 << LUT_BITS;
  localparam int KW   = ENERGY_BITS - 1;           // k >= 0
  localparam int PW   = LUT_BITS + KW;

  logic [LUT_BITS-1:0] coef   [NPIX];
  logic [LUT_BITS-1:0] ln_tab [LN_N];
  logic [15:0]         n_cells;

  logic [LUT_BITS-1:0] c1, lnv3;
  logic [KW-1:0]       k1;
  logic [LUT_BITS-1:0] x2;
  logic                v1, v2, v3, clip2, clip3;
  logic [PW-1:0]       frac;

  wire cfg_coef = cfg.we && cfg.addr[19:16] == CFG_PIX_COEF && int'(cfg.addr[15:0]) < NPIX;
  wire cfg_ln   = cfg.we && cfg.addr[19:16] == CFG_LN_TABLE;
  wire cfg_n    = cfg.we && cfg.addr[19:16] == CFG_REGS && cfg.addr[15:0] == 16'd0;

  always_ff @(posedge clk) begin
    if (cfg_coef) coef[cfg.addr[$clog2(NPIX)-1:0]] <= cfg.data[LUT_BITS-1:0];
    if (cfg_ln)   ln_tab[cfg.addr[LUT_BITS-1:0]]   <= cfg.data[LUT_BITS-1:0];
    c1   <= coef[pixel[$clog2(NPIX)-1:0]];
    lnv3 <= ln_tab[x2];
  end

  assign frac = (PW'(c1) * PW'(k1)) >> (COEF_SHIFT - LUT_BITS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_cells <= '0;
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0; k1 <= '0; x2 <= '0;
      clip2 <= 1'b0; clip3 <= 1'b0;
      out_valid <= 1'b0; clipped <= 1'b0; energy <= '0;
    end else begin
      if (cfg_n) n_cells <= cfg.data[15:0];
      v1 <= in_valid; v2 <= v1; v3 <= v2; out_valid <= v3;
      k1 <= (k < 0) ? '0 : KW'(k);
      // stage 2: x = 1 - b*k/N on 14 fractional bits
      clip2 <= (frac >= PW'(LN_N - 1));
      if (frac >= PW'(LN_N - 1)) x2 <= LUT_BITS'(1);
      else if (frac == '0)       x2 <= LUT_BITS'(LN_N - 1);
      else                       x2 <= LUT_BITS'(PW'(LN_N) - frac);
      clip3 <= clip2;
      // stage 4: p = N * (-ln x)
      clipped <= clip3;
      energy  <= PE_BITS'((32'(n_cells) * 32'(lnv3)) >> LN_FRAC);
    end
  end
endmodule
