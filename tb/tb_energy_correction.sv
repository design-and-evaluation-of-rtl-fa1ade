`timescale 1ps/1ps
// Testbench of energy_correction: loads per-pixel b/N coefficients, the
// 16384-entry -ln table (generated here with $ln) and N, then checks random
// (pixel, k) events against p = -N ln(1 - b k / N) evaluated in real
// arithmetic (within 1 % + 2 counts), the clip flag, and the 4-cycle latency.
module tb_energy_correction;
  import fpga_adc_pkg::*;
  localparam int NPIX = 64, COEF_SHIFT = 28, LN_FRAC = 10, NCELL = 14410;
  logic clk = 1'b0, rst_n = 1'b0, iv = 1'b0, ov, clipped;
  cfg_wr_t cfg = '0;
  logic [PIX_BITS-1:0] pixel = '0;
  logic signed [ENERGY_BITS-1:0] k = '0;
  logic [PE_BITS-1:0] energy;
  int checks = 0, failures = 0, n_clip = 0;
  int coef [NPIX];

  energy_correction #(.NPIX(NPIX), .COEF_SHIFT(COEF_SHIFT), .LN_FRAC(LN_FRAC)) dut (
    .clk, .rst_n, .cfg, .in_valid(iv), .pixel, .k, .out_valid(ov), .clipped, .energy);

  always #2000 clk = ~clk;
  initial begin #900_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic real absr(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic wr(input logic [3:0] region, input int a, input int d);
    cfg.we = 1'b1; cfg.addr = {region, 16'(a)}; cfg.data = 32'(d);
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  initial begin
    real bn, u, p_ref;
    int kk, pix, lat;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int x = 1; x < 16384; x++) wr(CFG_LN_TABLE, x, int'($floor(-$ln(real'(x) / 16384.0) * 1024.0 + 0.5)));
    wr(CFG_LN_TABLE, 0, 16383);
    for (int i = 0; i < NPIX; i++) begin
      // b/N so that b*k/N reaches 0.3 .. 1.2 at k = 100000 (some events clip)
      coef[i] = int'((0.3 + 0.9 * real'(i) / NPIX) / 100000.0 * 268435456.0);
      wr(CFG_PIX_COEF, i, coef[i]);
    end
    wr(CFG_REGS, 0, NCELL);
    for (int n = 0; n < 2000; n++) begin
      pix = int'($urandom_range(NPIX - 1));
      kk = int'($urandom_range(131071)) - (n % 50 == 0 ? 131072 : 0);
      pixel = PIX_BITS'(pix); k = ENERGY_BITS'(kk);
      iv = 1'b1; @(negedge clk); iv = 1'b0;
      lat = 1;
      while (!ov && lat < 20) begin @(negedge clk); lat++; end
      bn = real'(coef[pix]) / 268435456.0;
      u = 1.0 - bn * real'(kk < 0 ? 0 : kk);
      checks++;
      if (((longint'(coef[pix]) * longint'(kk < 0 ? 0 : kk)) >>> 14) >= 16383) begin
        if (!clipped) failures++;
        n_clip++;
      end else begin
        p_ref = -real'(NCELL) * $ln(u);
        if (lat != 4 || clipped || absr(real'(energy) - p_ref) > 0.01 * p_ref + 2.0 + real'(NCELL) / 1024.0 + 1.5 * real'(NCELL) / (u * 16384.0)) begin
          failures++;
          if (failures < 8) $display("pix %0d k %0d exp %f got %0d lat %0d", pix, kk, p_ref, energy, lat);
        end
      end
    end
    checks++; if (n_clip == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
