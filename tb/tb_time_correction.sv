`timescale 1ps/1ps
// Testbench of time_correction: random per-pixel offsets and a walk slope;
// checks t_raw - offset - floor(slope * k / 256) for random events, and the
// 2-cycle latency.
module tb_time_correction;
  import fpga_adc_pkg::*;
  localparam int NPIX = 64;
  logic clk = 1'b0, rst_n = 1'b0, iv = 1'b0, ov;
  cfg_wr_t cfg = '0;
  logic [PIX_BITS-1:0] pixel = '0;
  logic signed [ENERGY_BITS-1:0] k = '0;
  ts_t t_raw = '0, t_corr;
  int checks = 0, failures = 0;
  int off [NPIX];

  time_correction #(.NPIX(NPIX)) dut (.clk, .rst_n, .cfg, .in_valid(iv), .pixel, .t_raw, .k,
    .out_valid(ov), .t_corr);

  always #2000 clk = ~clk;
  initial begin #100_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic wr(input logic [3:0] region, input int a, input int d);
    cfg.we = 1'b1; cfg.addr = {region, 16'(a)}; cfg.data = 32'(d);
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  initial begin
    int slope, pix, kk;
    longint tr, expt;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < NPIX; i++) begin off[i] = int'($urandom_range(20000)) - 10000; wr(CFG_T_OFFSET, i, off[i]); end
    for (int s = 0; s < 4; s++) begin
      slope = int'($urandom_range(4000)) - 2000;
      wr(CFG_REGS, 1, slope);
      for (int n = 0; n < 300; n++) begin
        pix = int'($urandom_range(NPIX - 1));
        kk = int'($urandom_range(131071));
        tr = longint'({$urandom, $urandom}) & ((longint'(1) << 39) - 1);
        pixel = PIX_BITS'(pix); k = ENERGY_BITS'(kk); t_raw = ts_t'(tr);
        iv = 1'b1; @(negedge clk); iv = 1'b0;
        checks++; if (ov) failures++;
        @(negedge clk);
        expt = tr - longint'(off[pix]) - longint'($floor(real'(slope) * real'(kk) / 256.0));
        checks++;
        if (!ov || t_corr != ts_t'(expt)) begin failures++; if (failures < 8) $display("exp %0d got %0d", expt, t_corr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
