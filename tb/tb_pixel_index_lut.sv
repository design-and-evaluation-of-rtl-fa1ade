`timescale 1ps/1ps
// Testbench of pixel_index_lut: writes boundary tables whose boundaries
// wander with the other coordinate (as a Voronoi map does), then checks the
// pixel index and in_map flag for random positions against a reference
// computed here from the same boundary formula, and the 2-cycle latency.
module tb_pixel_index_lut;
  import fpga_adc_pkg::*;
  localparam int NB = 8;
  logic clk = 1'b0, rst_n = 1'b0, iv = 1'b0, ov, in_map;
  cfg_wr_t cfg = '0;
  logic [POS_BITS-1:0] x = '0, y = '0;
  logic [PIX_BITS-1:0] pixel;
  int checks = 0, failures = 0, n_out = 0;

  pixel_index_lut #(.NB(NB)) dut (.clk, .rst_n, .cfg, .in_valid(iv), .x, .y, .out_valid(ov), .in_map, .pixel);

  always #2000 clk = ~clk;
  initial begin #400_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // lower edge of region j at position p: 60*j + 20 plus a wobble depending on p
  function automatic int bnd(input int j, input int p, input int tab);
    return 60 * j + 20 + ((p * (3 + tab) + j * 7) % 17) - 8;
  endfunction

  task automatic wr(input logic [3:0] region, input int a, input int d);
    @(negedge clk);
    cfg.we = 1'b1; cfg.addr = {region, 16'(a)}; cfg.data = 32'(d);
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  initial begin
    int r, c, ex_pix, ex_in;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int p = 0; p < 512; p++)
      for (int j = 0; j < NB; j++) begin
        wr(CFG_LUT_BY_X, (p << 4) | j, bnd(j, p, 0));
        wr(CFG_LUT_BY_Y, (p << 4) | j, bnd(j, p, 1));
      end
    for (int n = 0; n < 3000; n++) begin
      x = POS_BITS'($urandom_range(511)); y = POS_BITS'($urandom_range(511));
      iv = 1'b1; @(negedge clk); iv = 1'b0; @(negedge clk);
      r = 0; c = 0;
      for (int j = 0; j < NB; j++) begin
        if (int'(y) >= bnd(j, int'(x), 0)) r++;
        if (int'(x) >= bnd(j, int'(y), 1)) c++;
      end
      ex_in = (r > 0 && c > 0);
      ex_pix = (r - 1) * NB + (c - 1);
      checks++;
      if (!ov || in_map != ex_in[0] || (ex_in != 0 && int'(pixel) != ex_pix)) begin
        failures++;
        if (failures < 8) $display("x %0d y %0d exp %0d/%0d got %0d/%b v%b", x, y, ex_pix, ex_in, pixel, in_map, ov);
      end
      n_out += int'(!in_map);
    end
    checks++; if (n_out == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
