`timescale 1ps/1ps
// Testbench of tdc_encoder: builds tap vectors holding one or two edges at
// known positions and checks the reported rise/fall positions, the window
// limit (edges beyond WIN are not reported) and the one-cycle latency.
module tb_tdc_encoder;
  import fpga_adc_pkg::*;
  localparam int TAPS = 256, WIN = 250, RB = 9;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [TAPS-1:0] taps;
  coarse_t coarse_i, coarse_o;
  logic rv, fv;
  logic [RB-1:0] rp, fp;
  int checks = 0, failures = 0;

  tdc_encoder #(.TAPS(TAPS), .WIN(WIN)) dut (.clk, .rst_n, .taps, .coarse_i,
    .rise_valid(rv), .rise_pos(rp), .fall_valid(fv), .fall_pos(fp), .coarse_o);

  always #2000 clk = ~clk;
  initial begin #100_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check(input logic erv, input int erp, input logic efv, input int efp, input int c);
    @(posedge clk); #1;
    checks++;
    if (rv !== erv || (erv && int'(rp) != erp) || fv !== efv || (efv && int'(fp) != efp) || int'(coarse_o) != c) begin
      failures++;
      $display("exp r%b %0d f%b %0d c%0d got r%b %0d f%b %0d c%0d", erv, erp, efv, efp, c, rv, rp, fv, fp, coarse_o);
    end
  endtask

  initial begin
    int p, q, lvl;
    taps = '0; coarse_i = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      p = 1 + int'($urandom_range(TAPS - 2));
      lvl = int'($urandom_range(1));
      @(negedge clk);
      coarse_i = coarse_t'(n);
      if (n % 4 == 3) begin
        // pulse: level flips at p (older) and back at q < p (younger)
        q = 1 + int'($urandom_range(p > 1 ? p - 2 : 0));
        if (q >= p) q = p - 1;
        for (int i = 0; i < TAPS; i++) taps[i] = (i < q) ? lvl[0] : (i < p) ? !lvl[0] : lvl[0];
        if (q < 1) begin
          for (int i = 0; i < TAPS; i++) taps[i] = (i < p) ? !lvl[0] : lvl[0];
          check(!lvl[0] && p <= WIN, p, lvl[0] && p <= WIN, p, n);
        end else
          // youngest transition at q has polarity lvl, the older one at p the other
          check((lvl[0] && q <= WIN) || (!lvl[0] && p <= WIN), lvl[0] ? q : p,
                (!lvl[0] && q <= WIN) || (lvl[0] && p <= WIN), lvl[0] ? p : q, n);
      end else begin
        for (int i = 0; i < TAPS; i++) taps[i] = (i < p) ? lvl[0] : !lvl[0];
        check(lvl[0] && p <= WIN, p, !lvl[0] && p <= WIN, p, n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
