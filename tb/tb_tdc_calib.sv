`timescale 1ps/1ps
// Testbench of tdc_calib: checks the uniform mapping before calibration,
// feeds 2**CAL_LOG2 random bin hits (plus out-of-window ones that must be
// ignored), then checks every table entry against the code-density formula
// computed here from the testbench's own histogram, and the busy/done flags.
module tb_tdc_calib;
  import fpga_adc_pkg::*;
  localparam int TAPS = 256, WIN = 250, CAL_LOG2 = 12, RB = 9;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic hv = 1'b0;
  logic [RB-1:0] hp = '0, pa = '0, pb = '0;
  logic [FINE_BITS-1:0] fa, fb;
  int checks = 0, failures = 0;
  int hist [WIN+1];

  tdc_calib #(.TAPS(TAPS), .WIN(WIN), .CAL_LOG2(CAL_LOG2)) dut (
    .clk, .rst_n, .start, .busy, .done, .hit_valid(hv), .hit_pos(hp),
    .pos_a(pa), .pos_b(pb), .fine_a(fa), .fine_b(fb));

  always #2000 clk = ~clk;
  initial begin #200_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic look(input int p, input int ea, input int q, input int eb);
    @(negedge clk); pa = RB'(p); pb = RB'(q);
    @(negedge clk);
    checks++;
    if (int'(fa) != ea || int'(fb) != eb) begin
      failures++;
      if (failures < 10) $display("bin %0d/%0d: exp %0d/%0d got %0d/%0d", p, q, ea, eb, fa, fb);
    end
  endtask

  initial begin
    int n, b, cum, cyc;
    for (int i = 0; i <= WIN; i++) hist[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    checks++; if (done || busy) failures++;
    for (int p = 1; p <= WIN; p += 7) look(p, (p * 512) / WIN > 511 ? 511 : (p * 512) / WIN, WIN + 1 - p, ((WIN + 1 - p) * 512) / WIN > 511 ? 511 : ((WIN + 1 - p) * 512) / WIN);
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    checks++; if (!busy) failures++;
    n = 0; cyc = 0;
    while (n < (1 << CAL_LOG2)) begin
      @(negedge clk);
      cyc++;
      hv = $urandom_range(3) != 0;
      // uneven bins: even bins three times as likely as odd ones
      b = 1 + int'($urandom_range(WIN - 1));
      if (b % 2 == 1 && $urandom_range(2) != 0) b = (b == WIN) ? b - 1 : b + 1;
      if ($urandom_range(15) == 0) b = (b % 2) ? 0 : WIN + 1 + int'($urandom_range(4));
      hp = RB'(b);
      if (hv && b >= 1 && b <= WIN && cyc > WIN + 2) begin hist[b]++; n++; end
      if (cyc <= WIN + 2) hv = 1'b0;   // histogram is being cleared
    end
    @(negedge clk); hv = 1'b0;
    while (busy) @(negedge clk);
    checks++; if (!done) failures++;
    cum = 0;
    for (int p = 1; p <= WIN; p++) begin
      int e;
      e = ((2 * cum + hist[p]) * 256) >> CAL_LOG2;
      look(p, e, p, e);
      cum += hist[p];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
