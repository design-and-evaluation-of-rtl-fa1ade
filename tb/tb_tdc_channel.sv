`timescale 1ps/1ps
// Testbench of tdc_channel: drives edges at random, known times, runs the
// code-density calibration, then checks each reported rising and falling
// time stamp against the true edge time. A time stamp ts corresponds to
// ts * 7.8125 ps - 2000 ps here (the coarse counter is 1 after the first
// clock edge at 2 ns). Checks: every edge reported once, |error| < 60 ps (half a 24 ps bin plus the
// statistical error of a 2**14-hit histogram, sigma ~16 ps mid-chain),
// mean error within 4 ps after calibration.
module tb_tdc_channel;
  import fpga_adc_pkg::*;
  localparam int CAL_LOG2 = 14;
  logic clk = 1'b0, rst_n = 1'b0, sig = 1'b0, cal_start = 1'b0, cal_busy, cal_done;
  coarse_t coarse = '0;
  logic rv, fv;
  ts_t rts, fts;
  int checks = 0, failures = 0;
  longint rq [$], fq [$];
  logic measuring = 1'b0;
  real err_sum = 0.0;
  int nerr = 0;

  tdc_channel #(.CAL_LOG2(CAL_LOG2)) dut (.clk, .rst_n, .sig, .coarse, .cal_start, .cal_busy, .cal_done,
    .rise_valid(rv), .rise_ts(rts), .fall_valid(fv), .fall_ts(fts));

  always #2000 clk = ~clk;
  always @(posedge clk) coarse <= coarse + 1'b1;
  initial begin #2_000_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input ts_t ts, input longint tq [$], input string what);
    real err;
    if (tq.size() == 0) begin failures++; $display("%s: unexpected", what); return; end
    err = real'(ts) * 7.8125 - 2000.0 - real'(tq[0]);
    checks++;
    if (err > 60.0 || err < -60.0) begin failures++; if (failures < 10) $display("%s err %f ps", what, err); end
    err_sum += err; nerr++;
  endtask

  always @(posedge clk) if (measuring) begin
    if (rv) begin chk(rts, rq, "rise"); void'(rq.pop_front()); end
    if (fv) begin chk(fts, fq, "fall"); void'(fq.pop_front()); end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk) cal_start = 1'b1; @(negedge clk) cal_start = 1'b0;
    while (cal_busy) begin #($urandom_range(9000, 2100)); sig = ~sig; end
    checks++; if (!cal_done) failures++;
    #20000;
    measuring = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      int d;
      d = int'($urandom_range(9000, 2100));
      if (($time + d) % 4000 == 0) d++;
      #(d);
      sig = ~sig;
      if (sig) rq.push_back(longint'($time)); else fq.push_back(longint'($time));
    end
    #40000;
    checks++; if (rq.size() != 0 || fq.size() != 0) begin failures++; $display("%0d/%0d edges not reported", rq.size(), fq.size()); end
    checks++;
    if (err_sum / nerr > 4.0 || err_sum / nerr < -4.0) begin failures++; $display("mean error %f ps", err_sum / nerr); end
    $display("mean time-stamp error %f ps over %0d edges", err_sum / nerr, nerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
