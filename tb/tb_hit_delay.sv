`timescale 1ps/1ps
// Testbench of hit_delay: checks that an accepted hit gives onset at once
// and start exactly 8 sample periods later, that its time stamp is kept,
// and that hits during the event (until integ_done) are ignored.
module tb_hit_delay;
  import fpga_adc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, hv = 1'b0, sv = 1'b0, done = 1'b0;
  ts_t hts = '0, ets;
  logic onset, start, busy, ign;
  int checks = 0, failures = 0, n_ign = 0;

  hit_delay #(.DELAY(8)) dut (.clk, .rst_n, .hit_valid(hv), .hit_ts(hts), .sample_valid(sv),
    .integ_done(done), .onset, .start, .busy, .hit_ignored(ign), .event_ts(ets));

  always #2000 clk = ~clk;
  initial begin #100_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int cyc = 0;
  task automatic step();
    @(negedge clk);
    cyc++;
    sv = (cyc % 10 == 0);
    n_ign += int'(ign);
  endtask

  initial begin
    int t_hit, nsv;
    ts_t stamp;
    repeat (2) @(posedge clk);
    step(); rst_n = 1'b1;
    for (int e = 0; e < 40; e++) begin
      repeat ($urandom_range(30)) step();
      stamp = ts_t'({$urandom, $urandom});
      hv = 1'b1; hts = stamp; step(); hv = 1'b0; hts = '0;
      checks++; if (!onset || !busy || ets != stamp) failures++;
      nsv = 0;
      // count sample periods until start
      while (!start) begin
        if (sv) nsv++;
        if ($urandom_range(20) == 0) begin hv = 1'b1; hts = '1; end
        step(); hv = 1'b0;
      end
      checks++; if (nsv != 8) begin failures++; $display("start after %0d periods", nsv); end
      // integration: a stray hit, then done
      repeat (20) step();
      hv = 1'b1; hts = '1; step(); hv = 1'b0;
      checks++; if (!ign || onset) failures++;
      done = 1'b1; step(); done = 1'b0;
      checks++; if (busy || ets != stamp) failures++;
    end
    checks++; if (n_ign < 40) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
