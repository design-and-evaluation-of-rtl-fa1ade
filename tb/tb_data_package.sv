`timescale 1ps/1ps
// Testbench of data_package: sends pixel/position, then the time and energy
// results in either order and with random gaps, and checks the one event
// word that must come out for each, with all fields.
module tb_data_package;
  import fpga_adc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, info_v = 1'b0, t_v = 1'b0, e_v = 1'b0, ev_v;
  logic [PIX_BITS-1:0] pixel = '0;
  logic [POS_BITS-1:0] rx = '0, ry = '0;
  ts_t t = '0;
  logic [PE_BITS-1:0] en = '0;
  event_t ev;
  int checks = 0, failures = 0, nout = 0;

  data_package dut (.clk, .rst_n, .info_valid(info_v), .pixel, .raw_x(rx), .raw_y(ry),
    .t_valid(t_v), .t_corr(t), .e_valid(e_v), .energy(en), .event_valid(ev_v), .event_o(ev));

  always #2000 clk = ~clk;
  initial begin #100_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (ev_v) nout++;

  initial begin
    event_t exp_ev;
    int g1, g2, order;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      exp_ev.pixel = PIX_BITS'($urandom_range(63));
      exp_ev.raw_x = POS_BITS'($urandom); exp_ev.raw_y = POS_BITS'($urandom);
      exp_ev.time_ps = ts_t'({$urandom, $urandom});
      exp_ev.energy = PE_BITS'($urandom);
      g1 = int'($urandom_range(3)); g2 = int'($urandom_range(3)); order = int'($urandom_range(2));
      info_v = 1'b1; pixel = exp_ev.pixel; rx = exp_ev.raw_x; ry = exp_ev.raw_y;
      @(negedge clk); info_v = 1'b0; pixel = '0; rx = '0; ry = '0;
      repeat (g1) @(negedge clk);
      if (order == 2) begin
        t_v = 1'b1; t = exp_ev.time_ps; e_v = 1'b1; en = exp_ev.energy; @(negedge clk);
      end else if (order == 1) begin
        t_v = 1'b1; t = exp_ev.time_ps; @(negedge clk); t_v = 1'b0;
        checks++; if (ev_v) failures++;
        repeat (g2) @(negedge clk);
        e_v = 1'b1; en = exp_ev.energy; @(negedge clk);
      end else begin
        e_v = 1'b1; en = exp_ev.energy; @(negedge clk); e_v = 1'b0;
        checks++; if (ev_v) failures++;
        repeat (g2) @(negedge clk);
        t_v = 1'b1; t = exp_ev.time_ps; @(negedge clk);
      end
      t_v = 1'b0; e_v = 1'b0; t = '0; en = '0;
      checks++;
      if (!ev_v || ev != exp_ev) begin failures++; if (failures < 5) $display("n%0d exp %h got %h v%b", n, exp_ev, ev, ev_v); end
      repeat (2) @(negedge clk);
    end
    checks++; if (nout != 500) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
