`timescale 1ps/1ps
// Testbench of the carry_chain delay-line model: places edges at known
// times before a clock edge and checks every tap against the level the input
// had (sum of the preceding tap delays) earlier, computed here independently.
module tb_carry_chain;
  localparam int TAPS = 256;
  logic clk = 1'b0, sig = 1'b0;
  logic [TAPS-1:0] taps;
  int checks = 0, failures = 0;

  carry_chain #(.TAPS(TAPS)) dut (.clk, .sig, .taps);

  always #2000 clk = ~clk;
  initial begin #10_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int cum(input int i); // delay before tap i
    return (i / 2) * 32 + ((i % 2) ? 8 : 0);
  endfunction

  initial begin
    int age, expect_new;
    logic newlvl;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      // edge at a random age (1..3999 ps) before the next rising clock edge
      @(posedge clk);                    // now at rising edge t
      age = 1 + int'($urandom_range(3998));
      #(4000 - age);
      sig = ~sig; newlvl = sig;
      @(posedge clk); #1;                 // taps registered at this edge
      for (int i = 0; i < TAPS; i++) begin
        expect_new = (cum(i) <= age);
        checks++;
        if ((taps[i] == newlvl) != expect_new[0]) begin
          failures++;
          if (failures < 5) $display("edge %0d tap %0d age %0d: got %b", n, i, age, taps[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
