`timescale 1ps/1ps
// Behavioural model of the FPGA carry-chain delay line of one TDC channel.
// Not synthesizable: in the FPGA this is a chain of carry primitives whose
// tap outputs are captured by flip-flops on the TDC clock. The model keeps the
// times of the last few edges of `sig` and, at each rising clock edge, sets
// tap i to the level `sig` had c_i picoseconds earlier, c_i being the summed
// delay of the taps before it. Tap delays alternate between TAP_A_PS and
// TAP_B_PS, imitating the uneven bins of a real chain; with the defaults
// (8 ps and 24 ps) 250 taps span exactly one 4 ns clock period.
// Interface: clk, sig (asynchronous input), taps (registered on clk; bit 0 is
// the least delayed tap). The chain length and tap delays are this design's
// choice; the paper gives only the ~20 ps effective bin of its TDC.
// The edge history is updated with blocking assignments on purpose: it is
// an event-driven record of the input, not a register.
module carry_chain #(
  parameter int TAPS     = 256,
  parameter int TAP_A_PS = 8,
  parameter int TAP_B_PS = 24
) (
  input  logic            clk,
  input  logic            sig,
  output logic [TAPS-1:0] taps
);
  localparam int HIST = 8;

  longint unsigned edge_t [HIST];
  logic            edge_l [HIST];
  logic            init_l;

  initial begin
    init_l = 1'b0;
    taps   = '0;
    for (int k = 0; k < HIST; k++) begin
      edge_t[k] = 0;
      edge_l[k] = 1'b0;
    end
  end

  always @(posedge sig or negedge sig) begin
    for (int k = HIST-1; k > 0; k--) begin
      edge_t[k] = edge_t[k-1];
      edge_l[k] = edge_l[k-1];
    end
    edge_t[0] = $time;
    edge_l[0] = sig;
  end

  function automatic logic level_at(longint unsigned t);
    logic l;
    l = init_l;
    for (int k = HIST-1; k >= 0; k--)
      if (edge_t[k] != 0 && edge_t[k] <= t) l = edge_l[k];
    return l;
  endfunction

  always @(posedge clk) begin
    longint unsigned now, c;
    now = $time;
    c   = 0;
    for (int i = 0; i < TAPS; i++) begin
      taps[i] <= (c <= now) ? level_at(now - c) : init_l;
      c += (i % 2 == 0) ? longint'(TAP_A_PS) : longint'(TAP_B_PS);
    end
  end
endmodule
