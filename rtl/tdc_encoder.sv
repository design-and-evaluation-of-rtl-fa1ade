`timescale 1ps/1ps
// Edge encoder of a carry-chain TDC.
// The sampled chain holds, from tap 0 (youngest) upward, the recent history
// of the input. A rising edge appears as taps 0..p-1 high and tap p low; a
// falling edge as the opposite. The encoder looks for the youngest transition
// of each polarity with 1 <= p <= WIN, WIN being the number of taps that one
// clock period spans, so every edge is reported in exactly one clock cycle:
// one period later it sits beyond tap WIN. p counts the taps the edge has
// passed, i.e. how long before the sampling clock edge it happened.
// Timing: taps are the flip-flop outputs of cycle n; results are registered
// and appear in cycle n+1 with coarse_o = the coarse count of cycle n.
// The search scheme (priority search for the first transition, fixed window)
// is this design's choice; the paper only names a carry-chain TDC.
module tdc_encoder
  import fpga_adc_pkg::*;
#(
  parameter int TAPS = 256,
  parameter int WIN  = 250,
  parameter int RAW_BITS = $clog2(TAPS + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [TAPS-1:0]     taps,
  input  coarse_t             coarse_i,
  output logic                rise_valid,
  output logic [RAW_BITS-1:0] rise_pos,
  output logic                fall_valid,
  output logic [RAW_BITS-1:0] fall_pos,
  output coarse_t             coarse_o
);
  initial assert (WIN < TAPS) else $error("tdc_encoder: WIN must be below TAPS");

  logic                rv, fv;
  logic [RAW_BITS-1:0] rp, fp;

  always_comb begin
    rv = 1'b0; fv = 1'b0; rp = '0; fp = '0;
    for (int i = WIN; i >= 1; i--) begin
      if (taps[i-1] && !taps[i]) begin rv = 1'b1; rp = RAW_BITS'(i); end
      if (!taps[i-1] && taps[i]) begin fv = 1'b1; fp = RAW_BITS'(i); end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rise_valid <= 1'b0; fall_valid <= 1'b0;
      rise_pos   <= '0;   fall_pos   <= '0;
      coarse_o   <= '0;
    end else begin
      rise_valid <= rv; rise_pos <= rp;
      fall_valid <= fv; fall_pos <= fp;
      coarse_o   <= coarse_i;
    end
  end
endmodule
