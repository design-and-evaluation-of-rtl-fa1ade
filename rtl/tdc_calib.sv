`timescale 1ps/1ps
// Code-density calibration and bin-to-fine-time table of one TDC channel.
// While calibrating, every rising-edge bin reported by the encoder is counted
// in a histogram until 2**CAL_LOG2 hits have arrived. Hits that are random in
// phase fill each bin in proportion to its delay, so the time from the bin's
// centre to the sampling edge is
//     fine(p) = 512 * (sum_{j<p} h_j + h_p / 2) / 2**CAL_LOG2
// on the 9-bit scale (one LSB = clock period / 512). A sequential pass then
// writes this into the table. Until the first calibration has finished the
// table is bypassed and fine = p * 512 / WIN (a uniform chain).
// Two lookups (rise and fall bin) per cycle, one cycle of latency.
// Interface: start (pulse) begins a calibration; busy while it runs; done
// stays high after the first one. Re-running it tracks temperature drift.
// The paper asks for an online nonlinearity correction and a 9-bit result;
// the code-density method and the hit count are this design's choices.
module tdc_calib
  import fpga_adc_pkg::*;
#(
  parameter int TAPS     = 256,
  parameter int WIN      = 250,
  parameter int CAL_LOG2 = 14,
  parameter int RAW_BITS = $clog2(TAPS + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // histogram input
  input  logic                 hit_valid,
  input  logic [RAW_BITS-1:0]  hit_pos,
  // lookups
  input  logic [RAW_BITS-1:0]  pos_a,
  input  logic [RAW_BITS-1:0]  pos_b,
  output logic [FINE_BITS-1:0] fine_a,
  output logic [FINE_BITS-1:0] fine_b
);
  localparam int HW = CAL_LOG2 + 1;          // histogram counter width
  localparam int NB = WIN + 1;               // bins 0..WIN (0 never used)
  localparam int IB = $clog2(NB + 1);
  localparam int AW = $clog2(NB);             // table index width

  typedef enum logic [1:0] {IDLE, CLEAR, COLLECT, BUILD} state_t;
  state_t state;

  logic [HW-1:0]        hist  [NB];
  logic [FINE_BITS-1:0] table_q [NB];
  logic [HW-1:0]        total;
  logic [HW:0]          cum;
  logic [IB-1:0]        idx;

  assign busy = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      done  <= 1'b0;
      total <= '0;
      cum   <= '0;
      idx   <= '0;
    end else begin
      unique case (state)
        IDLE: if (start) begin state <= CLEAR; idx <= '0; end
        CLEAR: begin
          hist[idx] <= '0;
          if (int'(idx) == NB-1) begin state <= COLLECT; total <= '0; end
          else idx <= idx + 1'b1;
        end
        COLLECT: begin
          if (hit_valid && hit_pos != '0 && int'(hit_pos) <= WIN) begin
            hist[AW'(hit_pos)] <= hist[AW'(hit_pos)] + 1'b1;
            total <= total + 1'b1;
            if (total == HW'((1 << CAL_LOG2) - 1)) begin
              state <= BUILD; idx <= '0; cum <= '0;
            end
          end
        end
        BUILD: begin
          // centre of bin idx, scaled from 2**CAL_LOG2 hits to 512 steps
          table_q[idx] <= FINE_BITS'((((HW+FINE_BITS+1)'(cum) << 1) + (HW+FINE_BITS+1)'(hist[idx]))
                                     << (FINE_BITS - 1) >> CAL_LOG2);
          cum <= cum + (HW+1)'(hist[idx]);
          if (int'(idx) == NB-1) begin state <= IDLE; done <= 1'b1; end
          else idx <= idx + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  function automatic logic [FINE_BITS-1:0] uniform(input logic [RAW_BITS-1:0] p);
    logic [FINE_BITS+RAW_BITS-1:0] v;
    v = (FINE_BITS+RAW_BITS)'(p) << FINE_BITS;
    v = v / (FINE_BITS+RAW_BITS)'(WIN);
    return (v >= (1 << FINE_BITS)) ? '1 : FINE_BITS'(v);
  endfunction

  always_ff @(posedge clk) begin
    fine_a <= (done && int'(pos_a) <= WIN) ? table_q[AW'(pos_a)] : uniform(pos_a);
    fine_b <= (done && int'(pos_b) <= WIN) ? table_q[AW'(pos_b)] : uniform(pos_b);
  end
endmodule
