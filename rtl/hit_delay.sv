`timescale 1ps/1ps
// Event trigger: accepts a hit, delays it by DELAY sampling periods and
// starts the integration, then holds off further hits until the integration
// is done (the dead time).
// On an accepted hit it pulses onset (for the baseline), latches the hit's
// time stamp and counts DELAY sample_valid pulses; with the last one it
// pulses start. Hits arriving while busy are ignored and flagged on
// hit_ignored. The delay of 8 periods is the paper's; ignoring hits during
// the event is this design's reading of its dead-time figure.
module hit_delay
  import fpga_adc_pkg::*;
#(
  parameter int DELAY = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic hit_valid,
  input  ts_t  hit_ts,
  input  logic sample_valid,
  input  logic integ_done,
  output logic onset,
  output logic start,
  output logic busy,
  output logic hit_ignored,
  output ts_t  event_ts
);
  typedef enum logic [1:0] {IDLE, WAIT, INTEG} state_t;
  state_t state;
  logic [$clog2(DELAY+1)-1:0] cnt;

  assign busy = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; cnt <= '0; onset <= 1'b0; start <= 1'b0;
      hit_ignored <= 1'b0; event_ts <= '0;
    end else begin
      onset <= 1'b0; start <= 1'b0; hit_ignored <= 1'b0;
      unique case (state)
        IDLE: if (hit_valid) begin
          onset <= 1'b1; event_ts <= hit_ts; cnt <= '0; state <= WAIT;
        end
        WAIT: begin
          hit_ignored <= hit_valid;
          if (sample_valid) begin
            if (int'(cnt) == DELAY-1) begin start <= 1'b1; state <= INTEG; end
            else cnt <= cnt + 1'b1;
          end
        end
        INTEG: begin
          hit_ignored <= hit_valid;
          if (integ_done) state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
