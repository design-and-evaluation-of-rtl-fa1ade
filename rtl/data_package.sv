`timescale 1ps/1ps
// Event packer: gathers the corrected time, the corrected energy, the pixel
// index and the raw position of one event into a single event_t word for
// the data acquisition. The time and energy results may arrive in any order
// (their pipelines differ in length); the word is sent, with a one-cycle
// event_valid, once both are in. info_valid (pixel and position) must come
// first, and a new event may not start before the previous one was sent.
// The field list follows the paper ("energy, position and time information
// are packed"); the word layout is this design's.
module data_package
  import fpga_adc_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                info_valid,
  input  logic [PIX_BITS-1:0] pixel,
  input  logic [POS_BITS-1:0] raw_x,
  input  logic [POS_BITS-1:0] raw_y,
  input  logic                t_valid,
  input  ts_t                 t_corr,
  input  logic                e_valid,
  input  logic [PE_BITS-1:0]  energy,
  output logic                event_valid,
  output event_t              event_o
);
  event_t acc;
  logic   have_t, have_e;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; have_t <= 1'b0; have_e <= 1'b0; event_valid <= 1'b0; event_o <= '0;
    end else begin
      event_valid <= 1'b0;
      if (info_valid) begin
        acc.pixel <= pixel; acc.raw_x <= raw_x; acc.raw_y <= raw_y;
        have_t <= 1'b0; have_e <= 1'b0;
      end
      if (t_valid) begin acc.time_ps <= t_corr; have_t <= 1'b1; end
      if (e_valid) begin acc.energy  <= energy; have_e <= 1'b1; end
      if ((have_t || t_valid) && (have_e || e_valid) && !info_valid) begin
        event_valid     <= 1'b1;
        event_o         <= acc;
        if (t_valid) event_o.time_ps <= t_corr;
        if (e_valid) event_o.energy  <= energy;
        have_t <= 1'b0; have_e <= 1'b0;
      end
    end
  end
endmodule
