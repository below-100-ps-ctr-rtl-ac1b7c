// mode_mux: builds the hit line of one channel for the TDC.
//
// The TDC of a channel sees a single binary line. What is put on it depends
// on the transmission mode:
//  * high energy resolution: a shortened time pulse followed by the energy
//    pulse. The time pulse only serves for its rising edge (ToA), so it is
//    cut at the next 40 MHz clock edge (`t_seen` samples the time pulse); the
//    energy pulse that follows gives the energy width.
//  * high speed and single pulse: the time pulse alone (ToA and its
//    non-linear ToT).
//  * hybrid: the full time pulse and the energy pulse.
// The line is held low when the channel is disabled or the chip is in
// analog mode (TDC off). Time and energy pulses arrive as consecutive pulses,
// as in the paper's figure of the high energy resolution mode; cutting the
// time pulse at a 40 MHz edge is this design's way of making its falling
// edge "arbitrary".
`timescale 1ps/1ps
module mode_mux
  import fastic_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  tx_mode_e mode,
  input  logic     time_sig,
  input  logic     energy_sig,
  output logic     hit
);
  logic t_seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t_seen <= 1'b0;
    else        t_seen <= time_sig;
  end

  always_comb begin
    unique case (mode)
      MODE_HER: hit = (time_sig & ~t_seen) | energy_sig;
      MODE_HYB: hit = time_sig | energy_sig;
      default:  hit = time_sig;
    endcase
    hit = hit & en;
  end
endmodule
