// pulse_processor: turns an edge pair into a timestamp and a pulse width.
//
// ToA = {coarse, fast, fine} of the rising edge: 12-bit coarse counter,
// Gray-decoded 5-bit VCO-period count and 5-bit fine code, i.e. 22 bits of
// 24.4 ps (1024 bins per 25 ns).
// ToT = falling time - rising time, both counted in half VCO periods
// (390 ps): {coarse, fast, half} for the falling edge and {coarse, fast,
// fine MSB} for the rising edge. The difference is taken modulo the 18-bit
// range, so it is correct across a coarse-counter wrap, and saturates at the
// TOT_W-bit maximum.
// The optional width filter drops pulses whose ToT lies outside
// [wmin, wmax]; dropped pulses are flagged on `filtered`. In single-pulse
// mode only one of the two quantities is marked present (`sp_tot` chooses),
// which the link framer uses. ToA/ToT construction and the width filter
// follow the paper; the 390 ps ToT unit of the rising edge, the saturation
// and TOT_W = 12 are this design's choices. One cycle latency.
`timescale 1ps/1ps
module pulse_processor
  import fastic_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_v,
  input  pulse_raw_t       in_p,
  input  tx_mode_e         mode,
  input  logic             sp_tot,     // single-pulse mode: 1 = ToT, 0 = ToA
  input  logic             wf_en,
  input  logic [TOT_W-1:0] wmin,
  input  logic [TOT_W-1:0] wmax,
  output logic             out_v,
  output pulse_t           out_p,
  output logic             filtered
);
  localparam int unsigned HT_W = COARSE_W + FAST_W + 1;   // 18

  logic [HT_W-1:0]  t_r, t_f, d;
  logic [TOT_W-1:0] tot;
  logic             keep;

  always_comb begin
    t_r  = {in_p.rise.coarse, gray2bin(in_p.rise.gray), in_p.rise.fine[FINE_W-1]};
    t_f  = {in_p.fall.coarse, gray2bin(in_p.fall.gray), in_p.fall.half};
    d    = t_f - t_r;
    tot  = (d > HT_W'({TOT_W{1'b1}})) ? {TOT_W{1'b1}} : d[TOT_W-1:0];
    keep = !wf_en || ((tot >= wmin) && (tot <= wmax));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_v <= 1'b0; out_p <= '0; filtered <= 1'b0;
    end else begin
      out_v         <= in_v & keep;
      filtered      <= in_v & ~keep;
      out_p.toa     <= {in_p.rise.coarse, gray2bin(in_p.rise.gray), in_p.rise.fine};
      out_p.tot     <= tot;
      out_p.has_toa <= (mode != MODE_SP) || !sp_tot;
      out_p.has_tot <= (mode != MODE_SP) ||  sp_tot;
    end
  end
endmodule
