// tdc_channel: one complete TDC channel (FERO + BERO + channel FIFO).
//
// hit -> fero (asynchronous capture of both edges, resynchronized to
// 40 MHz) -> debubble_encoder on the rising-edge thermometer code ->
// two hit_pipeline instances (rising and falling edges, 75 ns) ->
// pulse_factory (edge pairing, validation) -> pulse_processor (ToA, ToT,
// width filter) -> sync_fifo (channel FIFO, popped by the arbiter).
// Latency from a rising edge in 25 ns period P to the pulse in the FIFO:
// the falling edge's period + 2 (FERO) + 3 (pipeline) + 1 (factory) +
// 1 (processor) + 1 (FIFO write) cycles. `inc_filt` pulses for an edge the
// FERO control ignored; `inc_disc` for a pulse that was discarded (factory,
// width filter or FIFO overflow; coincident causes count once).
`timescale 1ps/1ps
module tdc_channel
  import fastic_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic                rst_n,
  input  logic                clk,
  input  logic                hit,
  input  logic [N_PHASE-1:0]  vco_phase,
  input  logic [FAST_W-1:0]   vco_gray,
  input  logic [COARSE_W-1:0] coarse,
  input  logic                low_power,
  input  tx_mode_e            mode,
  input  logic                sp_tot,
  input  logic                wf_en,
  input  logic [TOT_W-1:0]    wmin,
  input  logic [TOT_W-1:0]    wmax,
  input  logic                val_en,
  input  logic                val_pulse,
  input  logic                pop,
  output pulse_t              head,
  output logic                empty,
  output logic                inc_filt,
  output logic                inc_disc
);
  logic       rr_v, fr_v, rp_v, fp_v, pf_v, pf_disc, pp_v, pp_filt, ovf, full;
  rise_raw_t  rr;
  rise_t      re, rp;
  fall_t      fr, fp;
  pulse_raw_t pf_p;
  pulse_t     pp_p;
  logic       bubble;

  fero u_fero (
    .rst_n, .hit, .vco_phase, .vco_gray, .clk, .coarse,
    .rise_v(rr_v), .rise_o(rr), .fall_v(fr_v), .fall_o(fr), .miss_o(inc_filt)
  );

  debubble_encoder u_enc (
    .thermo(rr.thermo), .low_power, .fine(re.fine), .bubble
  );
  assign re.coarse = rr.coarse;
  assign re.gray   = rr.gray;

  hit_pipeline #(.W($bits(rise_t))) u_pipe_r (
    .clk, .rst_n, .in_v(rr_v), .in_d(re), .out_v(rp_v), .out_d(rp)
  );
  hit_pipeline #(.W($bits(fall_t))) u_pipe_f (
    .clk, .rst_n, .in_v(fr_v), .in_d(fr), .out_v(fp_v), .out_d(fp)
  );

  pulse_factory u_pf (
    .clk, .rst_n, .val_en, .val_pulse,
    .rise_v(rp_v), .rise_i(rp), .fall_v(fp_v), .fall_i(fp),
    .pulse_v(pf_v), .pulse_o(pf_p), .discard(pf_disc)
  );

  pulse_processor u_pp (
    .clk, .rst_n, .in_v(pf_v), .in_p(pf_p), .mode, .sp_tot, .wf_en, .wmin, .wmax,
    .out_v(pp_v), .out_p(pp_p), .filtered(pp_filt)
  );

  sync_fifo #(.W(PULSE_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .wr_en(pp_v), .wr_data(pp_p), .rd_en(pop),
    .rd_data(head), .empty, .full, .overflow(ovf)
  );

  assign inc_disc = pf_disc | pp_filt | ovf;
endmodule
