// pulse_factory: pairs rising and falling edges into pulses.
//
// Input are the rising and falling edge streams of one channel after the hit
// pipeline; at most one edge of each kind arrives per 40 MHz cycle. A rising
// edge is held as pending until a falling edge closes it, then the pair is
// emitted as one pulse. Invalid sequences are discarded and reported on
// `discard`: a rising edge followed by another rising edge (the first is
// dropped) and a falling edge with no pending rising edge. When both kinds
// arrive in the same cycle, the half-VCO-period positions decide the order;
// in the same half period the rising edge is taken as first.
//
// Validation: with `val_en` set, a pulse is emitted only if a validation
// pulse (external trigger, synchronized to 40 MHz) was seen in the VAL_WIN
// cycles up to the cycle its rising edge leaves the hit pipeline, or at any
// time while it waits for its falling edge; otherwise it is discarded.
// Pairing and filtering are from the paper; the order rule, the window and
// the discard reporting are this design's choices. One cycle latency.
`timescale 1ps/1ps
module pulse_factory
  import fastic_pkg::*;
#(
  parameter int unsigned VAL_WIN = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       val_en,
  input  logic       val_pulse,
  input  logic       rise_v,
  input  rise_t      rise_i,
  input  logic       fall_v,
  input  fall_t      fall_i,
  output logic       pulse_v,
  output pulse_raw_t pulse_o,
  output logic       discard
);
  logic [VAL_WIN-1:0] val_hist;
  logic               val_recent;
  logic               pend_v, pend_val;
  rise_t              pend;

  assign val_recent = |{val_hist[VAL_WIN-2:0], val_pulse};

  logic fall_first;
  always_comb
    fall_first = {gray2bin(fall_i.gray), fall_i.half} <
                 {gray2bin(rise_i.gray), rise_i.fine[FINE_W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      val_hist <= '0; pend_v <= 1'b0; pend_val <= 1'b0; pend <= '0;
      pulse_v <= 1'b0; pulse_o <= '0; discard <= 1'b0;
    end else begin
      logic       pv, pval, emit, drop;
      rise_t      p;
      val_hist <= {val_hist[VAL_WIN-2:0], val_pulse};
      pv = pend_v; pval = pend_val | val_recent; p = pend;
      emit = 1'b0; drop = 1'b0;
      pulse_o.fall <= fall_i;
      if (rise_v && fall_v && fall_first) begin
        // close the pending pulse (if any) first, then open a new one
        if (pv) begin emit = pval | ~val_en; drop = ~emit; pulse_o.rise <= p; end
        else drop = 1'b1;
        pv = 1'b1; p = rise_i; pval = val_recent;
      end else begin
        if (rise_v) begin
          if (pv) drop = 1'b1;             // consecutive rising edges
          pv = 1'b1; p = rise_i; pval = val_recent;
        end
        if (fall_v) begin
          if (pv) begin
            emit = pval | ~val_en; drop = drop | ~emit;
            pulse_o.rise <= p; pv = 1'b0;
          end else drop = 1'b1;            // falling edge without rising
        end
      end
      pend_v <= pv; pend_val <= pval; pend <= p;
      pulse_v <= emit;
      discard <= drop;
    end
  end
endmodule
