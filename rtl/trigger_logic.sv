// trigger_logic: trigger selection and validation input.
//
// The trigger that is digitized by the ninth TDC channel is chosen among
// four sources: the OR of the enabled channels' trigger comparators (only
// the fastest channel's edge survives the OR), the OR of their time
// comparators (for low-light signals), the external trigger pin (for
// calibration) and the high-level trigger made by the analog sum of all
// inputs. This path is combinational and asynchronous, like the hits.
// The external pin is also the validation input of the pulse factories:
// it is synchronized to 40 MHz with two flip-flops and its rising edge gives
// a one-cycle `val_pulse`. Sources and their use follow the paper; the
// source encoding and the edge detector are this design's choices.
`timescale 1ps/1ps
module trigger_logic
  import fastic_pkg::*;
#(
  parameter int unsigned N = N_CH
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] trig_ch,
  input  logic [N-1:0] time_ch,
  input  logic [N-1:0] ch_en,
  input  logic         ext_trig,
  input  logic         hl_trig,
  input  trig_src_e    src,
  output logic         trig_hit,
  output logic         val_pulse
);
  always_comb begin
    unique case (src)
      TRG_OR:   trig_hit = |(trig_ch & ch_en);
      TRG_TIME: trig_hit = |(time_ch & ch_en);
      TRG_EXT:  trig_hit = ext_trig;
      TRG_HL:   trig_hit = hl_trig;
      default:  trig_hit = 1'b0;
    endcase
  end

  logic s1, s2, s3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin s1 <= 1'b0; s2 <= 1'b0; s3 <= 1'b0; end
    else begin s1 <= ext_trig; s2 <= s1; s3 <= s2; end
  end
  assign val_pulse = s2 & ~s3;
endmodule
