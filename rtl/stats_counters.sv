// stats_counters: per-channel statistics of the TDC.
//
// Two saturating STAT_W-bit counters per channel, in the 40 MHz domain:
// `filt` counts hit edges that the FERO control ignored because an edge of
// the same kind had already been captured in that 25 ns period; `disc`
// counts pulses the back-end threw away (invalid edge sequence, missing
// validation, width filter, or full channel FIFO). `clear` zeroes all
// counters. The paper mentions statistics "such as the number of filtered or
// discarded hits"; the exact counters and their width are this design's.
`timescale 1ps/1ps
module stats_counters
  import fastic_pkg::*;
#(
  parameter int unsigned N = N_TDC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [N-1:0]      inc_filt,
  input  logic [N-1:0]      inc_disc,
  output logic [STAT_W-1:0] filt [N],
  output logic [STAT_W-1:0] disc [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++) begin filt[c] <= '0; disc[c] <= '0; end
    end else begin
      for (int c = 0; c < N; c++) begin
        if (clear) begin
          filt[c] <= '0; disc[c] <= '0;
        end else begin
          if (inc_filt[c] && !(&filt[c])) filt[c] <= filt[c] + 1'b1;
          if (inc_disc[c] && !(&disc[c])) disc[c] <= disc[c] + 1'b1;
        end
      end
    end
  end
endmodule
