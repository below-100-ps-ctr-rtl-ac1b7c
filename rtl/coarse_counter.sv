// coarse_counter: 40 MHz coarse time counter with extension.
//
// A 24-bit binary counter incremented on every 40 MHz cycle. The lower 12
// bits are the coarse counter that the back-end attaches to every hit edge;
// the upper 12 bits extend the range so that time stays unambiguous at low
// hit rates (they are sent in low-rate service words, see link_framer).
// `wrap` is high for the one cycle in which the lower 12 bits are at their
// maximum, i.e. just before the extension increments. `sync_rst` clears
// the counter synchronously so that several chips can share a time origin.
// Widths 12 + 12 follow the paper; the synchronous clear is this design's
// reading of the chip's synchronous reset.
`timescale 1ps/1ps
module coarse_counter
  import fastic_pkg::*;
#(
  parameter int unsigned LOW_W = COARSE_W,
  parameter int unsigned EXT_W = CEXT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sync_rst,
  output logic [LOW_W-1:0] coarse,
  output logic [EXT_W-1:0] ext,
  output logic             wrap
);
  logic [LOW_W+EXT_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        cnt <= '0;
    else if (sync_rst) cnt <= '0;
    else               cnt <= cnt + 1'b1;
  end

  assign coarse = cnt[LOW_W-1:0];
  assign ext    = cnt[LOW_W+EXT_W-1:LOW_W];
  assign wrap   = &cnt[LOW_W-1:0];
endmodule
