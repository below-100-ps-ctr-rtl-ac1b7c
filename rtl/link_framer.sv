// link_framer: selects the 64-bit words written into the global FIFO.
//
// Pulse words come from the arbiter. In addition, each time the 12-bit
// coarse counter wraps (every 4096 cycles, 102.4 us) a service word is
// queued. It carries the 12 extension bits of the coarse counter that are
// valid from the wrap on, so that timestamps stay unambiguous at low rates,
// and the statistics of one channel, taking the channels in turn:
//   [63:60] type 0x2  [59:48] coarse extension  [47:44] channel
//   [43:28] filtered-hit count  [27:12] discarded-pulse count  [11:0] 0
// The arbiter is held (arb_ready low) while a service word is pending or the
// FIFO is almost full; the service word is written in the next cycle with no
// arbiter word. Service words are this design's way of sending the paper's
// low-rate statistics and the extended coarse counter; the layout is its own.
`timescale 1ps/1ps
module link_framer
  import fastic_pkg::*;
#(
  parameter int unsigned N = N_TDC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wrap,          // coarse counter about to wrap
  input  logic [CEXT_W-1:0] ext,           // current extension value
  input  logic [STAT_W-1:0] stat_filt [N],
  input  logic [STAT_W-1:0] stat_disc [N],
  input  logic              arb_v,
  input  logic [WORD_W-1:0] arb_word,
  output logic              arb_ready,
  input  logic              fifo_afull,
  input  logic              fifo_full,
  output logic              wr_en,
  output logic [WORD_W-1:0] wr_data,
  output logic              svc_sent
);
  localparam int unsigned IW = $clog2(N);

  logic              svc_pend;
  logic [CEXT_W-1:0] svc_ext;
  logic [IW-1:0]     stat_ch;

  assign arb_ready = !svc_pend && !fifo_afull;

  always_comb begin
    wr_en   = 1'b0;
    wr_data = arb_word;
    if (arb_v) begin
      wr_en = 1'b1;
    end else if (svc_pend && !fifo_full) begin
      wr_en   = 1'b1;
      wr_data = {WT_SERVICE, svc_ext, CH_W'(stat_ch),
                 stat_filt[stat_ch], stat_disc[stat_ch], 12'h0};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      svc_pend <= 1'b0; svc_ext <= '0; stat_ch <= '0; svc_sent <= 1'b0;
    end else begin
      svc_sent <= 1'b0;
      if (!arb_v && svc_pend && !fifo_full) begin
        svc_pend <= 1'b0;
        svc_sent <= 1'b1;
        stat_ch  <= (32'(stat_ch) == N - 1) ? '0 : stat_ch + 1'b1;
      end
      if (wrap) begin
        svc_pend <= 1'b1;
        svc_ext  <= ext + 1'b1;
      end
    end
  end
endmodule
