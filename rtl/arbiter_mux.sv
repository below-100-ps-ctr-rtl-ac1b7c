// arbiter_mux: arbiter and multiplexer of the channel FIFOs.
//
// Every 40 MHz cycle in which the downstream stage is ready, one non-empty
// channel FIFO is granted, its head pulse is popped and written out as a
// 64-bit link word tagged with the channel number. Two policies:
//  * round robin (ARB_RR): the search starts at the channel after the last
//    one granted, so channels are served cyclically;
//  * pulse sorting by timestamp (ARB_PST): the head pulse with the earliest
//    timestamp wins. Ages are taken relative to the running coarse counter
//    (coarse_now - ToA coarse, modulo 4096) so the order is right across a
//    counter wrap; equal ages are ordered by the fine part of the ToA, and
//    remaining ties go to the lowest channel.
// Pulse word (this design's layout):
//   [63:60] type 0x1  [59:56] channel  [55] ToA present  [54] ToT present
//   [53:32] ToA (22 bits, 24.4 ps)  [31:20] ToT (12 bits, 390 ps)  [19:0] 0
// The two policies come from the paper; the word layout and the age rule are
// this design's. Output registered, one word per cycle at most.
`timescale 1ps/1ps
module arbiter_mux
  import fastic_pkg::*;
#(
  parameter int unsigned N = N_TDC
) (
  input  logic                clk,
  input  logic                rst_n,
  input  arb_policy_e         policy,
  input  logic [COARSE_W-1:0] coarse_now,
  input  logic [N-1:0]        empty,
  input  pulse_t              head [N],
  output logic [N-1:0]        pop,
  input  logic                out_ready,
  output logic                out_v,
  output logic [WORD_W-1:0]   out_word
);
  localparam int unsigned IW = $clog2(N);

  logic [IW-1:0] last, win;
  logic          any;

  always_comb begin
    logic [TOA_W-1:0] best_key, key;
    win = '0; any = 1'b0; best_key = '0; key = '0; pop = '0;
    if (policy == ARB_RR) begin
      for (int s = 1; s <= N; s++) begin
        if (!any && !empty[(32'(last) + 32'(s)) % N]) begin
          any = 1'b1; win = IW'((32'(last) + 32'(s)) % N);
        end
      end
    end else begin
      for (int c = 0; c < N; c++) begin
        key = {coarse_now - head[c].toa[TOA_W-1 -: COARSE_W],
               ~head[c].toa[TOA_W-COARSE_W-1:0]};
        if (!empty[c] && (!any || key > best_key)) begin
          any = 1'b1; win = IW'(c); best_key = key;
        end
      end
    end
    if (any && out_ready) pop[win] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= IW'(N - 1); out_v <= 1'b0; out_word <= '0;
    end else begin
      out_v <= any && out_ready;
      if (any && out_ready) begin
        last     <= win;
        out_word <= {WT_PULSE, CH_W'(win), head[win].has_toa, head[win].has_tot,
                     head[win].has_toa ? head[win].toa : TOA_W'(0),
                     head[win].has_tot ? head[win].tot : TOT_W'(0), 20'h0};
      end
    end
  end
endmodule
