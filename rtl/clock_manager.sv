// clock_manager: frequency divider of the PLL.
//
// Counts VCO periods on the rising edge of VCO phase 0 (1.28 GHz) with a
// 5-bit counter that wraps every 32 periods, i.e. every 25 ns. From it come
// (a) the 5-bit Gray code of the VCO period count, which the fast time
// capture matrix samples at each hit edge, (b) the 40 MHz feedback clock for
// the phase detector and (c) the 40 MHz synchronization clock of the
// digital back-end. Both 40 MHz clocks are the inverted MSB of the counter,
// so they rise when the count wraps from 31 to 0 and the Gray count is zero
// at the start of each 25 ns period. Division by 32 follows the paper
// (40 MHz x 32 = 1.28 GHz); the Gray encoding is the paper's, the counter
// itself and the reset are this design's choices.
`timescale 1ps/1ps
module clock_manager
  import fastic_pkg::*;
#(
  parameter int unsigned DIV_W = FAST_W   // log2 of the division factor (32)
) (
  input  logic              vco_clk,   // VCO phase 0, 1.28 GHz
  input  logic              rst_n,     // asynchronous, active low
  output logic [DIV_W-1:0]  vco_gray,  // Gray count of VCO periods in 25 ns
  output logic              clk_fb,    // 40 MHz feedback clock to the PFD
  output logic              clk_sync   // 40 MHz clock of the back-end
);
  logic [DIV_W-1:0] cnt;

  always_ff @(posedge vco_clk or negedge rst_n) begin
    if (!rst_n) cnt <= '1;           // first edge after reset wraps to 0
    else        cnt <= cnt + 1'b1;
  end

  always_comb begin
    vco_gray = cnt ^ (cnt >> 1);
    clk_fb   = ~cnt[DIV_W-1];
    clk_sync = ~cnt[DIV_W-1];
  end
endmodule
