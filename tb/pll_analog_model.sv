// pll_analog_model: behavioural model (not synthesizable) of the analog part
// of the PLL: charge pump, loop filter and 16-cell ring VCO, for simulation.
//
// The ring produces 16 phases. Phase k rises k cell delays after phase 0
// and falls 16 cell delays after it rises, so one VCO period is 32 cell
// delays and the phases form a circular thermometer code. With CELL = 24
// (time unit 1 ps) the period is 768 ps and 32 periods are 24.576 ns; the
// real chip has 24.4 ps cells, 781 ps and 25 ns (simulation time is scaled
// by 0.98 to keep delays integer). The loop is reduced to its effect on the
// phase: an `up` decision seen on a reference edge shortens the next cell
// delay by `STEP`, a `dn` decision lengthens it, which gives a bang-bang
// loop with a small dither. `en` starts and stops the oscillator.
`timescale 1ps/1ps
module pll_analog_model #(
  parameter int CELL = 24,
  parameter int STEP = 1
) (
  input  logic        ref_clk,
  input  logic        up,
  input  logic        dn,
  input  logic        en,
  output logic [15:0] phase
);
  int adj = 0;
  int o   = 0;

  initial phase = '0;

  always @(posedge ref_clk) begin
    if (up)      adj = -STEP;
    else if (dn) adj = STEP;
  end

  initial begin
    wait (en);
    forever begin
      for (int k = 0; k < 16; k++)
        phase[k] = (o < 16) ? (k <= o) : (k > o - 16);
      if (o == 0 && adj != 0) begin
        #(CELL + adj);
        adj = 0;
      end else begin
        #(CELL);
      end
      o = (o + 1) % 32;
    end
  end
endmodule
