// tb_clock_manager: a 1.28 GHz-like VCO clock (768 ps) drives the divider.
// Checks on every VCO edge that the Gray output equals the Gray code of the
// number of VCO periods since the last 40 MHz edge, that only one Gray bit
// changes per edge, and that both 40 MHz clocks rise exactly every 32 VCO
// periods, at the edge where the Gray count returns to 0.
`timescale 1ps/1ps
module tb_clock_manager;
  import fastic_pkg::*;
  logic vco = 1'b0, rst_n = 1'b1, clk_fb, clk_sync;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  bit run = 1'b0;                // set when rst_n is released
  logic [4:0] gray, last_gray;
  int checks = 0, failures = 0, n = -1, rises = 0;
  longint t_last = -1;

  clock_manager dut (.vco_clk(vco), .rst_n, .vco_gray(gray), .clk_fb, .clk_sync);
  always #384 vco = ~vco;

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask

  always @(posedge clk_sync) if (run) begin
    if (t_last >= 0) chk("40 MHz period", $time - t_last, 32 * 768);
    t_last = $time; rises++;
  end

  initial begin
    #1000 rst_n = 1'b1; run = 1'b1;
    @(posedge vco); #1;
    last_gray = gray;
    chk("gray zero at first edge", gray, 0);
    chk("clk_sync high", clk_sync, 1);
    n = 0;
    for (int i = 1; i < 3000; i++) begin
      @(posedge vco); #1;
      n = (n + 1) % 32;
      chk("gray", gray, bin2gray(5'(n)));
      chk("one bit", $countones(gray ^ last_gray), 1);
      chk("fb equals sync", clk_fb, clk_sync);
      last_gray = gray;
    end
    chk("40 MHz edges", rises > 90, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
