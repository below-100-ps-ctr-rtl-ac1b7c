// tb_mode_mux: drives a time pulse followed by an energy pulse, as the
// analog front-end does, in each transmission mode, and checks the hit line
// at sample points: in high energy resolution mode the time pulse must end
// at the first 40 MHz edge while the energy pulse passes whole; in hybrid
// mode both pass whole; in high-speed and single-pulse modes only the time
// pulse passes; a disabled channel stays low.
`timescale 1ps/1ps
module tb_mode_mux;
  import fastic_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, en = 1'b1, t = 1'b0, e = 1'b0, hit;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  tx_mode_e mode = MODE_HER;
  int checks = 0, failures = 0;

  mode_mux dut (.clk, .rst_n, .en, .mode, .time_sig(t), .energy_sig(e), .hit);
  always #12500 clk = ~clk;

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d mode %0d", w, got, exp, mode); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 5; m++) begin
      mode = tx_mode_e'(m % 4);
      en   = (m < 4);
      @(posedge clk); #5000;                 // 5 ns after a clock edge
      t = 1'b1; #1;
      chk("time rise", hit, en);
      #10000;                                 // before the next edge
      chk("time before edge", hit, en);
      #10000;                                 // after the edge (t still high)
      chk("time after edge", hit, en && (mode != MODE_HER));
      #20000 t = 1'b0; #1;
      chk("time end", hit, 0);
      #30000 e = 1'b1; #1;
      chk("energy", hit, en && (mode == MODE_HER || mode == MODE_HYB));
      #80000;
      chk("energy held", hit, en && (mode == MODE_HER || mode == MODE_HYB));
      e = 1'b0; #1;
      chk("energy end", hit, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
