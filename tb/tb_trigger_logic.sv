// tb_trigger_logic: checks the trigger output for every source with random
// channel patterns and enables, and that a pulse on the external pin gives
// exactly one validation pulse two to three clocks later.
`timescale 1ps/1ps
module tb_trigger_logic;
  import fastic_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, ext = 1'b0, hl = 1'b0, trig_hit, val_pulse;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  logic [7:0] trig_ch = '0, time_ch = '0, ch_en = '0;
  trig_src_e src = TRG_OR;
  int checks = 0, failures = 0, nval = 0;

  trigger_logic dut (.clk, .rst_n, .trig_ch, .time_ch, .ch_en, .ext_trig(ext), .hl_trig(hl),
                     .src, .trig_hit, .val_pulse);
  always #12500 clk = ~clk;
  always @(posedge clk) if (val_pulse) nval++;

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      logic e;
      src = trig_src_e'(i % 4);
      trig_ch = 8'($urandom) & 8'($urandom); time_ch = 8'($urandom) & 8'($urandom);
      ch_en = 8'($urandom); hl = 1'($urandom); ext = 1'b0;
      #1;
      case (i % 4)
        0: e = (trig_ch & ch_en) != 0;
        1: e = (time_ch & ch_en) != 0;
        2: e = 1'b0;
        default: e = hl;
      endcase
      chk("trigger", trig_hit, e);
      #10;
    end
    src = TRG_EXT;
    for (int k = 0; k < 5; k++) begin
      int n0;
      @(negedge clk);
      n0 = nval;
      ext = 1'b1; #1; chk("ext trigger", trig_hit, 1);
      repeat (4) @(negedge clk);
      ext = 1'b0;
      repeat (4) @(negedge clk);
      chk("one validation pulse", nval - n0, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
