// tb_pulse_factory: directed test of edge pairing and validation.
//
// Scenarios, each checked one cycle after the inputs: a normal rise/fall
// pair; two consecutive rising edges (first discarded); a lone falling edge
// (discarded); a falling and a rising edge in one cycle with the fall first
// (closes the pending pulse, opens a new one) and with the rise first (a
// pulse shorter than one cycle); and, with validation on, pulses with and
// without a validation pulse in the window.
`timescale 1ps/1ps
module tb_pulse_factory;
  import fastic_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, val_en = 1'b0, val_pulse = 1'b0;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  logic rise_v = 1'b0, fall_v = 1'b0, pulse_v, discard;
  rise_t rise_i = '0;
  fall_t fall_i = '0;
  pulse_raw_t pulse_o;
  int checks = 0, failures = 0;

  pulse_factory dut (.clk, .rst_n, .val_en, .val_pulse, .rise_v, .rise_i,
                     .fall_v, .fall_i, .pulse_v, .pulse_o, .discard);
  always #12500 clk = ~clk;

  function automatic rise_t R(int c, int g, int f);
    return '{coarse: 12'(c), gray: bin2gray(5'(g)), fine: 5'(f)};
  endfunction
  function automatic fall_t F(int c, int g, int h);
    return '{coarse: 12'(c), gray: bin2gray(5'(g)), half: 1'(h)};
  endfunction

  // apply one cycle of inputs, then check outputs after the clock edge
  task automatic cyc(bit rv, rise_t r, bit fv, fall_t f, bit vp,
                     bit exp_p, rise_t er, fall_t ef, bit exp_d, string w);
    @(negedge clk);
    rise_v = rv; rise_i = r; fall_v = fv; fall_i = f; val_pulse = vp;
    @(negedge clk);
    rise_v = 0; fall_v = 0; val_pulse = 0;
    checks++;
    if (pulse_v !== exp_p || discard !== exp_d ||
        (exp_p && (pulse_o.rise !== er || pulse_o.fall !== ef))) begin
      failures++;
      $display("FAIL %s: pulse_v=%b discard=%b", w, pulse_v, discard);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    cyc(1, R(5, 3, 7), 0, '0, 0, 0, '0, '0, 0, "rise pending");
    cyc(0, '0, 1, F(9, 1, 1), 0, 1, R(5, 3, 7), F(9, 1, 1), 0, "pair");
    cyc(1, R(20, 0, 1), 0, '0, 0, 0, '0, '0, 0, "rise A");
    cyc(1, R(21, 4, 2), 0, '0, 0, 0, '0, '0, 1, "rise B drops A");
    cyc(0, '0, 1, F(22, 6, 0), 0, 1, R(21, 4, 2), F(22, 6, 0), 0, "pair B");
    cyc(0, '0, 1, F(23, 6, 0), 0, 0, '0, '0, 1, "lone fall");
    cyc(1, R(30, 2, 0), 0, '0, 0, 0, '0, '0, 0, "rise C");
    cyc(1, R(31, 9, 3), 1, F(31, 5, 1), 0, 1, R(30, 2, 0), F(31, 5, 1), 0, "fall first");
    cyc(0, '0, 1, F(33, 0, 0), 0, 1, R(31, 9, 3), F(33, 0, 0), 0, "close D");
    cyc(1, R(40, 2, 3), 1, F(40, 7, 0), 0, 1, R(40, 2, 3), F(40, 7, 0), 0, "rise first");
    val_en = 1'b1;
    cyc(1, R(50, 1, 1), 0, '0, 0, 0, '0, '0, 0, "rise unvalidated");
    cyc(0, '0, 1, F(51, 1, 1), 0, 0, '0, '0, 1, "not validated");
    cyc(1, R(60, 1, 1), 0, '0, 1, 0, '0, '0, 0, "rise with validation");
    cyc(0, '0, 1, F(61, 1, 1), 0, 1, R(60, 1, 1), F(61, 1, 1), 0, "validated");
    cyc(1, R(70, 1, 1), 0, '0, 0, 0, '0, '0, 0, "rise, later validation");
    cyc(0, '0, 0, '0, 1, 0, '0, '0, 0, "validation while pending");
    cyc(0, '0, 1, F(72, 2, 0), 0, 1, R(70, 1, 1), F(72, 2, 0), 0, "validated late");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
