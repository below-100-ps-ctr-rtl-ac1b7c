// tb_debubble_encoder: exhaustive test of the UF-TCM decoder.
//
// For all 32 positions of the circular thermometer code the fine code must
// equal the position; with every possible single-bit error inserted away
// from the code's two transitions it must still equal the position and
// flag a bubble (every bit at least two bits from a code transition). In low-power mode (odd phases forced to 0) the result
// must be the position rounded down to an even bin.
`timescale 1ps/1ps
module tb_debubble_encoder;
  import fastic_pkg::*;
  logic [15:0] thermo;
  logic        lp, bubble;
  logic [4:0]  fine;
  int checks = 0, failures = 0;

  debubble_encoder dut (.thermo, .low_power(lp), .fine, .bubble);

  function automatic logic [15:0] code(int o);
    logic [15:0] t;
    for (int k = 0; k < 16; k++) t[k] = (o < 16) ? (k <= o) : (k > o - 16);
    return t;
  endfunction

  // bit i of the ring continued past both ends with inverted bits
  function automatic logic ring(logic [15:0] t, int i);
    if (i < 0)  return ~t[i + 16];
    if (i > 15) return ~t[i - 16];
    return t[i];
  endfunction

  task automatic chk(string w, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask

  initial begin
    lp = 1'b0;
    for (int o = 0; o < 32; o++) begin
      thermo = code(o); #1;
      chk("clean code", fine, o);
      chk("no bubble", bubble, 0);
      // single-bit errors two or more bits away from a transition
      for (int b = 0; b < 16; b++) begin
        logic [15:0] t;
        bit ok;
        t  = code(o);
        ok = 1'b1;
        for (int d = -2; d <= 2; d++) if (ring(t, b + d) != t[b]) ok = 1'b0;
        if (ok) begin
          thermo = t ^ (16'h1 << b); #1;
          chk("bubble corrected", fine, o);
          chk("bubble flagged", bubble, 1);
        end
      end
    end
    lp = 1'b1;
    for (int o = 0; o < 32; o++) begin
      thermo = code(o) & 16'h5555; #1;
      chk("low-power code", fine, o & ~1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
