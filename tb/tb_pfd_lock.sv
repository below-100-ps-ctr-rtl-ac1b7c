// tb_pfd_lock: closed-loop test of the phase detector with the behavioural
// VCO model (4 ps phase step per decision) and the clock_manager divider.
//
// The 40 MHz reference starts 1.2 ns away from the feedback clock. Checks:
// every decision matches the phase relation measured here from the edge
// times (feedback rose less than half a period before the reference edge:
// VCO early, `dn`; otherwise `up`); `locked` rises, but not before the
// programmed number of lock cycles; after the reference period is detuned
// by 300 ps the loop cannot follow and `locked` falls; with the period
// restored the loop locks again.
`timescale 1ps/1ps
module tb_pfd_lock;
  import fastic_pkg::*;
  localparam int PER = 32 * 32 * 24;
  logic ref_clk = 1'b0, rst_n = 1'b1, up, dn, locked, clk_fb, clk_sync;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  bit run = 1'b0;                // set when rst_n is released
  logic [15:0] phase;
  logic [4:0] gray;
  logic [7:0] lock_cycles = 8'd20, unlock_cycles = 8'd6;
  int checks = 0, failures = 0, pd = PER, half = PER / 2, refs = 0, first_lock = -1;
  longint t_fb = -1;
  bit got_lock = 0, got_unlock = 0, got_relock = 0;

  pll_analog_model #(.CELL(24), .STEP(4)) u_vco (.ref_clk, .up, .dn, .en(1'b1), .phase);
  clock_manager u_cm (.vco_clk(phase[0]), .rst_n, .vco_gray(gray), .clk_fb, .clk_sync);
  pfd_lock dut (.ref_clk, .rst_n, .fb_clk(clk_fb), .lock_cycles, .unlock_cycles,
                .up, .dn, .locked);

  always @(posedge clk_fb) t_fb = $time;

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d at %0t", w, got, exp, $time); end
  endtask

  // the reference clock, with a programmable half period
  initial begin
    #(2 * 768 + 1200);
    forever begin ref_clk = 1'b1; #(half); ref_clk = 1'b0; #(pd - half); end
  end

  always @(posedge ref_clk) if (run) begin
    bit early;
    early = (t_fb >= 0) && ($time - t_fb < PER / 2);
    refs++;
    #1;
    chk("decision dn", dn, early);
    chk("decision up", up, !early);
  end


  initial begin
    #1000 rst_n = 1'b1; run = 1'b1;
    wait (locked); got_lock = 1; first_lock = refs;
    chk("lock not before lock_cycles", first_lock >= 21, 1);
    repeat (50) @(posedge ref_clk);
    chk("stays locked", locked, 1);
    // detune the reference: +300 ps per period
    force_period(PER + 300);
    wait (!locked); got_unlock = 1;
    force_period(PER);
    wait (locked); got_relock = 1;
    chk("lock", got_lock, 1); chk("unlock", got_unlock, 1); chk("relock", got_relock, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic force_period(int p);
    pd = p; half = p / 2;
  endtask

  initial begin #(64'd20000 * PER); failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
