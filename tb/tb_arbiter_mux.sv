// tb_arbiter_mux: 9 channel queues with random pulses feed the arbiter.
//
// Round robin: every granted channel must be the first non-empty channel
// after the previously granted one. Pulse sorting by timestamp: the granted
// pulse must have the largest age (coarse_now - ToA coarse modulo 4096, then
// the smaller fine part), computed here independently; the coarse counter
// runs and wraps during the test. Also checks the word layout, and that no
// word is produced while out_ready is low.
`timescale 1ps/1ps
module tb_arbiter_mux;
  import fastic_pkg::*;
  localparam int N = 9;
  logic clk = 1'b0, rst_n = 1'b1, out_ready = 1'b1, out_v;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  arb_policy_e policy = ARB_RR;
  logic [11:0] coarse_now = 12'd4000;
  logic [N-1:0] empty, pop;
  pulse_t head [N];
  logic [63:0] out_word;
  pulse_t q [N][$];
  int checks = 0, failures = 0, last = N - 1;

  arbiter_mux dut (.clk, .rst_n, .policy, .coarse_now, .empty, .head, .pop,
                   .out_ready, .out_v, .out_word);
  always #12500 clk = ~clk;

  // the DUT's inputs change only here, away from clock edges
  task automatic refresh();
    for (int c = 0; c < N; c++) begin
      empty[c] = (q[c].size() == 0);
      head[c]  = empty[c] ? '0 : q[c][0];
    end
  endtask

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask

  function automatic pulse_t rnd_pulse();
    pulse_t p;
    p.toa = {12'(coarse_now - $urandom_range(0, 40)), 10'($urandom)};
    p.tot = 12'($urandom);
    p.has_toa = 1'b1; p.has_tot = 1'($urandom);
    return p;
  endfunction

  task automatic run(int cycles);
    @(negedge clk);
    for (int i = 0; i < cycles; i++) begin
      int w;
      logic [21:0] best, key;
      pulse_t hp;
      out_ready = ($urandom_range(0, 9) != 0);
      // add pulses at random
      for (int c = 0; c < N; c++)
        if ($urandom_range(0, 9) < 2 && q[c].size() < 6) q[c].push_back(rnd_pulse());
      refresh();
      #1;
      // expected winner
      w = -1; best = '0;
      if (policy == ARB_RR) begin
        for (int s = 1; s <= N; s++)
          if (w < 0 && q[(last + s) % N].size() != 0) w = (last + s) % N;
      end else begin
        for (int c = 0; c < N; c++) if (q[c].size() != 0) begin
          key = {12'(coarse_now - q[c][0].toa[21:10]), ~q[c][0].toa[9:0]};
          if (w < 0 || key > best) begin w = c; best = key; end
        end
      end
      if (w >= 0) hp = q[w][0];
      @(posedge clk);
      if (w >= 0 && out_ready) begin
        void'(q[w].pop_front());
        last = w;
      end
      coarse_now <= coarse_now + 1'b1;
      @(negedge clk);
      chk("out_v", out_v, w >= 0 && out_ready);
      if (w >= 0 && out_ready) begin
        chk("channel", out_word[59:56], w);
        chk("type", out_word[63:60], WT_PULSE);
        chk("toa", out_word[53:32], hp.toa);
        chk("tot", out_word[31:20], hp.has_tot ? hp.tot : 0);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    refresh();
    rst_n = 1'b1;
    run(300);
    policy = ARB_PST;
    run(300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
