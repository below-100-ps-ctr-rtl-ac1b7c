// tb_link_framer: pulse words and coarse-counter wraps are offered at random
// while the FIFO flags toggle. Checks that every arbiter word is written
// unchanged in its cycle, that the arbiter is held while a service word is
// pending or the FIFO is almost full, and that after each wrap exactly one
// service word is written, carrying the next extension value and the
// statistics of the channels in turn.
`timescale 1ps/1ps
module tb_link_framer;
  import fastic_pkg::*;
  localparam int N = 9;
  logic clk = 1'b0, rst_n = 1'b1, wrap = 1'b0, arb_v = 1'b0, afull = 1'b0, full = 1'b0;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  logic [11:0] ext = '0;
  logic [15:0] sf [N], sd [N];
  logic [63:0] arb_word = '0, wr_data;
  logic arb_ready, wr_en, svc_sent;
  int checks = 0, failures = 0, n_svc = 0, n_wrap = 0, exp_ch = 0;
  bit pend = 0;
  logic [11:0] pend_ext;

  link_framer dut (.clk, .rst_n, .wrap, .ext, .stat_filt(sf), .stat_disc(sd),
                   .arb_v, .arb_word, .arb_ready, .fifo_afull(afull), .fifo_full(full),
                   .wr_en, .wr_data, .svc_sent);
  always #12500 clk = ~clk;

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0h exp %0h", w, got, exp); end
  endtask

  initial begin
    for (int c = 0; c < N; c++) begin sf[c] = 16'(100 + c); sd[c] = 16'(200 + c); end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      bit ready_now;
      @(negedge clk);
      chk("arb_ready", arb_ready, !pend && !afull);
      ready_now = arb_ready;
      // a word may be offered only in a cycle after ready (registered arbiter)
      arb_v    = ready_now && ($urandom_range(0, 1) == 1) ? 1'b1 : 1'b0;
      arb_word = {WT_PULSE, 60'($urandom)};
      afull    = ($urandom_range(0, 9) < 2);
      full     = afull && ($urandom_range(0, 1) == 1);
      wrap     = ($urandom_range(0, 99) == 0) && !pend;
      ext      = 12'($urandom);
      #1;
      if (arb_v) begin
        chk("write arb", wr_en, 1); chk("arb data", wr_data, arb_word);
      end else if (pend && !full) begin
        chk("write svc", wr_en, 1);
        chk("svc type", wr_data[63:60], WT_SERVICE);
        chk("svc ext", wr_data[59:48], pend_ext);
        chk("svc ch", wr_data[47:44], exp_ch);
        chk("svc filt", wr_data[43:28], 100 + exp_ch);
        chk("svc disc", wr_data[27:12], 200 + exp_ch);
        exp_ch = (exp_ch + 1) % N; pend = 0; n_svc++;
      end else chk("no write", wr_en, 0);
      if (wrap) begin pend = 1; pend_ext = ext + 1'b1; n_wrap++; end
    end
    chk("service words sent", n_svc > 10, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
