// tb_stats_counters: random increments on 9 channels compared with counts
// kept here; a short second run with near-saturated expectations checks
// that counters stop at 0xFFFF; `clear` must zero everything.
`timescale 1ps/1ps
module tb_stats_counters;
  localparam int N = 9;
  logic clk = 1'b0, rst_n = 1'b1, clear = 1'b0;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  logic [N-1:0] inc_filt = '0, inc_disc = '0;
  logic [15:0] filt [N], disc [N];
  int ef [N], ed [N];
  int checks = 0, failures = 0;

  stats_counters dut (.clk, .rst_n, .clear, .inc_filt, .inc_disc, .filt, .disc);
  always #12500 clk = ~clk;

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask

  initial begin
    for (int c = 0; c < N; c++) begin ef[c] = 0; ed[c] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 140000; i++) begin
      @(negedge clk);
      inc_filt = N'($urandom); inc_disc = N'($urandom) & N'($urandom);
      for (int c = 0; c < N; c++) begin
        if (inc_filt[c] && ef[c] < 65535) ef[c]++;
        if (inc_disc[c] && ed[c] < 65535) ed[c]++;
      end
    end
    @(negedge clk); inc_filt = '0; inc_disc = '0;
    @(negedge clk);
    for (int c = 0; c < N; c++) begin
      chk("filt", filt[c], ef[c]); chk("disc", disc[c], ed[c]);
    end
    chk("saturated", filt[0], 65535);
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    for (int c = 0; c < N; c++) begin chk("clr f", filt[c], 0); chk("clr d", disc[c], 0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #(64'd5000000000); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
