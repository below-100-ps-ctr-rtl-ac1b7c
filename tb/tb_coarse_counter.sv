// tb_coarse_counter: runs the 24-bit counter past two wraps of its lower
// 12 bits and checks coarse, extension and the wrap strobe each cycle
// against a cycle count; then checks the synchronous reset.
`timescale 1ps/1ps
module tb_coarse_counter;
  logic clk = 1'b0, rst_n = 1'b1, sync_rst = 1'b0, wrap;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  logic [11:0] coarse, ext;
  int checks = 0, failures = 0, wraps = 0;

  coarse_counter dut (.clk, .rst_n, .sync_rst, .coarse, .ext, .wrap);
  always #12500 clk = ~clk;

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 1; n <= 9000; n++) begin
      @(negedge clk);
      chk("coarse", coarse, n % 4096);
      chk("ext", ext, n / 4096);
      chk("wrap", wrap, (n % 4096) == 4095);
      if (wrap) wraps++;
    end
    chk("wraps", wraps, 2);
    sync_rst = 1'b1; @(negedge clk); sync_rst = 1'b0;
    chk("sync reset", {ext, coarse}, 0);
    @(negedge clk);
    chk("restart", coarse, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
