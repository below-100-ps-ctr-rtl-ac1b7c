// tb_aurora_tx: a receiver written here deserializes the line, checks the
// sync headers (0,1 data / 1,0 idle), descrambles the payload with its own
// 1 + x^39 + x^58 descrambler, and compares data blocks with the words
// taken from the FIFO model and idle blocks with the idle pattern. Blocks
// must be exactly 66 bit periods apart, a bit period being 2^rate clocks;
// rates 0 (1.28 Gb/s), 2 and 4 (80 Mb/s) are run.
`timescale 1ps/1ps
module tb_aurora_tx;
  logic clk = 1'b0, rst_n = 1'b1;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  logic [2:0] rate = 3'd0;
  logic fifo_empty, fifo_rd, serial_out, block_start;
  logic [63:0] fifo_data;
  logic [63:0] fq [$];
  logic [63:0] sent [$];
  int checks = 0, failures = 0, n_data = 0, n_idle = 0;

  aurora_tx dut (.clk, .rst_n, .rate, .fifo_empty, .fifo_data, .fifo_rd,
                 .serial_out, .block_start);
  always #390 clk = ~clk;

  assign fifo_empty = (fq.size() == 0);
  assign fifo_data  = fifo_empty ? '0 : fq[0];
  always @(posedge clk) if (fifo_rd) sent.push_back(fq.pop_front());

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0h exp %0h", w, got, exp); end
  endtask

  // receiver
  logic [57:0] dscr = '1;
  task automatic receive_block(int period);
    logic h0, h1;
    logic [63:0] pay;
    h0 = serial_out;
    repeat (period) @(negedge clk);
    h1 = serial_out;
    for (int i = 0; i < 64; i++) begin
      logic s;
      repeat (period) @(negedge clk);
      s = serial_out;
      pay[i] = s ^ dscr[38] ^ dscr[57];
      dscr = {dscr[56:0], s};
    end
    if ({h0, h1} == 2'b01) begin
      chk("data block", (sent.size() > 0) ? 1 : 0, 1);
      if (sent.size() > 0) chk("payload", pay, sent.pop_front());
      n_data++;
    end else begin
      chk("idle header", {h0, h1}, 2'b10);
      chk("idle payload", pay, 64'h1E);
      n_idle++;
    end
  endtask

  task automatic run_rate(int r, int nblocks);
    rate = 3'(r);
    @(negedge clk);
    while (!block_start) @(negedge clk);
    for (int b = 0; b < nblocks; b++) begin
      if ($urandom_range(0, 3) != 0) fq.push_back({$urandom, $urandom});
      receive_block(1 << r);
      // the next block must start one bit period after the last bit
      repeat ((1 << r) - 1) @(negedge clk);
      @(negedge clk);
      chk("block spacing", block_start, 1);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_rate(0, 60);
    rst_n = 1'b0; fq.delete(); sent.delete(); dscr = '1;
    @(negedge clk); rst_n = 1'b1;
    run_rate(2, 20);
    rst_n = 1'b0; fq.delete(); sent.delete(); dscr = '1;
    @(negedge clk); rst_n = 1'b1;
    run_rate(4, 10);
    chk("data blocks seen", n_data > 20, 1);
    chk("idle blocks seen", n_idle > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
