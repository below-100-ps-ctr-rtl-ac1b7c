// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, empty/full flags, and that a push into a full FIFO is dropped and
// flagged as overflow.
`timescale 1ps/1ps
module tb_sync_fifo;
  logic clk = 1'b0, rst_n = 1'b1, wr_en = 1'b0, rd_en = 1'b0;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  logic [35:0] wr_data = '0, rd_data;
  logic empty, full, overflow;
  logic [35:0] model [$];
  int checks = 0, failures = 0, ovf_seen = 0, full_seen = 0;

  sync_fifo #(.W(36), .DEPTH(8)) dut (.clk, .rst_n, .wr_en, .wr_data, .rd_en,
                                      .rd_data, .empty, .full, .overflow);
  always #12500 clk = ~clk;

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      bit exp_ovf;
      @(negedge clk);
      chk("empty", empty, model.size() == 0);
      chk("full", full, model.size() == 8);
      if (model.size() > 0) chk("head", rd_data, model[0]);
      // bias towards filling in the first half, draining in the second
      wr_en   = ($urandom_range(0, 99) < ((i % 400) < 200 ? 70 : 30));
      rd_en   = !empty && ($urandom_range(0, 99) < ((i % 400) < 200 ? 30 : 70));
      wr_data = {4'($urandom), $urandom};
      exp_ovf = wr_en && (model.size() == 8);
      if (full) full_seen++;
      if (rd_en) void'(model.pop_front());
      if (wr_en && !exp_ovf) model.push_back(wr_data);
      @(posedge clk); #1;
      chk("overflow", overflow, exp_ovf);
      if (overflow) ovf_seen++;
    end
    chk("full reached", full_seen > 0, 1);
    chk("overflow reached", ovf_seen > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
