// tb_async_fifo: a 40 MHz writer and a 1.3 GHz reader (unrelated periods)
// move 3000 random words through the dual-clock FIFO; the reader pops at
// random. Checks that every word arrives once and in order, that the FIFO
// fills up (writer throttled by wr_afull), and that it drains to empty.
`timescale 1ps/1ps
module tb_async_fifo;
  logic wclk = 1'b0, rclk = 1'b0, rst_n = 1'b1;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  logic wr_en = 1'b0, wr_full, wr_afull, rd_en, rd_empty;
  logic [63:0] wr_data = '0, rd_data;
  logic [63:0] sent [$];
  int checks = 0, failures = 0, n_rx = 0, afull_seen = 0;
  bit rd_go = 1'b0;

  async_fifo #(.W(64), .DEPTH(16)) dut (
    .wr_clk(wclk), .wr_rst_n(rst_n), .wr_en, .wr_data, .wr_full, .wr_afull,
    .rd_clk(rclk), .rd_rst_n(rst_n), .rd_en, .rd_data, .rd_empty);
  always #12500 wclk = ~wclk;
  always #383   rclk = ~rclk;

  assign rd_en = rd_go && !rd_empty;

  always @(posedge rclk) begin
    rd_go <= ($urandom_range(0, 99) < 1);   // slow reader, FIFO fills up
    if (rd_en) begin
      checks++;
      if (sent.size() == 0 || rd_data !== sent[0]) begin
        failures++; $display("FAIL word %0d", n_rx);
      end
      if (sent.size() > 0) void'(sent.pop_front());
      n_rx++;
    end
  end

  initial begin
    #30000 rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge wclk);
      while (wr_afull) begin afull_seen++; @(negedge wclk); end
      wr_en = 1'b1; wr_data = {$urandom, $urandom};
      sent.push_back(wr_data);
      @(negedge wclk);
      wr_en = 1'b0;
    end
    wait (sent.size() == 0);
    repeat (4) @(posedge wclk);
    checks++; if (!rd_empty) begin failures++; $display("FAIL not empty at end"); end
    checks++; if (n_rx != 3000) begin failures++; $display("FAIL count %0d", n_rx); end
    checks++; if (afull_seen == 0) begin failures++; $display("FAIL never almost full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
