// tb_hit_pipeline: checks that every input word appears unchanged exactly
// three clock cycles (75 ns at 40 MHz) later, including its valid flag.
`timescale 1ps/1ps
module tb_hit_pipeline;
  logic clk = 1'b0, rst_n = 1'b1, in_v = 1'b0, out_v;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  logic [21:0] in_d = '0, out_d;
  logic        vh [$];
  logic [21:0] dh [$];
  int checks = 0, failures = 0;

  hit_pipeline #(.W(22)) dut (.clk, .rst_n, .in_v, .in_d, .out_v, .out_d);
  always #12500 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      if (vh.size() == 3) begin
        logic ev; logic [21:0] ed;
        ev = vh.pop_front(); ed = dh.pop_front();
        checks++;
        if (out_v !== ev || (ev && out_d !== ed)) begin
          failures++; $display("FAIL cycle %0d", i);
        end
      end
      in_v = 1'($urandom); in_d = 22'($urandom);
      vh.push_back(in_v); dh.push_back(in_d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
