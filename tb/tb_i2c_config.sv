// tb_i2c_config: an I2C master written here (1 MHz SCL, open-drain SDA)
// writes random values to all 32 registers in one auto-incrementing burst,
// reads them back through a repeated-START read, and checks the ACKs, the
// read data and the register outputs. A transfer to another device address
// must be NACKed and change nothing; a single-register write at pointer 7
// must change only that register.
`timescale 1ps/1ps
module tb_i2c_config;
  logic clk = 1'b0, rst_n = 1'b1, scl = 1'b1, m_low = 1'b0, sda_oe, sda;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  logic [7:0] regs [32];
  logic [7:0] model [32];
  int checks = 0, failures = 0;
  localparam int Q = 250000;   // quarter SCL period, ps

  i2c_config #(.DEV_ADDR(7'h20), .NREG(32)) dut (.clk, .rst_n, .scl, .sda_in(sda), .sda_oe, .regs);
  always #12500 clk = ~clk;
  assign sda = ~(m_low | sda_oe);

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0h exp %0h", w, got, exp); end
  endtask

  task automatic start();
    m_low = 1'b0; #Q scl = 1'b1; #Q m_low = 1'b1; #Q scl = 1'b0; #Q;
  endtask
  task automatic stop();
    m_low = 1'b1; #Q scl = 1'b1; #Q m_low = 1'b0; #(2*Q);
  endtask
  task automatic wr_byte(input logic [7:0] b, output bit ack);
    for (int i = 7; i >= 0; i--) begin
      m_low = ~b[i]; #Q scl = 1'b1; #(2*Q) scl = 1'b0; #Q;
    end
    m_low = 1'b0; #Q scl = 1'b1; #Q ack = ~sda; #Q scl = 1'b0; #Q;
  endtask
  task automatic rd_byte(input bit ack, output logic [7:0] b);
    m_low = 1'b0;
    for (int i = 7; i >= 0; i--) begin
      #Q scl = 1'b1; #Q b[i] = sda; #Q scl = 1'b0; #Q;
    end
    m_low = ack; #Q scl = 1'b1; #(2*Q) scl = 1'b0; #Q; m_low = 1'b0;
  endtask

  initial begin
    bit a;
    logic [7:0] d;
    #100000 rst_n = 1'b1;
    #1000000;
    // burst write of all registers
    start(); wr_byte({7'h20, 1'b0}, a); chk("addr ack", a, 1);
    wr_byte(8'd0, a); chk("ptr ack", a, 1);
    for (int r = 0; r < 32; r++) begin
      model[r] = 8'($urandom);
      wr_byte(model[r], a); chk("data ack", a, 1);
    end
    stop();
    for (int r = 0; r < 32; r++) chk("reg out", regs[r], model[r]);
    // read back
    start(); wr_byte({7'h20, 1'b0}, a); wr_byte(8'd0, a);
    start(); wr_byte({7'h20, 1'b1}, a); chk("read addr ack", a, 1);
    for (int r = 0; r < 32; r++) begin
      rd_byte(r != 31, d); chk("read data", d, model[r]);
    end
    stop();
    // other device address
    start(); wr_byte({7'h21, 1'b0}, a); chk("foreign nack", a, 0);
    wr_byte(8'd3, a); wr_byte(8'hAA, a); stop();
    chk("foreign no write", regs[3], model[3]);
    // single register write
    start(); wr_byte({7'h20, 1'b0}, a); wr_byte(8'd7, a); wr_byte(8'h5C, a); stop();
    model[7] = 8'h5C;
    for (int r = 0; r < 32; r++) chk("after single write", regs[r], model[r]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
