// tb_phase_buffers: random phase words in normal and low-power mode; in
// low-power mode every odd phase must be 0 and every even phase passed.
`timescale 1ps/1ps
module tb_phase_buffers;
  logic [15:0] ph, po;
  logic lp;
  logic [63:0] ti, to;
  int checks = 0, failures = 0;

  phase_buffers dut (.vco_phase(ph), .low_power(lp), .trim_in(ti), .phase_out(po), .trim_out(to));

  initial begin
    for (int i = 0; i < 200; i++) begin
      ph = 16'($urandom); lp = 1'(i % 2); ti = {$urandom, $urandom};
      #1;
      for (int k = 0; k < 16; k++) begin
        checks++;
        if (po[k] !== ((lp && (k % 2 == 1)) ? 1'b0 : ph[k])) begin
          failures++; $display("FAIL phase %0d lp %0b", k, lp);
        end
      end
      checks++; if (to !== ti) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
