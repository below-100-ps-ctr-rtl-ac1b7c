// tb_pulse_processor: random pulses against an independent ToA/ToT model.
//
// Each random pulse is defined by its rising time in 24.4 ps bins and its
// width in bins; the test builds the edge records from these times and
// predicts ToA (the rising time modulo 2^22 bins) and ToT (difference of the
// two times in 390 ps units, rising edge rounded down to a half period,
// saturated at 4095). It also checks the width filter and the single-pulse
// flags. Output is expected one cycle after the input.
`timescale 1ps/1ps
module tb_pulse_processor;
  import fastic_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, in_v = 1'b0, out_v, filtered;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  pulse_raw_t in_p = '0;
  pulse_t out_p;
  tx_mode_e mode = MODE_HER;
  logic sp_tot = 1'b0, wf_en = 1'b0;
  logic [11:0] wmin = '0, wmax = '0;
  int checks = 0, failures = 0;

  pulse_processor dut (.clk, .rst_n, .in_v, .in_p, .mode, .sp_tot, .wf_en, .wmin, .wmax,
                       .out_v, .out_p, .filtered);
  always #12500 clk = ~clk;

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      longint tr, tf, tot;
      bit keep;
      tr = longint'($urandom_range(0, 32'h3FFFFF));
      tf = tr + longint'($urandom_range(0, (i % 3 == 0) ? 2000000 : 60000));
      mode   = tx_mode_e'(i % 4);
      sp_tot = 1'(i / 4);
      wf_en  = (i % 5 == 0);
      wmin = 12'd100; wmax = 12'd2000;
      @(negedge clk);
      in_v = 1'b1;
      in_p.rise.coarse = 12'(tr >> 10);
      in_p.rise.gray   = bin2gray(5'(tr >> 5));
      in_p.rise.fine   = 5'(tr);
      in_p.fall.coarse = 12'(tf >> 10);
      in_p.fall.gray   = bin2gray(5'(tf >> 5));
      in_p.fall.half   = 1'(tf >> 4);
      tot  = (tf >> 4) - (tr >> 4);
      if (tot > 4095) tot = 4095;
      keep = !wf_en || (tot >= 100 && tot <= 2000);
      @(negedge clk);
      in_v = 1'b0;
      chk("valid", out_v, keep);
      chk("filtered", filtered, !keep);
      if (keep) begin
        chk("toa", out_p.toa, tr & 32'h3FFFFF);
        chk("tot", out_p.tot, tot);
        chk("has_toa", out_p.has_toa, (mode != MODE_SP) || !sp_tot);
        chk("has_tot", out_p.has_tot, (mode != MODE_SP) || sp_tot);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
