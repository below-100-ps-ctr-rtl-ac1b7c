// pfd_lock: digital phase-frequency detector with lock hysteresis.
//
// On each rising edge of the 40 MHz reference clock the feedback clock
// (VCO / 32) is sampled. If it is already high the VCO is early and `dn`
// is asserted for the next reference period; otherwise `up` is asserted.
// These bang-bang decisions drive the charge pump. A locked loop dithers,
// so its decisions alternate; the detector counts how long the current run
// of equal decisions is. While runs stay within RUN_MAX the lock counter
// grows and `locked` rises after `lock_cycles` reference cycles; runs longer
// than RUN_MAX (a real phase error) feed the unlock counter, and `locked`
// falls after `unlock_cycles` such cycles. The two programmable counts give
// the hysteresis the paper describes. The bang-bang sampling scheme and
// RUN_MAX are this design's choices; the paper only says the PFD is digital
// and that the cycles kept in the locked or unlocked state are programmable.
`timescale 1ps/1ps
module pfd_lock #(
  parameter int unsigned CNT_W   = 8,
  parameter int unsigned RUN_MAX = 4
) (
  input  logic             ref_clk,
  input  logic             rst_n,
  input  logic             fb_clk,
  input  logic [CNT_W-1:0] lock_cycles,
  input  logic [CNT_W-1:0] unlock_cycles,
  output logic             up,
  output logic             dn,
  output logic             locked
);
  logic             fb_s;          // feedback level at reference edge
  logic             last_dec;
  logic [3:0]       run;
  logic [CNT_W-1:0] lock_cnt, unlock_cnt;

  assign fb_s = fb_clk;

  always_ff @(posedge ref_clk or negedge rst_n) begin
    if (!rst_n) begin
      up <= 1'b0; dn <= 1'b0; last_dec <= 1'b0; run <= '0;
      lock_cnt <= '0; unlock_cnt <= '0; locked <= 1'b0;
    end else begin
      up       <= ~fb_s;
      dn       <=  fb_s;
      last_dec <=  fb_s;
      if (fb_s == last_dec) run <= (run == 4'hF) ? run : run + 1'b1;
      else                  run <= 4'd1;

      if (run <= 4'(RUN_MAX)) begin
        unlock_cnt <= '0;
        if (!locked) begin
          if (lock_cnt >= lock_cycles) begin locked <= 1'b1; lock_cnt <= '0; end
          else lock_cnt <= lock_cnt + 1'b1;
        end
      end else begin
        lock_cnt <= '0;
        if (locked) begin
          if (unlock_cnt >= unlock_cycles) begin locked <= 1'b0; unlock_cnt <= '0; end
          else unlock_cnt <= unlock_cnt + 1'b1;
        end
      end
    end
  end
endmodule
