// fastic_plus_top: digital part of the FastIC+ readout ASIC.
//
// Eight analog channels deliver binary time and energy pulses (and a
// trigger comparator output each); their analog front-ends, the PLL's charge
// pump, loop filter and ring VCO, and the SLVS pad driver are outside this
// RTL and meet it at the ports. Inside:
//  * PLL digital part: phase_buffers (odd phases off in low-power mode),
//    clock_manager (VCO / 32: Gray VCO-period counter, 40 MHz feedback and
//    back-end clocks) and pfd_lock (bang-bang detector with lock hysteresis).
//  * coarse_counter: 12-bit coarse time plus 12-bit extension at 40 MHz.
//  * per channel a mode_mux that forms the hit line for the selected
//    transmission mode, and nine tdc_channel instances: channels 0..7 and
//    channel 8 digitizing the selected trigger (trigger_logic).
//  * arbiter_mux (round robin or timestamp sorting) -> link_framer (adds
//    coarse-extension / statistics service words) -> async_fifo (global
//    FIFO, 40 MHz to VCO clock) -> aurora_tx (64B/66B, 80 Mb/s..1.28 Gb/s).
//  * stats_counters and the i2c_config register bank.
//
// Register map (8-bit registers, this design's choice; all reset to 0):
//   0: [0] digital mode (TDC on)  [2:1] transmission mode  [3] single-pulse
//      sends ToT  [4] arbitration PST  [5] validation on  [6] low power
//      [7] width filter on
//   1: channel enables 7..0
//   2: [1:0] trigger source  [2] trigger channel on  [5:3] link rate
//      (bit period 2^n VCO cycles)  [6] clear statistics
//   3/4: width-filter minimum / maximum bits 7..0; 5: [3:0] minimum 11..8,
//      [7:4] maximum 11..8 (ToT units of 390 ps)
//   6/7: PFD lock / unlock hysteresis counts
//   8..15: phase-buffer trim codes, 4 bits per phase (to the analog buffers)
//   16..31: analog settings (thresholds, gains...), passed to `analog_cfg`
// In analog mode (register 0 bit 0 clear) the TDC inputs are held low and
// the channels' binary pulses are passed to `bin_time_out`/`bin_energy_out`
// for the per-channel outputs of the predecessor chip.
`timescale 1ps/1ps
module fastic_plus_top
  import fastic_pkg::*;
#(
  parameter int unsigned CH_FIFO_DEPTH  = 8,
  parameter int unsigned GLB_FIFO_DEPTH = 16,
  parameter logic [6:0]  I2C_ADDR       = 7'h20
) (
  input  logic                rst_n,
  input  logic                sync_rst,       // synchronous coarse-counter reset
  input  logic                ref_clk,        // 40 MHz reference
  input  logic [N_PHASE-1:0]  vco_phase,      // from the ring VCO
  output logic                pfd_up,         // to the charge pump
  output logic                pfd_dn,
  output logic                pll_locked,
  output logic [N_PHASE*4-1:0] phase_trim,    // to the analog phase buffers
  input  logic [N_CH-1:0]     time_sig,       // time comparator pulses
  input  logic [N_CH-1:0]     energy_sig,     // energy (ramp) pulses
  input  logic [N_CH-1:0]     trig_sig,       // trigger comparator pulses
  input  logic                hl_trig,        // high-level (sum) trigger
  input  logic                ext_trig,       // external trigger / validation
  input  logic                scl,
  input  logic                sda_in,
  output logic                sda_oe,
  output logic                slvs_out,       // serial link bit to the SLVS pad
  output logic [7:0]          analog_cfg [16],
  output logic [N_CH-1:0]     bin_time_out,
  output logic [N_CH-1:0]     bin_energy_out
);
  logic       clk_fb, clk_sync, vco_clk;

  // ---------------- configuration ----------------
  logic [7:0] regs [32];

  i2c_config #(.DEV_ADDR(I2C_ADDR), .NREG(32)) u_i2c (
    .clk(clk_sync), .rst_n, .scl, .sda_in, .sda_oe, .regs
  );

  logic             digital, sp_tot, val_en, low_power, wf_en, trig_en, stat_clr;
  tx_mode_e         mode;
  arb_policy_e      policy;
  trig_src_e        tsrc;
  logic [N_CH-1:0]  ch_en;
  logic [2:0]       rate;
  logic [TOT_W-1:0] wmin, wmax;

  always_comb begin
    digital   = regs[0][0];
    mode      = tx_mode_e'(regs[0][2:1]);
    sp_tot    = regs[0][3];
    policy    = arb_policy_e'(regs[0][4]);
    val_en    = regs[0][5];
    low_power = regs[0][6];
    wf_en     = regs[0][7];
    ch_en     = regs[1];
    tsrc      = trig_src_e'(regs[2][1:0]);
    trig_en   = regs[2][2];
    rate      = regs[2][5:3];
    stat_clr  = regs[2][6];
    wmin      = {regs[5][3:0], regs[3]};
    wmax      = {regs[5][7:4], regs[4]};
    for (int i = 0; i < 8; i++) phase_trim[i*8 +: 8] = regs[8+i];
    for (int i = 0; i < 16; i++) analog_cfg[i] = regs[16+i];
    bin_time_out   = digital ? '0 : time_sig;
    bin_energy_out = digital ? '0 : energy_sig;
  end

  // ---------------- PLL digital part ----------------
  logic [N_PHASE-1:0]   phase_b;
  logic [N_PHASE*4-1:0] trim_unused;
  logic [FAST_W-1:0]    vco_gray;

  phase_buffers u_pbuf (
    .vco_phase, .low_power, .trim_in(phase_trim),
    .phase_out(phase_b), .trim_out(trim_unused)
  );
  assign vco_clk = phase_b[0];

  clock_manager u_cm (
    .vco_clk, .rst_n, .vco_gray, .clk_fb, .clk_sync
  );

  pfd_lock u_pfd (
    .ref_clk, .rst_n, .fb_clk(clk_fb), .lock_cycles(regs[6]),
    .unlock_cycles(regs[7]), .up(pfd_up), .dn(pfd_dn), .locked(pll_locked)
  );

  logic [COARSE_W-1:0] coarse;
  logic [CEXT_W-1:0]   cext;
  logic                cwrap;

  coarse_counter u_cc (
    .clk(clk_sync), .rst_n, .sync_rst, .coarse, .ext(cext), .wrap(cwrap)
  );

  // ---------------- hit lines ----------------
  logic [N_TDC-1:0] hit;
  logic             trig_hit, val_pulse;

  for (genvar c = 0; c < N_CH; c++) begin : g_mux
    mode_mux u_mm (
      .clk(clk_sync), .rst_n, .en(digital & ch_en[c]), .mode,
      .time_sig(time_sig[c]), .energy_sig(energy_sig[c]), .hit(hit[c])
    );
  end

  trigger_logic u_trig (
    .clk(clk_sync), .rst_n, .trig_ch(trig_sig), .time_ch(time_sig), .ch_en,
    .ext_trig, .hl_trig, .src(tsrc), .trig_hit, .val_pulse
  );
  assign hit[N_CH] = trig_hit & trig_en & digital;

  // ---------------- TDC channels ----------------
  pulse_t           head [N_TDC];
  logic [N_TDC-1:0] empty, pop, inc_filt, inc_disc;

  for (genvar c = 0; c < N_TDC; c++) begin : g_ch
    localparam bit IS_TRIG = (c == N_CH);
    tdc_channel #(.FIFO_DEPTH(CH_FIFO_DEPTH)) u_ch (
      .rst_n, .clk(clk_sync), .hit(hit[c]), .vco_phase(phase_b), .vco_gray,
      .coarse, .low_power,
      .mode(IS_TRIG ? MODE_HS : mode), .sp_tot,
      .wf_en(IS_TRIG ? 1'b0 : wf_en), .wmin, .wmax,
      .val_en(IS_TRIG ? 1'b0 : val_en), .val_pulse,
      .pop(pop[c]), .head(head[c]), .empty(empty[c]),
      .inc_filt(inc_filt[c]), .inc_disc(inc_disc[c])
    );
  end

  // ---------------- statistics ----------------
  logic [STAT_W-1:0] st_filt [N_TDC];
  logic [STAT_W-1:0] st_disc [N_TDC];

  stats_counters u_stats (
    .clk(clk_sync), .rst_n, .clear(stat_clr), .inc_filt, .inc_disc,
    .filt(st_filt), .disc(st_disc)
  );

  // ---------------- data transmission ----------------
  logic              arb_v, arb_ready, fw_en, f_full, f_afull, f_empty, f_rd;
  logic [WORD_W-1:0] arb_word, fw_data, f_data;
  logic              svc_sent, blk_start;

  arbiter_mux u_arb (
    .clk(clk_sync), .rst_n, .policy, .coarse_now(coarse), .empty, .head, .pop,
    .out_ready(arb_ready), .out_v(arb_v), .out_word(arb_word)
  );

  link_framer u_frm (
    .clk(clk_sync), .rst_n, .wrap(cwrap), .ext(cext),
    .stat_filt(st_filt), .stat_disc(st_disc),
    .arb_v, .arb_word, .arb_ready, .fifo_afull(f_afull), .fifo_full(f_full),
    .wr_en(fw_en), .wr_data(fw_data), .svc_sent
  );

  async_fifo #(.W(WORD_W), .DEPTH(GLB_FIFO_DEPTH)) u_gfifo (
    .wr_clk(clk_sync), .wr_rst_n(rst_n), .wr_en(fw_en), .wr_data(fw_data),
    .wr_full(f_full), .wr_afull(f_afull),
    .rd_clk(vco_clk), .rd_rst_n(rst_n), .rd_en(f_rd), .rd_data(f_data),
    .rd_empty(f_empty)
  );

  aurora_tx u_tx (
    .clk(vco_clk), .rst_n, .rate, .fifo_empty(f_empty), .fifo_data(f_data),
    .fifo_rd(f_rd), .serial_out(slvs_out), .block_start(blk_start)
  );
endmodule
