// tb_fastic_plus_top: end-to-end test of the whole digital chip.
//
// The top runs with all its parameters at their defaults. Around it:
//  * a behavioural model of the analog PLL part (16-phase ring VCO, 24 ps
//    cells) closed through the chip's own phase detector and a 40 MHz
//    reference that starts 1.2 ns off;
//  * an I2C master that programs the register map and reads it back;
//  * a hit generator that places edges of the time, energy, trigger and
//    external-trigger inputs in the middle of chosen fine bins. At every hit
//    edge it notes, from its own count of VCO periods since reset and the
//    phase vector it sees, the ToA and half-period time the chip must report;
//  * a link receiver that finds the 66-bit block boundaries on the serial
//    output from the sync headers, descrambles the payload with its own
//    1 + x^39 + x^58 descrambler and checks every data word: pulse words
//    against the predictions of their channel (in order), service words
//    against the statistics the test expects, idle blocks against 0x1E.
// The test walks through: analog mode (binary pulses on the outputs, no
// data), PLL lock, the FERO filter (two pulses in one 25 ns period), the
// width filter, validation by the external trigger (which also feeds the
// trigger channel), the coarse-extension service words with the statistics
// of channels 0 and 1, channel FIFO overflow under a hit rate the link cannot
// carry, the high energy resolution, hybrid, single-pulse and low-power
// modes, the trigger channel with the OR of the trigger comparators, round
// robin and timestamp-sorting arbitration, and finally the slowest link
// rate. Each of these mechanisms is counted and must occur at least once.
`timescale 1ps/1ps
module tb_fastic_plus_top;
  import fastic_pkg::*;
  localparam int CELL = 24;
  localparam int P    = 32 * CELL;
  localparam int PER  = 32 * P;
  localparam int Q    = 100000;            // quarter SCL period (2.5 MHz SCL)

  // ---------------- chip and its surroundings ----------------
  logic rst_n = 1'b1, sync_rst = 1'b0, ref_clk = 1'b0;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  bit run = 1'b0;                // set when rst_n is released
  logic [15:0] phase;
  logic pfd_up, pfd_dn, pll_locked;
  logic [63:0] phase_trim;
  logic [7:0] time_sig = '0, energy_sig = '0, trig_sig = '0;
  logic hl_trig = 1'b0, ext_trig = 1'b0;
  logic scl = 1'b1, m_low = 1'b0, sda_oe, sda;
  logic slvs_out;
  logic [7:0] analog_cfg [16];
  logic [7:0] bin_time_out, bin_energy_out;

  assign sda = ~(m_low | sda_oe);

  pll_analog_model #(.CELL(CELL), .STEP(4)) u_vco (
    .ref_clk, .up(pfd_up), .dn(pfd_dn), .en(1'b1), .phase);

  fastic_plus_top dut (
    .rst_n, .sync_rst, .ref_clk, .vco_phase(phase), .pfd_up, .pfd_dn, .pll_locked,
    .phase_trim, .time_sig, .energy_sig, .trig_sig, .hl_trig, .ext_trig,
    .scl, .sda_in(sda), .sda_oe, .slvs_out, .analog_cfg, .bin_time_out, .bin_energy_out);

  initial begin
    #(2 * P + 1200);
    forever begin ref_clk = 1'b1; #(PER / 2); ref_clk = 1'b0; #(PER / 2); end
  end

  int checks = 0, failures = 0;
  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d at %0t", w, got, exp, $time); end
  endtask

  // ---------------- mirror of the configuration ----------------
  logic [7:0] cfg [32];
  initial foreach (cfg[i]) cfg[i] = '0;
  function automatic tx_mode_e c_mode(); return tx_mode_e'(cfg[0][2:1]); endfunction

  // ---------------- I2C master ----------------
  task automatic i_start();
    m_low = 1'b0; #Q scl = 1'b1; #Q m_low = 1'b1; #Q scl = 1'b0; #Q;
  endtask
  task automatic i_stop();
    m_low = 1'b1; #Q scl = 1'b1; #Q m_low = 1'b0; #(2*Q);
  endtask
  task automatic i_wr(input logic [7:0] b);
    for (int i = 7; i >= 0; i--) begin
      m_low = ~b[i]; #Q scl = 1'b1; #(2*Q) scl = 1'b0; #Q;
    end
    m_low = 1'b0; #Q scl = 1'b1; #Q chk("i2c ack", !sda, 1); #Q scl = 1'b0; #Q;
  endtask
  task automatic i_rd(input bit more, output logic [7:0] b);
    m_low = 1'b0;
    for (int i = 7; i >= 0; i--) begin
      #Q scl = 1'b1; #Q b[i] = sda; #Q scl = 1'b0; #Q;
    end
    m_low = more; #Q scl = 1'b1; #(2*Q) scl = 1'b0; #Q; m_low = 1'b0;
  endtask
  task automatic reg_write(int first, logic [7:0] v[$]);
    i_start(); i_wr({7'h20, 1'b0}); i_wr(8'(first));
    foreach (v[i]) begin i_wr(v[i]); cfg[first + i] = v[i]; end
    i_stop();
  endtask

  // ---------------- VCO period count and phase decoding ----------------
  longint kc = 0;                // VCO periods begun since reset release
  longint t_k0 = 0;              // time of the latest 40 MHz (divider) edge
  always @(posedge phase[0]) if (run) begin
    kc++;
    if ((kc - 1) % 32 == 0) t_k0 = $time;
  end

  function automatic int cell_of(logic [15:0] ph);
    int ones = $countones(ph);
    return ph[0] ? ones - 1 : 31 - ones;
  endfunction

  // ---------------- hit scheduling ----------------
  typedef struct {
    int o;             // cell 0..31 in the VCO period
    int sig;           // 0 time, 1 energy, 2 trigger comparator, 3 external
    int ch;
    bit val;
    int mark;          // 1: hit-line rise of channel hc, 2: its fall
    int hc;
    bit keep, may_drop;
    int tag;
  } ev_t;
  ev_t evs[longint][$];

  typedef struct {
    logic [TOA_W-1:0] toa;
    logic [TOT_W-1:0] tot;
    bit has_toa, has_tot, may_drop;
    int tag;
  } exp_t;
  exp_t exp_q[N_TDC][$];
  logic [TOA_W-1:0] r_toa [N_TDC];
  int r_ht [N_TDC];

  // mechanism counters
  localparam int T_HS = 0, T_HER = 1, T_HYB = 2, T_SP = 3, T_LP = 4, T_TRIG = 5,
                 T_RR = 6, T_PST = 7, T_OVF = 8, T_VAL = 9, T_EXTTRIG = 10, NT = 11;
  int n_words [NT];
  int n_wf = 0, n_val_disc = 0, n_ferofilt = 0, n_dropped = 0, n_idle = 0, n_svc = 0;
  int n_ch1_sent_ovf = 0, n_ch1_recv_ovf = 0;
  int n_lock = 0, n_analog = 0, n_i2c_read = 0, n_slow = 0, n_pst_ok = 0, n_rr_asc = 0;

  function automatic int half_time(longint k, int o);
    return int'(((k - 1) / 32 + 1) * 64 + ((k - 1) % 32) * 2 + (o >= 16));
  endfunction

  task automatic apply(ev_t e);
    int o;
    unique case (e.sig)
      0: time_sig[e.ch] = e.val;
      1: energy_sig[e.ch] = e.val;
      2: trig_sig[e.ch] = e.val;
      default: ext_trig = e.val;
    endcase
    if (e.mark == 0) return;
    o = cell_of(phase);
    if (e.mark == 1) begin
      int fine = cfg[0][6] ? (o & ~1) : o;
      r_toa[e.hc] = {COARSE_W'((kc - 1) / 32 + 1), FAST_W'((kc - 1) % 32), FINE_W'(fine)};
      r_ht[e.hc] = half_time(kc, o);
    end else begin
      exp_t x;
      int d;
      bit keep;
      d = (half_time(kc, o) - r_ht[e.hc]) & 18'h3FFFF;
      x.toa = r_toa[e.hc];
      x.tot = (d > 4095) ? 12'hFFF : TOT_W'(d);
      x.has_toa = (e.hc == N_CH) || (c_mode() != MODE_SP) || !cfg[0][3];
      x.has_tot = (e.hc == N_CH) || (c_mode() != MODE_SP) ||  cfg[0][3];
      x.may_drop = e.may_drop; x.tag = e.tag;
      keep = e.keep;
      if (keep && e.hc < N_CH && cfg[0][7] &&
          (x.tot < {cfg[5][3:0], cfg[3]} || x.tot > {cfg[5][7:4], cfg[4]})) begin
        keep = 1'b0; n_wf++;
      end
      if (keep) exp_q[e.hc].push_back(x);
    end
  endtask

  initial begin
    forever begin
      @(posedge phase[0]);
      #0;
      if (evs.exists(kc)) begin
        ev_t q[$];
        int at;
        q = evs[kc]; evs.delete(kc);
        q.sort() with (item.o);
        at = 0;
        foreach (q[i]) begin
          int t = q[i].o * CELL + CELL / 2;
          if (t > at) begin #(t - at); at = t; end
          apply(q[i]);
        end
      end
    end
  end

  // VCO period index of cell j (1..30) of 40 MHz period m
  function automatic longint kof(longint m, int j); return 32 * m + j + 1; endfunction
  function automatic longint m_now(); return (kc - 1) / 32; endfunction

  task automatic add(longint k, int o, int sig, int ch, bit val, int mark, int hc,
                     bit keep, bit may_drop, int tag);
    ev_t e;
    e.o = o; e.sig = sig; e.ch = ch; e.val = val; e.mark = mark; e.hc = hc;
    e.keep = keep; e.may_drop = may_drop; e.tag = tag;
    evs[k].push_back(e);
  endtask

  // a pulse on one input; rise at (kr, or_), fall at (kf, of)
  task automatic pulse(int sig, int ch, int hc, longint kr, int or_, longint kf, int of,
                       bit keep, bit may_drop, int tag);
    add(kr, or_, sig, ch, 1'b1, 1, hc, keep, may_drop, tag);
    add(kf, of, sig, ch, 1'b0, 2, hc, keep, may_drop, tag);
  endtask

  // time pulse followed by an energy pulse (HER / hybrid modes): the hit line
  // rises with the time pulse and falls with the energy pulse
  task automatic te_pulse(int ch, longint m, int jr, int or_, longint kf, int of, int tag);
    add(kof(m, jr), or_, 0, ch, 1'b1, 1, ch, 1'b1, 1'b0, tag);
    add(kof(m, jr + 1), 5, 1, ch, 1'b1, 0, ch, 1'b1, 1'b0, tag);
    add(kof(m, jr + 2), 9, 0, ch, 1'b0, 0, ch, 1'b1, 1'b0, tag);
    add(kf, of, 1, ch, 1'b0, 2, ch, 1'b1, 1'b0, tag);
  endtask

  // wait until period m has begun
  task automatic wait_period(longint m);
    while (m_now() < m) @(posedge phase[0]);
  endtask

  // random pulses of 1..dmax VCO periods on channel ch; returns the next free period
  task automatic rand_pulses(int ch, int n, int dmax, int tag, bit te, inout longint m);
    for (int i = 0; i < n; i++) begin
      int jr, or_, of;
      longint kr, kf;
      jr = te ? $urandom_range(1, 26) : $urandom_range(1, 30);
      or_ = $urandom_range(0, 31); of = $urandom_range(0, 31);
      kr = kof(m, jr);
      kf = kr + $urandom_range(te ? 3 : 1, dmax);
      while ((kf - 1) % 32 == 0 || (kf - 1) % 32 == 31) kf++;
      if (te) te_pulse(ch, m, jr, or_, kf, of, tag);
      else    pulse(0, ch, ch, kr, or_, kf, of, 1'b1, 1'b0, tag);
      m = (kf - 1) / 32 + 1;
    end
  endtask

  task automatic settle(longint m_end);
    wait_period(m_end + 40);
  endtask

  // ---------------- link receiver ----------------
  bit rx_on = 1'b1, rx_lock = 1'b0;
  int bitpos = 0, good = 0;
  logic h0, h1;
  logic [63:0] pay;
  logic [57:0] dscr = '0;
  logic [TOA_W-1:0] last_toa;
  int last_ch = -1, last_tag = -1;
  logic [15:0] svc_filt [$], svc_disc [$];
  int svc_ch [$], svc_ext [$];

  task automatic word_in(logic [63:0] w);
    if (w[63:60] == WT_SERVICE) begin
      n_svc++;
      svc_ext.push_back(int'(w[59:48])); svc_ch.push_back(int'(w[47:44]));
      svc_filt.push_back(w[43:28]); svc_disc.push_back(w[27:12]);
      chk("service low bits", w[11:0], 0);
    end else if (w[63:60] == WT_PULSE) begin
      int c, idx;
      logic [TOA_W-1:0] toa;
      logic [TOT_W-1:0] tot;
      c = int'(w[59:56]); toa = w[53:32]; tot = w[31:20];
      if (c >= N_TDC) begin failures++; $display("FAIL bad channel %0d", c); return; end
      idx = -1;
      foreach (exp_q[c][i])
        if (idx < 0 && (!exp_q[c][i].has_toa || exp_q[c][i].toa == toa) &&
            (!exp_q[c][i].has_tot || exp_q[c][i].tot == tot)) idx = i;
      if (idx < 0) begin
        failures++;
        $display("FAIL unexpected pulse word ch %0d toa %0h tot %0d at %0t", c, toa, tot, $time);
        return;
      end
      for (int i = 0; i < idx; i++) begin
        if (!exp_q[c][0].may_drop) begin
          failures++; $display("FAIL lost pulse ch %0d toa %0h at %0t", c, exp_q[c][0].toa, $time);
        end else n_dropped++;
        void'(exp_q[c].pop_front());
      end
      begin
        exp_t x = exp_q[c].pop_front();
        checks++;
        chk("has_toa", w[55], x.has_toa); chk("has_tot", w[54], x.has_tot);
        n_words[x.tag]++;
        if (x.tag == T_OVF && c == 1) n_ch1_recv_ovf++;
        // arbitration order inside one burst (same coarse period)
        if (x.tag == last_tag && toa[TOA_W-1 -: COARSE_W] == last_toa[TOA_W-1 -: COARSE_W]) begin
          if (x.tag == T_PST) begin chk("PST order", toa > last_toa, 1); n_pst_ok++; end
          if (x.tag == T_RR && c > last_ch) n_rr_asc++;
        end
        last_toa = toa; last_ch = c; last_tag = x.tag;
      end
    end else begin
      failures++; $display("FAIL unknown word type %0h", w[63:60]);
    end
  endtask

  always @(negedge phase[0]) if (run && rx_on) begin
    logic s;
    s = slvs_out;
    if (bitpos == 0) begin h0 = s; bitpos = 1; end
    else if (bitpos == 1) begin
      h1 = s;
      if (h0 == h1) begin
        if (rx_lock) begin failures++; $display("FAIL lost block lock at %0t", $time); end
        rx_lock = 1'b0; good = 0; h0 = s; bitpos = 1;   // slip one bit
      end else bitpos = 2;
    end else begin
      pay[bitpos - 2] = s ^ dscr[38] ^ dscr[57];
      dscr = {dscr[56:0], s};
      bitpos++;
      if (bitpos == 66) begin
        bitpos = 0;
        good++;
        if (good == 40) rx_lock = 1'b1;
        if (good > 40) begin
          if ({h0, h1} == 2'b01) word_in(pay);
          else begin n_idle++; chk("idle block", pay, 64'h1E); end
        end
      end
    end
  end

  // ---------------- PLL lock monitor ----------------
  always @(posedge pll_locked) if (run) n_lock++;

  // ---------------- main sequence ----------------
  initial begin
    longint m;
    logic [7:0] d;
    foreach (n_words[i]) n_words[i] = 0;
    #1000 rst_n = 1'b1; run = 1'b1;

    // analog mode: binary pulses pass to the outputs, the TDC stays idle
    #(20 * P);
    for (int i = 0; i < 4; i++) begin
      time_sig[i] = 1'b1; energy_sig[i] = 1'b1; #1;
      chk("analog time out", bin_time_out[i], 1); chk("analog energy out", bin_energy_out[i], 1);
      #(5 * P);
      time_sig[i] = 1'b0; energy_sig[i] = 1'b0; #1;
      chk("analog out low", bin_time_out[i] | bin_energy_out[i], 0);
      n_analog++;
    end

    // configuration: digital, high speed, RR, validation on, trigger channel
    // from the external trigger; width window 20..100 units of 390 ps
    reg_write(0, '{8'h23, 8'hFF, 8'h06, 8'd20, 8'd100, 8'h00});

    // validation by the external trigger, which also feeds the trigger channel
    m = m_now() + 3;
    for (int i = 0; i < 30; i++) begin
      bit v;
      v = i[0];
      pulse(0, 0, 0, kof(m, 5), $urandom_range(0, 31), kof(m, 15), $urandom_range(0, 31), v, 1'b0, T_VAL);
      if (v) pulse(3, 0, N_CH, kof(m + 1, 10), $urandom_range(0, 31), kof(m + 3, 5),
                   $urandom_range(0, 31), 1'b1, 1'b0, T_EXTTRIG);
      else n_val_disc++;
      m += 12;
    end
    settle(m);

    // width filter on, validation off
    reg_write(0, '{8'h83});
    // FERO filter: a second pulse inside the same 25 ns period is ignored
    m = m_now() + 3;
    for (int i = 0; i < 20; i++) begin
      pulse(0, 0, 0, kof(m, 1), $urandom_range(0, 31), kof(m, 13), $urandom_range(0, 31), 1'b1, 1'b0, T_HS);
      pulse(0, 0, 0, kof(m, 16), 3, kof(m, 20), 20, 1'b0, 1'b0, T_HS);
      n_ferofilt++;
      m += 2;
    end
    rand_pulses(0, 80, 130, T_HS, 1'b0, m);
    settle(m);
    chk("channel 0 done before the first coarse wrap", m_now() < 4000, 1);

    // coarse extension 1 carries channel 0's statistics
    wait (n_svc >= 1);
    chk("service ext 1", svc_ext[0], 1);
    chk("service ch 0", svc_ch[0], 0);
    chk("channel 0 filtered edges", svc_filt[0], n_ferofilt);
    chk("channel 0 discarded pulses", svc_disc[0], n_val_disc + n_wf);

    // lock hysteresis counts, then read registers 0..7 back after a repeated START
    reg_write(0, '{8'h03, 8'hFF, 8'h00});
    reg_write(6, '{8'd20, 8'd6});
    i_start(); i_wr({7'h20, 1'b0}); i_wr(8'd0);
    i_start(); i_wr({7'h20, 1'b1});
    for (int r = 0; r < 8; r++) begin i_rd(r != 7, d); chk("i2c read back", d, cfg[r]); end
    i_stop();
    n_i2c_read++;

    // overflow: eight channels hit every period, far beyond the link rate
    m = m_now() + 3;
    for (int i = 0; i < 60; i++) begin
      for (int c = 0; c < N_CH; c++) begin
        pulse(0, c, c, kof(m, 1 + 3 * c), $urandom_range(0, 31), kof(m, 26), $urandom_range(0, 31),
              1'b1, 1'b1, T_OVF);
        if (c == 1) n_ch1_sent_ovf++;
      end
      m++;
    end
    settle(m + 300);

    // high energy resolution, hybrid, single pulse (ToT) and low power
    reg_write(0, '{8'h01});
    m = m_now() + 3; rand_pulses(1, 60, 60, T_HER, 1'b1, m); settle(m);
    reg_write(0, '{8'h05});
    m = m_now() + 3; rand_pulses(2, 60, 60, T_HYB, 1'b1, m); settle(m);
    reg_write(0, '{8'h0F});
    m = m_now() + 3; rand_pulses(3, 60, 60, T_SP, 1'b0, m); settle(m);
    reg_write(0, '{8'h43});
    m = m_now() + 3; rand_pulses(4, 100, 60, T_LP, 1'b0, m); settle(m);

    // trigger channel from the OR of the trigger comparators
    reg_write(0, '{8'h03, 8'hFF, 8'h04});
    m = m_now() + 3;
    for (int i = 0; i < 30; i++) begin
      int c;
      c = $urandom_range(0, 7);
      pulse(2, c, N_CH, kof(m, $urandom_range(1, 10)), $urandom_range(0, 31),
            kof(m, $urandom_range(12, 30)), $urandom_range(0, 31), 1'b1, 1'b0, T_TRIG);
      m += 2;
    end
    settle(m);

    // arbitration: seven channels in one period, latest channel earliest
    for (int pol = 0; pol < 2; pol++) begin
      reg_write(0, '{pol ? 8'h13 : 8'h03});
      m = m_now() + 3;
      for (int b = 0; b < 12; b++) begin
        for (int c = 1; c <= 7; c++)
          pulse(0, c, c, kof(m, 2 + 3 * (7 - c)), $urandom_range(0, 31),
                kof(m, $urandom_range(23, 30)), $urandom_range(0, 31), 1'b1, 1'b0,
                pol ? T_PST : T_RR);
        m += 25;
      end
      settle(m);
    end

    // the second coarse extension carries channel 1's statistics
    wait (n_svc >= 2);
    chk("service ext 2", svc_ext[1], 2);
    chk("service ch 1", svc_ch[1], 1);
    chk("channel 1 overflow discards", svc_disc[1], n_ch1_sent_ovf - n_ch1_recv_ovf);

    // PLL: locked, and the feedback edge close to the reference edge
    @(posedge ref_clk);
    chk("pll locked", pll_locked, 1);
    chk("phase error below 100 ps", ($time - t_k0 < 100) || ($time - t_k0 > PER - 100), 1);

    // slowest link rate: 16 VCO clocks per bit
    rx_on = 1'b0;
    reg_write(2, '{8'h20});
    begin
      longint t_last = 0, dmin = 64'd1 << 40;
      logic prev = slvs_out;
      repeat (20000) begin
        @(negedge phase[0]);
        if (slvs_out != prev) begin
          if (t_last != 0 && $time - t_last < dmin) dmin = $time - t_last;
          t_last = $time; prev = slvs_out;
        end
      end
      chk("80 Mb/s bit period", dmin >= 16 * P - 50, 1);
      if (t_last != 0) n_slow++;
    end

    // every channel queue must be empty (overflow losses excepted)
    for (int c = 0; c < N_TDC; c++) begin
      foreach (exp_q[c][i]) if (!exp_q[c][i].may_drop) begin
        failures++; $display("FAIL pulse never received ch %0d", c);
      end
      n_dropped += exp_q[c].size();
    end

    $display("mechanisms: lock=%0d analog=%0d i2c_read=%0d fero_filter=%0d width_filter=%0d",
             n_lock, n_analog, n_i2c_read, n_ferofilt, n_wf);
    $display("  validation_discard=%0d validated=%0d ext_trigger=%0d service=%0d idle=%0d",
             n_val_disc, n_words[T_VAL], n_words[T_EXTTRIG], n_svc, n_idle);
    $display("  overflow_dropped=%0d HS=%0d HER=%0d HYB=%0d SP=%0d low_power=%0d trig=%0d",
             n_dropped, n_words[T_HS], n_words[T_HER], n_words[T_HYB], n_words[T_SP],
             n_words[T_LP], n_words[T_TRIG]);
    $display("  RR=%0d (ascending %0d) PST=%0d (ordered %0d) slow_rate=%0d",
             n_words[T_RR], n_rr_asc, n_words[T_PST], n_pst_ok, n_slow);
    chk("mech lock", n_lock > 0, 1);
    chk("mech analog", n_analog > 0, 1);
    chk("mech i2c read", n_i2c_read > 0, 1);
    chk("mech fero filter", n_ferofilt > 0, 1);
    chk("mech width filter", n_wf > 0, 1);
    chk("mech validation discard", n_val_disc > 0, 1);
    chk("mech validated", n_words[T_VAL] > 0, 1);
    chk("mech ext trigger", n_words[T_EXTTRIG] > 0, 1);
    chk("mech service", n_svc >= 2, 1);
    chk("mech idle", n_idle > 0, 1);
    chk("mech overflow", n_dropped > 0, 1);
    chk("mech HS", n_words[T_HS] > 0, 1);
    chk("mech HER", n_words[T_HER] > 0, 1);
    chk("mech HYB", n_words[T_HYB] > 0, 1);
    chk("mech SP", n_words[T_SP] > 0, 1);
    chk("mech low power", n_words[T_LP] > 0, 1);
    chk("mech trigger", n_words[T_TRIG] > 0, 1);
    chk("mech RR", n_words[T_RR] > 0, 1);
    chk("mech RR order", n_rr_asc >= 12 * 5, 1);
    chk("mech PST", n_words[T_PST] > 0, 1);
    chk("mech PST order", n_pst_ok >= 12 * 6, 1);
    chk("mech slow rate", n_slow > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd20000 * PER);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
