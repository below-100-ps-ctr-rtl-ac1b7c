// tb_tdc_channel: end-to-end test of one TDC channel.
//
// A behavioural 16-phase VCO (24 ps cells), the clock_manager and a
// coarse_counter surround one tdc_channel. Hit pulses are placed in the
// middle of fine bins, at least one VCO period away from the 40 MHz edges.
// For every pulse the test predicts ToA = {coarse, VCO period, fine bin} and
// ToT in half VCO periods from the edge times alone, and compares each word
// popped from the channel FIFO. Phases of the test:
//   1. high-speed mode, random pulses of 1..60 ns
//   2. width filter on: pulses outside [wmin, wmax] must be dropped and
//      counted as discarded
//   3. single-pulse mode (ToT only): presence flags
//   4. low-power mode: odd phases off, fine code on even bins only
//   5. validation on: without a validation pulse all pulses are discarded,
//      with it all pass
//   6. two pulses in one 25 ns period: the second is ignored by the FERO
//      control and counted as filtered
//   7. FIFO overflow: with nobody reading, only DEPTH pulses are kept and the
//      rest are counted as discarded
`timescale 1ps/1ps
module tb_tdc_channel;
  import fastic_pkg::*;
  localparam int CELL  = 24;
  localparam int P     = 32 * CELL;
  localparam int PER   = 32 * P;
  localparam int E0    = 2 * P;
  localparam int DEPTH = 8;

  logic rst_n = 1'b1, hit = 1'b0;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  bit run = 1'b0;                // set when rst_n is released
  logic [15:0] phase, phase_b;
  logic [FAST_W-1:0] gray;
  logic clk_fb, clk, cwrap;
  logic [COARSE_W-1:0] coarse;
  logic [CEXT_W-1:0] cext;
  logic low_power = 1'b0, sp_tot = 1'b0, wf_en = 1'b0, val_en = 1'b0, val_pulse = 1'b0;
  logic pop = 1'b0, reading = 1'b1;
  tx_mode_e mode = MODE_HS;
  logic [TOT_W-1:0] wmin = '0, wmax = '1;
  pulse_t head;
  logic empty, inc_filt, inc_disc;
  int checks = 0, failures = 0, n_filt = 0, n_disc = 0, n_out = 0;
  int m_next = 4;

  pulse_t exp_q[$];

  pll_analog_model #(.CELL(CELL)) u_vco (.ref_clk(1'b0), .up(1'b0), .dn(1'b0), .en(1'b1), .phase);
  assign phase_b = low_power ? (phase & 16'h5555) : phase;
  clock_manager u_cm (.vco_clk(phase[0]), .rst_n, .vco_gray(gray), .clk_fb, .clk_sync(clk));
  coarse_counter u_cc (.clk, .rst_n, .sync_rst(1'b0), .coarse, .ext(cext), .wrap(cwrap));
  tdc_channel #(.FIFO_DEPTH(DEPTH)) dut (
    .rst_n, .clk, .hit, .vco_phase(phase_b), .vco_gray(gray), .coarse, .low_power,
    .mode, .sp_tot, .wf_en, .wmin, .wmax, .val_en, .val_pulse,
    .pop, .head, .empty, .inc_filt, .inc_disc);

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d at %0t", w, got, exp, $time); end
  endtask

  always @(posedge clk) if (run) begin
    if (inc_filt) n_filt++;
    if (inc_disc) n_disc++;
  end

  // reader: pop one word per cycle and compare with the oldest prediction
  always @(negedge clk) begin
    pop = 1'b0;
    if (run && reading && !empty) begin
      n_out++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected pulse at %0t", $time); end
      else begin
        pulse_t e;
        e = exp_q.pop_front();
        chk("toa", head.toa, e.toa);
        chk("tot", head.tot, e.tot);
        chk("has_toa", head.has_toa, e.has_toa);
        chk("has_tot", head.has_tot, e.has_tot);
      end
      pop = 1'b1;
    end
  end

  // one pulse: rising edge in period mr at (jr, or_), falling in mf at (jf, of)
  task automatic pulse(int mr, int jr, int or_, int mf, int jf, int of, bit expect_out);
    longint tr, tf;
    pulse_t e;
    int fo;
    tr = E0 + longint'(mr) * PER + jr * P + or_ * CELL + CELL / 2;
    tf = E0 + longint'(mf) * PER + jf * P + of * CELL + CELL / 2;
    #(tr - $time) hit = 1'b1;
    #(tf - tr) hit = 1'b0;
    fo = low_power ? (or_ & ~1) : or_;
    e.toa = {COARSE_W'(mr + 1), FAST_W'(jr), FINE_W'(fo)};
    e.tot = TOT_W'((mf * 64 + jf * 2 + (of >= 16)) - (mr * 64 + jr * 2 + (or_ >= 16)));
    e.has_toa = (mode != MODE_SP) || !sp_tot;
    e.has_tot = (mode != MODE_SP) || sp_tot;
    if (expect_out) exp_q.push_back(e);
  endtask

  // random pulse starting at m_next; returns whether it passes the width filter
  task automatic rand_pulse(bit valid, output bit kept);
    int mr, jr, or_, mf, jf, of, tot;
    mr = m_next; jr = $urandom_range(1, 30); or_ = $urandom_range(0, 31);
    mf = mr + $urandom_range(0, 2);
    if (mf == mr) begin
      jf = $urandom_range(jr, 30);
      of = (jf == jr) ? $urandom_range(or_, 31) : $urandom_range(0, 31);
    end else begin
      jf = $urandom_range(1, 30); of = $urandom_range(0, 31);
    end
    if (mf == mr && jf == jr && of <= or_) begin
      // keep the falling edge strictly after the rising one
      if (or_ == 31) begin mf = mr + 1; jf = 1; of = 0; end
      else of = or_ + 1;
    end
    tot = (mf * 64 + jf * 2 + (of >= 16)) - (mr * 64 + jr * 2 + (or_ >= 16));
    kept = valid && (!wf_en || (tot >= wmin && tot <= wmax));
    pulse(mr, jr, or_, mf, jf, of, kept);
    m_next = mf + 1;
  endtask

  task automatic drain();
    m_next += 12;
    #(longint'(m_next - 2) * PER + E0 - $time);
    chk("all pulses read", exp_q.size(), 0);
  endtask

  initial begin
    int d0, f0, n_exp_disc;
    bit kept;
    #1000 rst_n = 1'b1; run = 1'b1;

    // 1. high speed
    repeat (300) rand_pulse(1'b1, kept);
    drain();
    chk("no discards in phase 1", n_disc, 0);

    // 2. width filter
    @(negedge clk); wf_en = 1'b1; wmin = 12'd20; wmax = 12'd100;
    m_next = (int'($time) - E0) / PER + 2;
    d0 = n_disc; n_exp_disc = 0;
    repeat (300) begin rand_pulse(1'b1, kept); if (!kept) n_exp_disc++; end
    drain();
    chk("width-filter discards", n_disc - d0, n_exp_disc);
    if (n_exp_disc < 50) begin failures++; $display("FAIL too few filtered pulses"); end
    @(negedge clk); wf_en = 1'b0;

    // 3. single pulse, ToT only
    mode = MODE_SP; sp_tot = 1'b1;
    m_next = (int'($time) - E0) / PER + 2;
    repeat (40) rand_pulse(1'b1, kept);
    drain();
    @(negedge clk); mode = MODE_HS; sp_tot = 1'b0;

    // 4. low power
    low_power = 1'b1;
    m_next = (int'($time) - E0) / PER + 2;
    repeat (200) rand_pulse(1'b1, kept);
    drain();
    @(negedge clk); low_power = 1'b0;

    // 5. validation
    val_en = 1'b1;
    m_next = (int'($time) - E0) / PER + 2;
    d0 = n_disc;
    repeat (50) rand_pulse(1'b0, kept);
    drain();
    chk("unvalidated pulses discarded", n_disc - d0, 50);
    val_pulse = 1'b1;
    m_next = (int'($time) - E0) / PER + 2;
    repeat (50) rand_pulse(1'b1, kept);
    drain();
    @(negedge clk); val_en = 1'b0; val_pulse = 1'b0;

    // 6. two pulses inside one period: only the first is digitized
    m_next = (int'($time) - E0) / PER + 2;
    f0 = n_filt;
    for (int i = 0; i < 20; i++) begin
      int jr;
      jr = $urandom_range(1, 20);
      pulse(m_next, jr, 3, m_next, jr + 2, 7, 1'b1);
      pulse(m_next, jr + 5, 9, m_next, jr + 8, 1, 1'b0);
      m_next += 1;
    end
    drain();
    chk("second pulses filtered", n_filt - f0, 20);

    // 7. channel FIFO overflow
    reading = 1'b0;
    m_next = (int'($time) - E0) / PER + 2;
    d0 = n_disc;
    for (int i = 0; i < 20; i++) rand_pulse(i < DEPTH, kept);
    m_next += 12;
    #(longint'(m_next) * PER + E0 - $time);
    chk("overflow discards", n_disc - d0, 20 - DEPTH);
    reading = 1'b1;
    drain();
    chk("outputs", n_out, 300 + 300 - n_exp_disc + 40 + 200 + 50 + 20 + DEPTH);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd5000 * PER);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
