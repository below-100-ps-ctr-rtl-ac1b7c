// tb_fero: self-checking test of the front-end readout (FERO).
//
// A behavioural 16-phase VCO (pll_analog_model, 24 ps cells) drives the
// clock_manager, which provides the Gray VCO-period counter and the 40 MHz
// clock, and a coarse_counter. Hit pulses are placed in the middle of a
// fine bin at random positions; for every captured edge the test predicts,
// from the hit time alone, the thermometer code, the Gray count, the half
// period bit and the coarse count, and checks that the event appears during
// the 25 ns period two after the edge. It also sends two pulses within one
// period and checks that the second is filtered (one capture, a miss flag).
`timescale 1ps/1ps
module tb_fero;
  import fastic_pkg::*;
  localparam int CELL = 24;
  localparam int P    = 32 * CELL;      // VCO period
  localparam int PER  = 32 * P;         // 40 MHz period
  localparam int E0   = 2 * P;          // first divider edge after reset

  logic rst_n = 1'b1, hit = 1'b0;
  // a real falling edge of rst_n resets every asynchronous flop
  initial #1 rst_n = 1'b0;
  bit run = 1'b0;                // set when rst_n is released
  logic [15:0] phase;
  logic [FAST_W-1:0] gray;
  logic clk_fb, clk, cwrap;
  logic [COARSE_W-1:0] coarse;
  logic [CEXT_W-1:0] cext;
  logic rise_v, fall_v, miss;
  rise_raw_t rise_o;
  fall_t fall_o;
  int checks = 0, failures = 0, misses = 0;

  pll_analog_model #(.CELL(CELL)) u_vco (.ref_clk(1'b0), .up(1'b0), .dn(1'b0), .en(1'b1), .phase);
  clock_manager u_cm (.vco_clk(phase[0]), .rst_n, .vco_gray(gray), .clk_fb, .clk_sync(clk));
  coarse_counter u_cc (.clk, .rst_n, .sync_rst(1'b0), .coarse, .ext(cext), .wrap(cwrap));
  fero dut (.rst_n, .hit, .vco_phase(phase), .vco_gray(gray), .clk, .coarse,
            .rise_v, .rise_o, .fall_v, .fall_o, .miss_o(miss));

  function automatic logic [15:0] thermo_of(int o);
    logic [15:0] t;
    for (int k = 0; k < 16; k++) t[k] = (o < 16) ? (k <= o) : (k > o - 16);
    return t;
  endfunction

  typedef struct { int t; bit rise; } ev_t;
  ev_t exp_q[$];

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  task automatic pulse_at(int t_r, int t_f);
    #(t_r - int'($time)) hit = 1'b1;
    #(t_f - t_r) hit = 1'b0;
  endtask

  // compare each output event with the prediction of the oldest edge
  always @(negedge clk) if (run) begin
    if (rise_v || fall_v) begin
      for (int pass = 0; pass < 2; pass++) begin
        bit is_r;
        is_r = (pass == 0);
        if ((is_r && rise_v) || (!is_r && fall_v)) begin
          int idx, t, m, r, j, o, now_p;
          idx = -1;
          foreach (exp_q[i]) if (idx < 0 && exp_q[i].rise == is_r) idx = i;
          if (idx < 0) begin failures++; $display("FAIL unexpected event"); end
          else begin
            t = exp_q[idx].t; exp_q.delete(idx);
            m = (t - E0) / PER; r = (t - E0) % PER; j = r / P; o = (r % P) / CELL;
            now_p = (int'($time) - E0) / PER;
            check("latency (periods)", now_p - m, 2);
            if (is_r) begin
              check("rise thermo", rise_o.thermo, thermo_of(o));
              check("rise gray", rise_o.gray, bin2gray(FAST_W'(j)));
              check("rise coarse", rise_o.coarse, (m + 1) % 4096);
            end else begin
              check("fall gray", fall_o.gray, bin2gray(FAST_W'(j)));
              check("fall half", fall_o.half, o >= 16);
              check("fall coarse", fall_o.coarse, (m + 1) % 4096);
            end
          end
        end
      end
    end
    if (miss) misses++;
  end

  initial begin
    #1000 rst_n = 1'b1; run = 1'b1;
    // random pulses, one per 4 periods
    for (int i = 0; i < 40; i++) begin
      int base, tr, tf;
      base = E0 + (4 + 4*i) * PER;
      tr = base + int'($urandom_range(0, 1023)) * CELL + CELL/2;
      tf = tr + int'($urandom_range(3, 1500)) * CELL;
      exp_q.push_back('{tr, 1'b1});
      exp_q.push_back('{tf, 1'b0});
      pulse_at(tr, tf);
    end
    // two pulses in one 25 ns period: the second must be filtered
    begin
      int base;
      base = E0 + 200 * PER;
      exp_q.push_back('{base + 100*CELL + 12, 1'b1});
      exp_q.push_back('{base + 200*CELL + 12, 1'b0});
      pulse_at(base + 100*CELL + 12, base + 200*CELL + 12);
      pulse_at(base + 400*CELL + 12, base + 500*CELL + 12);
    end
    #(6*PER);
    check("all edges seen", exp_q.size(), 0);
    check("filtered edge flagged", misses, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(400 * PER);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
