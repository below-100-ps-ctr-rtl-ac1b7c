// fastic_pkg: types and constants shared by the FastIC+ TDC back-end.
//
// Time is counted in three nested units. The 40 MHz coarse counter (12 bits,
// extended by 12 more bits in the link service words) counts 25 ns periods.
// Inside one period the 5-bit Gray "fast" counter counts the 32 periods of
// the 1.28 GHz VCO, and inside one VCO period the 16 VCO phases sampled by
// the ultra-fast capture matrix give 32 fine bins of 24.4 ps (each cell
// delay is visited once by the rising and once by the falling wave). A
// rising-edge timestamp (ToA) is therefore {coarse, fast, fine} = 12+5+5 =
// 22 bits, 1024 fine bins per 25 ns. The falling edge keeps only the fast
// counter and one phase bit (half a VCO period, 390 ps), so the pulse width
// (ToT) is counted in 390 ps units.
//
// The bit counts 16 / 5 / 5+1 / 12 / 12 follow the paper. The ToT width,
// the channel count including the trigger channel, the link word layout and
// the register map are this design's own choices.
`timescale 1ps/1ps
package fastic_pkg;

  localparam int unsigned N_CH      = 8;   // analog channels
  localparam int unsigned N_TDC     = N_CH + 1; // plus the trigger channel
  localparam int unsigned CH_W      = 4;
  localparam int unsigned N_PHASE   = 16;  // VCO cells / UF-TCM flip-flops
  localparam int unsigned FAST_W    = 5;   // Gray VCO-period counter
  localparam int unsigned FINE_W    = 5;   // encoded UF-TCM code
  localparam int unsigned COARSE_W  = 12;  // 40 MHz coarse counter
  localparam int unsigned CEXT_W    = 12;  // extension of the coarse counter
  localparam int unsigned TOA_W     = COARSE_W + FAST_W + FINE_W; // 22
  localparam int unsigned TOT_W     = 12;  // in 390 ps units
  localparam int unsigned WORD_W    = 64;  // link word (one 64B/66B block)
  localparam int unsigned STAT_W    = 16;

  // Transmission modes of the TDC (paper, configurability section).
  typedef enum logic [1:0] {
    MODE_HER = 2'd0,  // high energy resolution: short time pulse + energy pulse
    MODE_HS  = 2'd1,  // high speed: ToA and non-linear ToT of the time pulse
    MODE_HYB = 2'd2,  // hybrid: time pulse and energy pulse, both full
    MODE_SP  = 2'd3   // single pulse: ToA only or ToT only
  } tx_mode_e;

  typedef enum logic {
    ARB_RR  = 1'b0,   // round robin over channels
    ARB_PST = 1'b1    // pulse sorting by timestamp (oldest first)
  } arb_policy_e;

  typedef enum logic [1:0] {
    TRG_OR   = 2'd0,  // OR of the per-channel trigger comparators
    TRG_TIME = 2'd1,  // OR of the per-channel time comparators
    TRG_EXT  = 2'd2,  // external trigger pin
    TRG_HL   = 2'd3   // analog-sum high-level trigger
  } trig_src_e;

  // Raw rising edge, as delivered by the FERO in the 40 MHz domain.
  typedef struct packed {
    logic [COARSE_W-1:0] coarse;
    logic [FAST_W-1:0]   gray;
    logic [N_PHASE-1:0]  thermo;
  } rise_raw_t;

  // Rising edge after de-bubbling and thermometer-to-binary encoding.
  typedef struct packed {
    logic [COARSE_W-1:0] coarse;
    logic [FAST_W-1:0]   gray;
    logic [FINE_W-1:0]   fine;
  } rise_t;

  // Falling edge: coarse, Gray counter and the VCO half-period bit.
  typedef struct packed {
    logic [COARSE_W-1:0] coarse;
    logic [FAST_W-1:0]   gray;
    logic                half;
  } fall_t;

  typedef struct packed {
    rise_t rise;
    fall_t fall;
  } pulse_raw_t;

  // Processed pulse stored in the channel FIFO.
  typedef struct packed {
    logic [TOA_W-1:0] toa;  // {coarse, fast (binary), fine}
    logic [TOT_W-1:0] tot;  // 390 ps units, saturating
    logic             has_toa;
    logic             has_tot;
  } pulse_t;

  localparam int unsigned PULSE_W = $bits(pulse_t);

  // Link word types (bits 63:60).
  localparam logic [3:0] WT_PULSE   = 4'h1;
  localparam logic [3:0] WT_SERVICE = 4'h2;

  function automatic logic [FAST_W-1:0] gray2bin(input logic [FAST_W-1:0] g);
    logic [FAST_W-1:0] b;
    b[FAST_W-1] = g[FAST_W-1];
    for (int i = FAST_W - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  function automatic logic [FAST_W-1:0] bin2gray(input logic [FAST_W-1:0] b);
    return b ^ (b >> 1);
  endfunction

endpackage
