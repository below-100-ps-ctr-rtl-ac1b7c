// fero: front-end readout of one TDC channel.
//
// The hit pulse from the analog stage is used directly as a clock. Its
// rising edge loads the ultra-fast time capture matrix (UF-TCM: 16 flip-flops
// sampling the 16 buffered VCO phases, a circular thermometer code) and the
// rising half of the fast TCM (the 5-bit Gray VCO-period counter). Its
// falling edge loads the falling half of the fast TCM: the Gray counter and
// one phase bit (VCO phase 0, i.e. which half of the VCO period). That is
// 16+5 rising and 5+1 falling bits, 27 in all, as in the paper.
//
// FERO control: each edge has a toggle flag that flips when the edge is
// captured. The capture of an edge is enabled only while its toggle equals
// the first-stage 40 MHz sample of that toggle, so once an edge has fired,
// further edges of the same kind are ignored until the next 40 MHz clock
// edge has seen it. At most one rising and one falling edge are captured
// per 25 ns period; ignored edges flip a `miss` toggle used for statistics.
// This handshake is this design's realisation of the paper's asynchronous
// state machine, whose states are not given.
//
// Synchronization: on every 40 MHz edge the capture registers are copied
// (stage 1) together with the toggles; on the next edge a toggle change marks
// a new event, whose data is presented for one cycle on rise_o/fall_o with
// the coarse count of the period in which the edge arrived. Latency: an edge
// in period P is output during period P+2. A hit within a flip-flop setup
// window of a 40 MHz edge is a metastability case that this RTL does not
// resolve (the paper does not say how the chip does).
`timescale 1ps/1ps
module fero
  import fastic_pkg::*;
#(
  parameter int unsigned NPH = N_PHASE
) (
  input  logic                rst_n,
  input  logic                hit,        // asynchronous binary pulse
  input  logic [NPH-1:0]      vco_phase,  // buffered VCO phases
  input  logic [FAST_W-1:0]   vco_gray,   // Gray VCO-period counter
  input  logic                clk,        // 40 MHz synchronization clock
  input  logic [COARSE_W-1:0] coarse,     // coarse counter (clk domain)
  output logic                rise_v,
  output rise_raw_t           rise_o,
  output logic                fall_v,
  output fall_t               fall_o,
  output logic                miss_o      // one per synchronized filtered edge
);
  // ---- capture domain (clocked by the hit edges) ----
  logic [NPH-1:0]    uf_tcm;
  logic [FAST_W-1:0] tcm_rise, tcm_fall;
  logic              tcm_half;
  logic              r_tog, f_tog, m_tog;
  logic              r_s1, f_s1;          // first 40 MHz samples of toggles
  logic              r_en, f_en;

  assign r_en = (r_tog == r_s1);
  assign f_en = (f_tog == f_s1);

  always_ff @(posedge hit or negedge rst_n) begin
    if (!rst_n) begin
      uf_tcm <= '0; tcm_rise <= '0; r_tog <= 1'b0; m_tog <= 1'b0;
    end else if (r_en) begin
      uf_tcm   <= vco_phase;
      tcm_rise <= vco_gray;
      r_tog    <= ~r_tog;
    end else begin
      m_tog    <= ~m_tog;
    end
  end

  always_ff @(negedge hit or negedge rst_n) begin
    if (!rst_n) begin
      tcm_fall <= '0; tcm_half <= 1'b0; f_tog <= 1'b0;
    end else if (f_en) begin
      tcm_fall <= vco_gray;
      tcm_half <= ~vco_phase[0];   // phase 0 low: second half of the period
      f_tog    <= ~f_tog;
    end
  end

  // ---- synchronization block (40 MHz) ----
  logic              r_s2, f_s2, m_s1, m_s2, m_s3;
  logic [NPH-1:0]    uf_q;
  logic [FAST_W-1:0] tr_q, tf_q;
  logic              th_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_s1 <= 1'b0; r_s2 <= 1'b0; f_s1 <= 1'b0; f_s2 <= 1'b0;
      m_s1 <= 1'b0; m_s2 <= 1'b0; m_s3 <= 1'b0;
      uf_q <= '0; tr_q <= '0; tf_q <= '0; th_q <= 1'b0;
      rise_v <= 1'b0; fall_v <= 1'b0; miss_o <= 1'b0;
      rise_o <= '0; fall_o <= '0;
    end else begin
      r_s1 <= r_tog;  r_s2 <= r_s1;
      f_s1 <= f_tog;  f_s2 <= f_s1;
      m_s1 <= m_tog;  m_s2 <= m_s1; m_s3 <= m_s2;
      uf_q <= uf_tcm; tr_q <= tcm_rise;
      tf_q <= tcm_fall; th_q <= tcm_half;
      // stage 2: event detection; the edge arrived one period before now
      rise_v        <= r_s1 ^ r_s2;
      rise_o.thermo <= uf_q;
      rise_o.gray   <= tr_q;
      rise_o.coarse <= coarse - 1'b1;
      fall_v        <= f_s1 ^ f_s2;
      fall_o.gray   <= tf_q;
      fall_o.half   <= th_q;
      fall_o.coarse <= coarse - 1'b1;
      miss_o        <= m_s2 ^ m_s3;
    end
  end
endmodule
