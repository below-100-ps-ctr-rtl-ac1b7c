// debubble_encoder: bubble correction and thermometer-to-binary encoding of
// the UF-TCM code.
//
// The 16 sampled VCO phases form a circular thermometer code with 32 states
// per VCO period: in the first half-period the ones grow from bit 0 upward
// (bit k rises k cell delays after phase 0), in the second half the zeros
// grow from bit 0 upward. Beyond bit 15 the ring continues with the inverted
// bit 0 (the ring has one crossed connection). De-bubbling replaces each bit
// by the majority of itself and its two ring neighbours (bit 16 = ~bit 0,
// bit -1 = ~bit 15), which removes isolated single-bit errors. The binary
// fine code is then
//     fine = ones - 1        if bit 0 is 1   (0 .. 15)
//     fine = 31 - ones       if bit 0 is 0   (16 .. 31)
// In low-power mode only the 8 even phases are meaningful; the same
// correction and counting run on them, giving an even fine code in steps of
// two bins (49 ps): fine = 2*(ones-1) or 30 - 2*ones.
// The paper names de-bubbling and thermometer-to-binary conversion; the
// majority filter and this counting encoder are this design's choices.
// Purely combinational.
`timescale 1ps/1ps
module debubble_encoder
  import fastic_pkg::*;
#(
  parameter int unsigned NPH = N_PHASE
) (
  input  logic [NPH-1:0]    thermo,
  input  logic              low_power,
  output logic [FINE_W-1:0] fine,
  output logic              bubble      // a bit was corrected
);
  localparam int unsigned NH = NPH / 2;

  function automatic logic maj(input logic a, input logic b, input logic c);
    return (a & b) | (a & c) | (b & c);
  endfunction

  logic [NPH-1:0] full_c;
  logic [NH-1:0]  even_r, even_c;
  int unsigned    ones_f, ones_e;

  always_comb begin
    // full-resolution ring
    for (int k = 0; k < NPH; k++) begin
      logic lo, hi;
      lo = (k == 0)       ? ~thermo[NPH-1] : thermo[k-1];
      hi = (k == NPH - 1) ? ~thermo[0]     : thermo[k+1];
      full_c[k] = maj(lo, thermo[k], hi);
    end
    // low-power ring of the even phases
    for (int k = 0; k < NH; k++) even_r[k] = thermo[2*k];
    for (int k = 0; k < NH; k++) begin
      logic lo, hi;
      lo = (k == 0)      ? ~even_r[NH-1] : even_r[k-1];
      hi = (k == NH - 1) ? ~even_r[0]    : even_r[k+1];
      even_c[k] = maj(lo, even_r[k], hi);
    end
    ones_f = 0;
    for (int k = 0; k < NPH; k++) ones_f += 32'(full_c[k]);
    ones_e = 0;
    for (int k = 0; k < NH; k++) ones_e += 32'(even_c[k]);

    if (!low_power) begin
      bubble = (full_c != thermo);
      if (full_c[0]) fine = FINE_W'(ones_f - 1);
      else           fine = FINE_W'(2*NPH - 1 - ones_f);
    end else begin
      bubble = (even_c != even_r);
      if (even_c[0]) fine = FINE_W'(2*(ones_e - 1));
      else           fine = FINE_W'(2*NPH - 2 - 2*ones_e);
    end
  end
endmodule
