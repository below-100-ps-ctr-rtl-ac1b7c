// phase_buffers: the buffers between the VCO phases and the capture matrix.
//
// Each of the 16 VCO phases is buffered before it fans out to the
// ultra-fast time capture matrices of all channels. In low-power mode the
// buffers of the odd-numbered phases are switched off, so only 8 phases
// reach the capture flip-flops and the time bin doubles from 24.4 ps to
// about 49 ps; a disabled buffer drives a constant 0 (this design's choice).
// The per-buffer rise/fall delay trimming used to calibrate the time bins
// is an analog adjustment and is not modelled: the trim code is only
// carried through to `trim_out` for the analog buffers.
`timescale 1ps/1ps
module phase_buffers
  import fastic_pkg::*;
#(
  parameter int unsigned NPH    = N_PHASE,
  parameter int unsigned TRIM_W = 4
) (
  input  logic [NPH-1:0]        vco_phase,
  input  logic                  low_power,
  input  logic [NPH*TRIM_W-1:0] trim_in,
  output logic [NPH-1:0]        phase_out,
  output logic [NPH*TRIM_W-1:0] trim_out
);
  always_comb begin
    for (int k = 0; k < NPH; k++)
      phase_out[k] = vco_phase[k] & ~(low_power & k[0]);
    trim_out = trim_in;
  end
endmodule
