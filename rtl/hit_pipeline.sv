// hit_pipeline: fixed-latency delay line for captured hit edges.
//
// STAGES cascaded flip-flop stages at 40 MHz (three, i.e. 75 ns, as in the
// paper) carry a valid flag and the edge data. The delay gives an external
// trigger system time to decide on an event before the pulse factory uses
// the validation signal. One instance serves the rising edges and one the
// falling edges of a channel. Throughput is one edge per cycle.
`timescale 1ps/1ps
module hit_pipeline #(
  parameter int unsigned W      = 22,
  parameter int unsigned STAGES = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_v,
  input  logic [W-1:0] in_d,
  output logic         out_v,
  output logic [W-1:0] out_d
);
  logic [STAGES-1:0] v;
  logic [W-1:0]      d [STAGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      for (int i = 0; i < STAGES; i++) d[i] <= '0;
    end else begin
      v[0] <= in_v;
      d[0] <= in_d;
      for (int i = 1; i < STAGES; i++) begin
        v[i] <= v[i-1];
        d[i] <= d[i-1];
      end
    end
  end

  assign out_v = v[STAGES-1];
  assign out_d = d[STAGES-1];
endmodule
