// sampling_matrix -- the M groups of sampling flip-flops.
//
// Each of the five GCO outputs is sampled by M = 8 flip-flops, one per group;
// group k receives the GCO outputs through k switch matrices (see sm_route),
// so at a clock edge the groups capture the oscillator state at M instants
// spaced by tau_sm. The structure (M x 5 DFFs on the sampling clock, no
// reset) follows the paper. The GCO rests at 0 between hits, so the
// flip-flops read 0 when no STOP edge occurred in the last clock period.
// Interface: taps[M][5] in, q[M][5] out, valid one clock after the edge.
`timescale 1ps/1ps
module sampling_matrix
  import tdc_pkg::*;
#(
  parameter int unsigned NG = 8
) (
  input  logic                      clk,
  input  logic [NG-1:0][GRAY_W-1:0] taps,
  output logic [NG-1:0][GRAY_W-1:0] q
);
  always_ff @(posedge clk) q <= taps;
endmodule
