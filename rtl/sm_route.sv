// sm_route -- behavioural model of the switch-matrix routing in front of the
// sampling matrix.
//
// Behavioural model (routing delay, not logic). The GCO outputs reach DFF
// group 0 directly and each further group through one more switch matrix,
// so group k sees the gray code k*tau_sm later. Sampling the same waveform
// at M staggered instants is what splits each GCO bin into M finer bins.
// TAU_PS = 20 ps is Q/M for the 158 ps GCO step and M = 8 (the paper
// reports 19.41 ps). Each group's delay carries a fixed, small deviation
// (up to +-SKEW_PS) to model uneven routing. Delays are transport delays.
// Interface: g[4:0] in, taps[M][5] out (group k in taps[k]).
`timescale 1ps/1ps
module sm_route
  import tdc_pkg::*;
#(
  parameter int unsigned NG      = 8,
  parameter int unsigned TAU_PS  = 20,
  parameter int unsigned SKEW_PS = 4
) (
  input  gray_t                g,
  output logic [NG-1:0][GRAY_W-1:0] taps
);
  for (genvar k = 0; k < NG; k++) begin : grp
    localparam int unsigned DLY =
      (k == 0) ? 0 : k * TAU_PS + ((k * 7) % (2 * SKEW_PS + 1)) - SKEW_PS;
    gray_t t_q;
    initial begin
      t_q = '0;
      forever begin
        @(g);
        fork
          automatic gray_t v = g;
          begin
            #(DLY);
            t_q = v;
          end
        join_none
      end
    end
    assign taps[k] = t_q;
  end
endmodule
