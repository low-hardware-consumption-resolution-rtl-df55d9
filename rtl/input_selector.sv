// input_selector -- chooses the signal each TDC channel measures.
//
// Every channel can measure either its own external STOP input or the shared
// random hit signal used for code density tests. The C&C core sets sel_cdt
// for the channel it is calibrating. Purely combinational: a 2:1 multiplexer
// per channel. The paper names this block; the per-channel select is this
// design's choice, so that one channel can be calibrated while the others
// keep measuring.
`timescale 1ps/1ps
module input_selector #(
  parameter int unsigned N_CH = 16
) (
  input  logic [N_CH-1:0] ext_in,   // external STOP inputs
  input  logic            cdt_hit,  // random hit for code density tests
  input  logic [N_CH-1:0] sel_cdt,  // 1: channel measures cdt_hit
  output logic [N_CH-1:0] sel_out   // selected input of each channel
);
  always_comb begin
    for (int i = 0; i < N_CH; i++)
      sel_out[i] = sel_cdt[i] ? cdt_hit : ext_in[i];
  end
endmodule
