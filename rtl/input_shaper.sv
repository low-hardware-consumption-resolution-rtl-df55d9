// input_shaper -- behavioural model of the input shaper that enables the GCO.
//
// Behavioural model (timing-dependent circuit, not synthesizable as written).
// A rising edge of the selected STOP input sets EN asynchronously; the next
// rising edge of the sampling clock loads the constant '0' from D and so
// clears EN. The GCO therefore runs from the STOP edge to the sampling edge.
// On the FPGA this is one flip-flop with an asynchronous set fed by an AND of
// the input with a delayed, inverted copy of itself, giving a short set
// pulse at each rising edge. The pulse width PULSE_PS is a LUT and routing
// delay, assumed here. If the pulse overlaps a clock edge the set wins, as
// in the FPGA flip-flop.
// Interface: clk (sampling clock), sel_in (asynchronous STOP), en (to GCO).
`timescale 1ps/1ps
module input_shaper #(
  parameter int unsigned PULSE_PS = 60
) (
  input  logic clk,
  input  logic sel_in,
  output logic en
);
  logic sel_dly, set_pulse;

  // rising-edge pulse generator: the input ANDed with a delayed, inverted
  // copy of itself
  assign #(PULSE_PS) sel_dly = sel_in;
  assign set_pulse = sel_in & ~sel_dly;

  // flip-flop with D = '0' and asynchronous set
  always_ff @(posedge clk or posedge set_pulse) begin
    if (set_pulse) en <= 1'b1;
    else           en <= 1'b0;
  end

endmodule
