// coarse_counter -- counts whole sampling clock periods since START.
//
// START is synchronous to the sampling clock. The clock edge at which START
// is high clears the counter; every later edge adds one, wrapping at 2^W.
// While a STOP edge arrives in the period in which the counter shows N_c, the
// fine code is captured at the following edge, and the measured interval is
// TI = (N_c + 1) * T - tau_fine. The clear-on-START behaviour follows the
// paper's timing diagram; the width W and wrap-around are this design's
// choices.
`timescale 1ps/1ps
module coarse_counter #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  output logic [W-1:0] count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     count <= '0;
    else if (start) count <= '0;
    else            count <= count + 1'b1;
  end
endmodule
