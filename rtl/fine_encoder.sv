// fine_encoder -- gray-to-binary conversion and summation of the M sampled
// gray codes into one fine code.
//
// Each sampled 5-bit gray code is converted to binary (reflected gray code)
// and registered; the M binary values are then added and registered. With
// M = 8 the sum ranges over 0..248, so each of the GCO's bins is split into up
// to M finer bins (LSB = Q/M). A non-zero sum flags a hit: with the GCO at
// rest all groups read 0. Conversion and summation follow the paper's block
// diagram; the two register stages and the non-zero hit test are this
// design's choices.
// Timing: q at clock t gives fine/valid at clock t+2.
`timescale 1ps/1ps
module fine_encoder
  import tdc_pkg::*;
#(
  parameter int unsigned NG = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NG-1:0][GRAY_W-1:0] q,
  output fine_t                     fine,
  output logic                      valid
);
  gray_t bin_q [NG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NG; k++) bin_q[k] <= '0;
    end else begin
      for (int k = 0; k < NG; k++) bin_q[k] <= gray2bin(q[k]);
    end
  end

  fine_t sum;
  always_comb begin
    sum = '0;
    for (int k = 0; k < NG; k++) sum = sum + fine_t'(bin_q[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fine  <= '0;
      valid <= 1'b0;
    end else begin
      fine  <= sum;
      valid <= (sum != '0);
    end
  end
endmodule
