// gco -- behavioural model of the five-LUT gray code oscillator.
//
// Behavioural model (a ring of LUTs; its timing is analog, not logic).
// Each of the five LUTs has EN as one input and the five GCO outputs as the
// others. While EN is high the outputs step through the 5-bit reflected gray
// sequence 0, 1, 3, 2, 6, ... one LUT delay per step, so only one bit changes
// at a time. When EN falls all LUTs output 0 and the oscillator rests at 0.
// The model computes the next gray state directly instead of giving the five
// LUT truth tables, which the paper does not print.
// Step delays: STEP_PS on average (158 ps, the plain-GCO bin width the paper
// reports for the 16 nm device) with a fixed pseudo-random spread of
// +-SPREAD_PS/2 per state, standing in for uneven LUT and routing delays.
// SEED selects the spread pattern so channels differ.
// Interface: en (from the input shaper), g[4:0] (to the sampling matrix).
`timescale 1ps/1ps
module gco
  import tdc_pkg::*;
#(
  parameter int unsigned STEP_PS   = 158,
  parameter int unsigned SPREAD_PS = 60,
  parameter int unsigned SEED      = 1
) (
  input  logic  en,
  output gray_t g
);
  int unsigned dly [1 << GRAY_W];

  initial begin
    int unsigned h;
    h = SEED * 32'h9E3779B9 + 32'h7F4A7C15;
    for (int s = 0; s < (1 << GRAY_W); s++) begin
      h = h * 32'd1664525 + 32'd1013904223;
      dly[s] = STEP_PS - SPREAD_PS / 2 + (h >> 8) % (SPREAD_PS + 1);
    end
  end

  always begin
    int unsigned s;
    g = '0;
    wait (en);
    s = 0;
    while (en) begin
      #(dly[s % (1 << GRAY_W)]);
      if (!en) break;
      s++;
      g = bin2gray(GRAY_W'(s));
    end
  end
endmodule
