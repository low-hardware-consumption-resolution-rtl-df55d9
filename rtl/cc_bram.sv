// cc_bram -- per-channel compensation and calibration factor memory.
//
// Indexed by the fine code, each word holds the three compensation addresses
// and three width calibration factors of that raw bin, merged into one
// 72-bit word {Addr_l, Addr_m, Addr_r, Coe_l, Coe_m, Coe_r}, so one read per
// hit fetches everything. The C&C core writes it; the measurement path reads
// it. Simple dual-port RAM with a one-clock synchronous read, inferable as a
// block RAM (the paper uses one 36K block RAM). The merged word follows the
// paper; its field widths are this design's choices (see tdc_pkg).
`timescale 1ps/1ps
module cc_bram
  import tdc_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  cc_word_t                 wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output cc_word_t                 rdata
);
  cc_word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
