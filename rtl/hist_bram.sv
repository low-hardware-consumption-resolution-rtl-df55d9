// hist_bram -- per-channel histogram memory with read-modify-write update.
//
// Each update adds a factor Coe to the bin at Addr. Bins count in units of
// 2^-MBAR hits, so a factor of 2^MBAR adds one hit. The update is a two
// stage pipeline: the bin is read in the update's clock and the sum written
// one clock later; when two consecutive updates hit the same bin the sum
// just written is forwarded. An external port (for the C&C core and the host)
// reads bins with one clock of latency and writes them, e.g. to clear; it
// may be used only when no update is in flight. The adder feeding the data
// output back to the data input follows the paper; pipelining, forwarding
// and the external port are this design's choices.
`timescale 1ps/1ps
module hist_bram
  import tdc_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W     = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     upd_valid,
  input  logic [$clog2(DEPTH)-1:0] upd_addr,
  input  coe_t                     upd_coe,
  input  logic                     ext_en,
  input  logic                     ext_we,
  input  logic [$clog2(DEPTH)-1:0] ext_addr,
  input  logic [W-1:0]             ext_wdata,
  output logic [W-1:0]             ext_rdata
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [W-1:0]  rd_q;
  logic          v1, wv;
  logic [AW-1:0] a1, wa;
  coe_t          c1;
  logic [W-1:0]  wd, sum;

  logic [AW-1:0] raddr;
  assign raddr = ext_en ? ext_addr : upd_addr;

  assign sum = ((wv && wa == a1) ? wd : rd_q) + W'(c1);

  always_ff @(posedge clk) begin
    rd_q <= mem[raddr];
    if (ext_en && ext_we) mem[ext_addr] <= ext_wdata;
    else if (v1)          mem[a1] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; a1 <= '0; c1 <= '0;
      wv <= 1'b0; wa <= '0; wd <= '0;
    end else begin
      v1 <= upd_valid && !ext_en;
      a1 <= upd_addr;
      c1 <= upd_coe;
      wv <= v1;
      wa <= a1;
      wd <= sum;
    end
  end

  assign ext_rdata = rd_q;

  a_no_ext_during_update: assert property (@(posedge clk) disable iff (!rst_n)
                                           ext_en |-> !v1)
    else $error("external access while a histogram update is in flight");
endmodule
