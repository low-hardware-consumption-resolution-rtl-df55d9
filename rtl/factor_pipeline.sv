// factor_pipeline -- the pipeline register between the C&C BRAM and the
// histogram BRAM.
//
// A merged factor word is loaded in one clock and its three (address,
// factor) pairs leave on the next three clocks: (Addr_l, Coe_l), then
// (Addr_m, Coe_m), then (Addr_r, Coe_r). This lets a single histogram
// memory port receive all three updates of a hit, as in the paper. A pair
// whose factor is zero is unused and produces no update (this design's
// encoding). busy is high while a new word would overwrite pairs not yet
// sent; a word may be loaded in the clock in which the last pair is sent,
// giving one hit every three clocks at most.
`timescale 1ps/1ps
module factor_pipeline
  import tdc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     load,
  input  cc_word_t word,
  output logic     busy,
  output logic     upd_valid,
  output vaddr_t   upd_addr,
  output coe_t     upd_coe
);
  cc_word_t   word_q;
  logic [1:0] slots;   // pairs still to send: 3 = l, 2 = m, 1 = r

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slots  <= '0;
      word_q <= '0;
    end else if (load && !busy) begin
      slots  <= 2'd3;
      word_q <= word;
    end else if (slots != 0) begin
      slots  <= slots - 1'b1;
    end
  end

  assign busy = (slots > 2'd1);

  always_comb begin
    unique case (slots)
      2'd3:    begin upd_addr = word_q.addr_l; upd_coe = word_q.coe_l; end
      2'd2:    begin upd_addr = word_q.addr_m; upd_coe = word_q.coe_m; end
      2'd1:    begin upd_addr = word_q.addr_r; upd_coe = word_q.coe_r; end
      default: begin upd_addr = '0;            upd_coe = '0;           end
    endcase
    upd_valid = (slots != 0) && (upd_coe != '0);
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy)
    else $error("factor word loaded while pipeline busy");
endmodule
