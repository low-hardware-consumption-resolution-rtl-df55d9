// vbcm_compare -- compensation factor rule of the virtual bin calibration.
//
// For raw bin k, whose cumulative hit count ("timestamp") is T_raw[k], and
// start point sp = max(Addr_l, Addr_m, Addr_r) of raw bin k-1, this decides
// which virtual bins raw bin k is mapped to. T_vir[m] is the cumulative hit
// count at the end of virtual bin m.
//   T_raw[k] <= T_vir[sp]     : Addr_l = sp
//   T_raw[k] <= T_vir[sp+1]   : Addr_l = sp,   Addr_m = sp+1
//   T_raw[k] <= T_vir[sp+2]   : Addr_l = sp,   Addr_m = sp+1, Addr_r = sp+2
//   otherwise                 : Addr_l = sp+1, Addr_m = sp+2, Addr_r = sp+3
// The rule is the paper's. A raw bin wider than its three addresses leaves
// the rest of its span to the following raw bin, which starts at sp+3.
// Two consequences of the rule as printed: virtual bin 1 gets no raw bin
// when raw bin 1 alone reaches past T_vir[3] (the first branch used is the
// last one), and the last virtual bins may stay empty if the raw bins run
// out first. Addresses that are
// not assigned are output as 0 with their valid bit clear (this design's
// encoding). Every row assigns Addr_l, so vl is always high; it is kept for
// a uniform (address, valid) triple. Purely combinational.
`timescale 1ps/1ps
module vbcm_compare
  import tdc_pkg::*;
#(
  parameter int unsigned TW = 32
) (
  input  vaddr_t        sp,
  input  logic [TW-1:0] t_raw,
  input  logic [TW-1:0] t_vir0,   // T_vir[sp]
  input  logic [TW-1:0] t_vir1,   // T_vir[sp+1]
  input  logic [TW-1:0] t_vir2,   // T_vir[sp+2]
  output vaddr_t        addr_l,
  output vaddr_t        addr_m,
  output vaddr_t        addr_r,
  output logic          vl,
  output logic          vm,
  output logic          vr
);
  always_comb begin
    addr_l = '0; addr_m = '0; addr_r = '0;
    vl = 1'b1; vm = 1'b0; vr = 1'b0;
    if (t_raw <= t_vir0) begin
      addr_l = sp;
    end else if (t_raw <= t_vir1) begin
      addr_l = sp; addr_m = sp + vaddr_t'(1); vm = 1'b1;
    end else if (t_raw <= t_vir2) begin
      addr_l = sp; addr_m = sp + vaddr_t'(1); addr_r = sp + vaddr_t'(2); vm = 1'b1; vr = 1'b1;
    end else begin
      addr_l = sp + vaddr_t'(1); addr_m = sp + vaddr_t'(2); addr_r = sp + vaddr_t'(3); vm = 1'b1; vr = 1'b1;
    end
  end
endmodule
