// tdc_pkg -- constants, types and helper functions shared by the gray code
// oscillator TDC.
//
// The TDC measures the time from an asynchronous STOP edge to the next
// sampling clock edge with a 5-bit gray code ring oscillator (GCO) sampled by
// M = 8 groups of flip-flops (the sampling matrix). The M gray codes are
// converted to binary and summed into one fine code, which indexes a per
// channel table of compensation addresses (Addr_l/m/r) and width calibration
// factors (Coe_l/m/r). The factors are added into a histogram.
//
// M = 8, the 5-bit gray code, MBAR = 5 fraction bits of Coe and 16 channels
// follow the paper. FINE_W, ADDR_W, COE_W, HIST_W and COARSE_W are this
// design's choices. The merged factor word is 72 bits wide, matching one
// 36K block RAM in 512x72 mode.
`timescale 1ps/1ps
package tdc_pkg;

  localparam int unsigned M        = 8;   // DFF groups in the sampling matrix
  localparam int unsigned GRAY_W   = 5;   // GCO outputs (LUTs)
  localparam int unsigned MBAR     = 5;   // fraction bits of Coe
  localparam int unsigned N_CH     = 16;  // channels
  localparam int unsigned FINE_W   = 8;   // fine code width (sum of M 5-bit values)
  localparam int unsigned ADDR_W   = 8;   // virtual bin address width
  localparam int unsigned COE_W    = 16;  // width calibration factor width
  localparam int unsigned HIST_W   = 32;  // histogram bin width
  localparam int unsigned COARSE_W = 16;  // coarse counter width
  localparam int unsigned NBINS    = 1 << FINE_W;

  // One Coe of ONE adds exactly one hit to a histogram bin.
  localparam logic [COE_W-1:0] COE_ONE = COE_W'(1) << MBAR;

  typedef logic [GRAY_W-1:0] gray_t;
  typedef logic [FINE_W-1:0] fine_t;
  typedef logic [ADDR_W-1:0] vaddr_t;
  typedef logic [COE_W-1:0]  coe_t;
  typedef logic [HIST_W-1:0] hist_t;

  // Merged C&C BRAM word: three addresses and three factors.
  // A factor of zero marks an unused (address, factor) pair.
  typedef struct packed {
    vaddr_t addr_l;
    vaddr_t addr_m;
    vaddr_t addr_r;
    coe_t   coe_l;
    coe_t   coe_m;
    coe_t   coe_r;
  } cc_word_t;

  localparam int unsigned CC_W = $bits(cc_word_t);

  // Reflected binary gray code.
  function automatic gray_t bin2gray(input gray_t b);
    return b ^ (b >> 1);
  endfunction

  function automatic gray_t gray2bin(input gray_t g);
    gray_t b;
    b[GRAY_W-1] = g[GRAY_W-1];
    for (int i = GRAY_W - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

endpackage
