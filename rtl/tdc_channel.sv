// tdc_channel -- one complete GCO-TDC channel with its histogram path.
//
// Front end: the input shaper turns a rising STOP edge into EN, the GCO runs
// while EN is high, the switch-matrix routing presents it to M groups of
// sampling flip-flops, and the fine encoder converts and sums the M gray
// codes into the fine code. The coarse counter value of the period in which
// STOP arrived is delivered with it, so TI = (N_c + 1) * T - tau_fine.
// Back end: the fine code addresses the C&C BRAM; its merged factor word
// goes through the pipeline register, which adds Coe_l, Coe_m and Coe_r to
// histogram bins Addr_l, Addr_m and Addr_r on three consecutive clocks.
// A hit is histogrammed when meas_en or cdt_run is high. While cdt_run is
// high the channel counts accepted hits and stops at n_cdt (cdt_done), so a
// code density test holds exactly n_cdt hits; cdt_clr clears the count.
// A hit that comes while the pipeline register is still sending the
// previous hit's factors is not histogrammed and pulses hit_drop (dead
// time of up to three clocks): this is this design's choice.
// Latency: STOP edge -> sampling edge E; ts_valid after edge E+3 (sampling,
// conversion, sum); histogram updates at E+5..E+7.
`timescale 1ps/1ps
module tdc_channel
  import tdc_pkg::*;
#(
  parameter int unsigned NG        = 8,
  parameter int unsigned NW        = 24,
  parameter int unsigned STEP_PS   = 158,
  parameter int unsigned SPREAD_PS = 60,
  parameter int unsigned TAU_PS    = 20,
  parameter int unsigned SEED      = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,       // synchronous START
  input  logic                stop_in,     // selected STOP input (asynchronous)
  // timestamps
  output logic                ts_valid,
  output logic [COARSE_W-1:0] ts_coarse,
  output fine_t               ts_fine,
  output logic                hit_drop,
  // histogram control
  input  logic                meas_en,
  input  logic                cdt_run,
  input  logic                cdt_clr,
  input  logic [NW-1:0]       n_cdt,
  output logic                cdt_done,
  // C&C BRAM write port
  input  logic                cc_we,
  input  fine_t               cc_waddr,
  input  cc_word_t            cc_wdata,
  // histogram external port
  input  logic                hist_ext_en,
  input  logic                hist_we,
  input  fine_t               hist_addr,
  input  hist_t               hist_wdata,
  output hist_t               hist_rdata
);
  // ---------------- front end ----------------
  logic                     en;
  gray_t                    g;
  logic [NG-1:0][GRAY_W-1:0] taps, q;
  fine_t                    fine;
  logic                     fvalid;

  input_shaper u_shaper (.clk, .sel_in(stop_in), .en);
  gco #(.STEP_PS(STEP_PS), .SPREAD_PS(SPREAD_PS), .SEED(SEED)) u_gco (.en, .g);
  sm_route #(.NG(NG), .TAU_PS(TAU_PS)) u_route (.g, .taps);
  sampling_matrix #(.NG(NG)) u_sm (.clk, .taps, .q);
  fine_encoder #(.NG(NG)) u_enc (.clk, .rst_n, .q, .fine, .valid(fvalid));

  logic [COARSE_W-1:0] count, cs0, cs1, cs2;
  coarse_counter #(.W(COARSE_W)) u_coarse (.clk, .rst_n, .start, .count);

  // align the coarse value of the STOP period with the fine code
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin cs0 <= '0; cs1 <= '0; cs2 <= '0; end
    else begin cs0 <= count; cs1 <= cs0; cs2 <= cs1; end
  end

  assign ts_valid  = fvalid;
  assign ts_fine   = fine;
  assign ts_coarse = cs2;

  // ---------------- histogram path ----------------
  cc_word_t cc_rdata;
  cc_bram u_ccb (.clk, .we(cc_we), .waddr(cc_waddr), .wdata(cc_wdata),
                 .raddr(fine), .rdata(cc_rdata));

  logic          hit_d1;
  logic [NW-1:0] cdt_cnt;
  logic          fp_busy, accept, hist_on, under_limit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hit_d1 <= 1'b0;
    else        hit_d1 <= fvalid;
  end

  assign hist_on     = meas_en || cdt_run;
  assign under_limit = !cdt_run || (cdt_cnt < n_cdt);
  assign accept      = hit_d1 && hist_on && under_limit && !fp_busy;
  assign hit_drop    = hit_d1 && hist_on && under_limit && fp_busy;
  assign cdt_done    = cdt_run && (cdt_cnt >= n_cdt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  cdt_cnt <= '0;
    else if (cdt_clr)            cdt_cnt <= '0;
    else if (accept && cdt_run)  cdt_cnt <= cdt_cnt + 1'b1;
  end

  logic   upd_valid;
  vaddr_t upd_addr;
  coe_t   upd_coe;
  factor_pipeline u_fp (.clk, .rst_n, .load(accept), .word(cc_rdata), .busy(fp_busy),
                        .upd_valid, .upd_addr, .upd_coe);

  hist_bram u_hist (.clk, .rst_n, .upd_valid, .upd_addr, .upd_coe,
                    .ext_en(hist_ext_en), .ext_we(hist_we), .ext_addr(hist_addr),
                    .ext_wdata(hist_wdata), .ext_rdata(hist_rdata));
endmodule
