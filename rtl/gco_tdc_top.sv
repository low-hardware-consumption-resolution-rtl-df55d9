// gco_tdc_top -- 16-channel gray code oscillator TDC with automatic,
// resolution-configurable calibration.
//
// Each channel measures the time from an asynchronous STOP edge on its input
// to the next sampling clock edge (fine code) and counts whole clock periods
// since the synchronous START (coarse code). The shared C&C core calibrates
// every channel after cal_start: it switches the channel's input selector to
// the random hit signal, runs two code density tests and loads the channel's
// C&C BRAM so that its histogram has n_vir uniform virtual bins per clock
// period. While the core is idle all channels histogram their hits and the
// host reads any histogram through host_* (one clock read latency; a write
// clears or presets a bin). The structure follows the paper's system block
// diagram; the host port and the control signals are this design's choices.
`timescale 1ps/1ps
module gco_tdc_top
  import tdc_pkg::*;
#(
  parameter int unsigned NCH = 16,
  parameter int unsigned NG  = 8,
  parameter int unsigned NW  = 24
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [NCH-1:0]                stop_in,     // external STOP inputs
  input  logic                          cdt_hit,     // random hit generator
  // calibration control (from the host)
  input  logic                          cal_start,
  input  vaddr_t                        n_vir,
  input  logic [NW-1:0]                 n_cdt,
  output logic                          cal_busy,
  output logic                          cal_done,
  // timestamps
  output logic [NCH-1:0]                ts_valid,
  output logic [NCH-1:0][COARSE_W-1:0]  ts_coarse,
  output logic [NCH-1:0][FINE_W-1:0]    ts_fine,
  output logic [NCH-1:0]                hit_drop,
  // host histogram port (used while cal_busy is low)
  input  logic                          host_en,
  input  logic [$clog2(NCH)-1:0]        host_ch,
  input  logic                          host_we,
  input  fine_t                         host_addr,
  input  hist_t                         host_wdata,
  output hist_t                         host_rdata
);
  logic [NCH-1:0] sel_cdt, sel_in, cdt_run, cdt_done, cc_we, core_ext_en;
  logic           cdt_clr, core_hwe;
  fine_t          cc_waddr, core_haddr;
  cc_word_t       cc_wdata;
  hist_t          core_hwdata, hist_rd;
  hist_t          ch_rd [NCH];

  input_selector #(.N_CH(NCH)) u_sel (.ext_in(stop_in), .cdt_hit, .sel_cdt, .sel_out(sel_in));

  cc_core #(.NCH(NCH), .NW(NW)) u_core (
    .clk, .rst_n, .cal_start, .n_vir, .n_cdt, .busy(cal_busy), .done(cal_done),
    .sel_cdt, .cdt_run, .cdt_clr, .cdt_done,
    .cc_we, .cc_waddr, .cc_wdata,
    .hist_ext_en(core_ext_en), .hist_we(core_hwe), .hist_addr(core_haddr),
    .hist_wdata(core_hwdata), .hist_rdata(hist_rd)
  );

  // the core owns the histogram ports while it is busy
  logic [$clog2(NCH)-1:0] rd_ch, rd_ch_q;
  always_comb begin
    rd_ch = '0;
    for (int i = 0; i < NCH; i++) if (core_ext_en[i]) rd_ch = ($clog2(NCH))'(i);
    if (!cal_busy) rd_ch = host_ch;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_ch_q <= '0;
    else        rd_ch_q <= rd_ch;
  end
  assign hist_rd    = ch_rd[rd_ch_q];
  assign host_rdata = hist_rd;

  for (genvar i = 0; i < NCH; i++) begin : g_ch
    logic ext_en;
    assign ext_en = cal_busy ? core_ext_en[i] : (host_en && host_ch == ($clog2(NCH))'(i));
    tdc_channel #(.NG(NG), .NW(NW), .SEED(i + 1)) u_ch (
      .clk, .rst_n, .start, .stop_in(sel_in[i]),
      .ts_valid(ts_valid[i]), .ts_coarse(ts_coarse[i]), .ts_fine(ts_fine[i]),
      .hit_drop(hit_drop[i]),
      .meas_en(!cal_busy && !host_en), .cdt_run(cdt_run[i]), .cdt_clr, .n_cdt,
      .cdt_done(cdt_done[i]),
      .cc_we(cc_we[i]), .cc_waddr, .cc_wdata,
      .hist_ext_en(ext_en), .hist_we(cal_busy ? core_hwe : host_we),
      .hist_addr(cal_busy ? core_haddr : host_addr),
      .hist_wdata(cal_busy ? core_hwdata : host_wdata),
      .hist_rdata(ch_rd[i])
    );
  end
endmodule
