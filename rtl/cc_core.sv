// cc_core -- compensation and calibration (C&C) core of the virtual bin
// calibration method, shared by all channels.
//
// After cal_start the core calibrates the channels one after another. For
// each channel it
//   1. writes identity factors into the channel's C&C BRAM (Addr_l = fine
//      code, Coe_l = 1.0, other pairs unused), so its histogram is the raw
//      histogram;
//   2. clears the histogram and runs a code density test: the channel
//      measures the random hit signal until it has taken N hits (n_cdt);
//   3. (CFC, compensation factor calculation) reads the histogram and
//      accumulates T_raw[k] into BRAM-1; divides N by n_vir to get hit_vir
//      (in units of 2^-MBAR hits) and accumulates T_vir[m] = m * hit_vir into
//      BRAM-2; then walks the raw bins k = 1..255 applying the
//      vbcm_compare rule to get Addr_l/m/r of each bin. The addresses go to
//      the C&C BRAM with factors of 1.0 and to the upper half of BRAM-2;
//   4. clears the histogram and runs a second code density test through the
//      compensated mapping; bin i then holds hit_com[i], stored in BRAM-1;
//   5. (WCFC, width calibration factor calculation) for every used pair of
//      every raw bin computes Coe = (N << MBAR) / (n_vir * hit_com[Addr])
//      with the shared multiplier and divider and writes the final factors.
// Each virtual bin of a later code density test then collects N/n_vir
// hits: bins are uniform and there are n_vir of them per clock period, which
// is how the resolution is configured.
// The steps, Eqs. (3)-(7), the compare rule and the reuse of BRAM-1, the
// accumulator and the divider follow the paper. Serial per-channel
// operation, the N-hit test length, identity start factors, keeping the
// addresses in the upper half of BRAM-2 (both BRAMs are 512 x 32) and all
// handshakes are this design's choices.
// Interface: one-hot per-channel strobes (sel_cdt, cdt_run, cc_we,
// hist_ext_en) plus shared address/data buses; hist_rdata is the addressed
// channel's histogram output, one clock after the address. The core writes
// histograms only to clear them, so hist_wdata is always zero; the port is
// kept so that the bus has the same shape as the host's.
`timescale 1ps/1ps
module cc_core
  import tdc_pkg::*;
#(
  parameter int unsigned NCH = 16,
  parameter int unsigned NW  = 24       // width of n_cdt (hits per test)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cal_start,
  input  logic [ADDR_W-1:0] n_vir,      // virtual bins per clock period
  input  logic [NW-1:0]    n_cdt,       // hits per code density test
  output logic             busy,
  output logic             done,
  // code density test control
  output logic [NCH-1:0]   sel_cdt,
  output logic [NCH-1:0]   cdt_run,
  output logic             cdt_clr,
  input  logic [NCH-1:0]   cdt_done,
  // C&C BRAM write port
  output logic [NCH-1:0]   cc_we,
  output fine_t            cc_waddr,
  output cc_word_t         cc_wdata,
  // histogram access
  output logic [NCH-1:0]   hist_ext_en,
  output logic             hist_we,
  output fine_t            hist_addr,
  output hist_t            hist_wdata,
  input  hist_t            hist_rdata
);
  localparam int unsigned TW    = 32;
  localparam int unsigned DW    = 40;
  localparam int unsigned CHW   = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned DRAIN = 8;

  typedef enum logic [4:0] {
    S_IDLE, S_INIT, S_CLR, S_CDT, S_DRAIN, S_TRAW, S_DIVV, S_TVIR,
    S_CFC_RD, S_CFC_V0, S_CFC_V1, S_CFC_CMP, S_HCOM,
    S_WC_RD, S_WC_SEL, S_WC_AD, S_WC_HC, S_WC_DIV, S_WC_WR, S_NEXT
  } state_t;

  state_t         st;
  logic [CHW-1:0] ch;
  logic           pass;        // 0: raw test, 1: compensated test
  logic [8:0]     idx;         // bin / address counter
  logic           rd_v;        // a read issued last clock
  logic [3:0]     wait_cnt;
  logic [TW-1:0]  acc;         // shared accumulator
  logic [TW-1:0]  n_scaled;    // N in units of 2^-MBAR hits
  logic [TW-1:0]  hit_vir;
  logic [TW-1:0]  t_raw_q, tv0_q, tv1_q;
  vaddr_t         sp;          // start point for the next raw bin
  logic [1:0]     j;           // pair being calibrated: 0 l, 1 m, 2 r
  cc_word_t       word;        // word under construction

  // BRAM-1 and BRAM-2 (512 x 32 each, one-clock synchronous read)
  logic [TW-1:0] bram1 [512];
  logic [TW-1:0] bram2 [512];
  logic          b1_we, b2_we;
  logic [8:0]    b1_wa, b2_wa, b1_ra, b2_ra;
  logic [TW-1:0] b1_wd, b2_wd, b1_rd, b2_rd;

  always_ff @(posedge clk) begin
    if (b1_we) bram1[b1_wa] <= b1_wd;
    if (b2_we) bram2[b2_wa] <= b2_wd;
    b1_rd <= bram1[b1_ra];
    b2_rd <= bram2[b2_ra];
  end

  // shared divider
  logic          div_start, div_busy, div_done;
  logic [DW-1:0] div_num, div_den, div_quo;
  seq_divider #(.W(DW)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo)
  );

  // compare rule
  vaddr_t c_l, c_m, c_r;
  logic   c_vl, c_vm, c_vr;
  vbcm_compare #(.TW(TW)) u_cmp (
    .sp, .t_raw(t_raw_q), .t_vir0(tv0_q), .t_vir1(tv1_q), .t_vir2(b2_rd),
    .addr_l(c_l), .addr_m(c_m), .addr_r(c_r), .vl(c_vl), .vm(c_vm), .vr(c_vr)
  );

  // address word kept in the upper half of BRAM-2:
  // {5'b0, vr, vm, vl, addr_r, addr_m, addr_l}
  logic   w_vl, w_vm, w_vr;
  vaddr_t w_al, w_am, w_ar;
  assign {w_vr, w_vm, w_vl, w_ar, w_am, w_al} = b2_rd[26:0];

  vaddr_t cur_addr;
  logic   cur_v;
  always_comb begin
    unique case (j)
      2'd0:    begin cur_addr = word.addr_l; cur_v = (word.coe_l != '0); end
      2'd1:    begin cur_addr = word.addr_m; cur_v = (word.coe_m != '0); end
      default: begin cur_addr = word.addr_r; cur_v = (word.coe_r != '0); end
    endcase
  end

  // saturated factor from the divider; a used pair never gets 0
  coe_t coe_sat;
  always_comb begin
    if (div_quo > DW'({COE_W{1'b1}})) coe_sat = '1;
    else if (div_quo == '0)           coe_sat = coe_t'(1);
    else                              coe_sat = coe_t'(div_quo);
  end

  logic [NCH-1:0] ch_oh;
  assign ch_oh = NCH'(1) << ch;

  logic [TW-1:0] hcom;
  assign hcom = hist_rdata >> MBAR;

  always_comb begin
    sel_cdt     = '0;
    cdt_run     = '0;
    cdt_clr     = 1'b0;
    cc_we       = '0;
    cc_waddr    = fine_t'(idx);
    cc_wdata    = '0;
    hist_ext_en = '0;
    hist_we     = 1'b0;
    hist_addr   = fine_t'(idx);
    hist_wdata  = '0;
    b1_we = 1'b0; b1_wa = '0; b1_wd = '0; b1_ra = '0;
    b2_we = 1'b0; b2_wa = '0; b2_wd = '0; b2_ra = '0;
    div_start = 1'b0; div_num = '0; div_den = '0;
    unique case (st)
      S_INIT: begin
        cc_we    = ch_oh;
        cc_wdata = '{addr_l: vaddr_t'(idx), addr_m: '0, addr_r: '0,
                     coe_l: COE_ONE, coe_m: '0, coe_r: '0};
      end
      S_CLR: begin
        hist_ext_en = ch_oh;
        hist_we     = (idx < 9'd256);
        cdt_clr     = 1'b1;
      end
      S_CDT: begin
        sel_cdt = ch_oh;
        cdt_run = ch_oh;
      end
      S_DRAIN: begin
        sel_cdt = ch_oh;
        cdt_run = ch_oh;
      end
      S_TRAW: begin
        hist_ext_en = ch_oh;
        b1_we = rd_v;
        b1_wa = idx - 1'b1;
        b1_wd = acc + hist_rdata;
      end
      S_DIVV: begin
        div_start = (idx == 0);
        div_num   = DW'(n_scaled);
        div_den   = DW'(n_vir);
      end
      S_TVIR: begin
        b2_we = 1'b1;
        b2_wa = idx;
        b2_wd = (idx >= 9'(n_vir)) ? n_scaled : acc;
      end
      S_CFC_RD: begin
        b1_ra = idx;
        b2_ra = 9'(sp);
      end
      S_CFC_V0: b2_ra = (9'(sp) + 9'd1 > 9'd255) ? 9'd255 : 9'(sp) + 9'd1;
      S_CFC_V1: b2_ra = (9'(sp) + 9'd2 > 9'd255) ? 9'd255 : 9'(sp) + 9'd2;
      S_CFC_CMP: begin
        cc_we    = ch_oh;
        cc_wdata = '{addr_l: c_l, addr_m: c_m, addr_r: c_r,
                     coe_l: COE_ONE,
                     coe_m: c_vm ? COE_ONE : coe_t'(0),
                     coe_r: c_vr ? COE_ONE : coe_t'(0)};
        b2_we = 1'b1;
        b2_wa = 9'd256 + idx;
        b2_wd = TW'({c_vr, c_vm, c_vl, c_r, c_m, c_l});
      end
      S_HCOM: begin
        hist_ext_en = ch_oh;
        b1_we = rd_v;
        b1_wa = idx - 1'b1;
        b1_wd = hcom;
      end
      S_WC_RD:  b2_ra = 9'd256 + idx;
      S_WC_AD: b1_ra = 9'(cur_addr);
      S_WC_HC: begin
        div_start = cur_v;
        div_num   = DW'(n_cdt) << MBAR;
        div_den   = DW'(n_vir) * DW'(b1_rd);
      end
      S_WC_WR: begin
        cc_we    = ch_oh;
        cc_wdata = word;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ch <= '0; pass <= 1'b0; idx <= '0; rd_v <= 1'b0;
      wait_cnt <= '0; acc <= '0; n_scaled <= '0; hit_vir <= '0;
      t_raw_q <= '0; tv0_q <= '0; tv1_q <= '0; sp <= '0; j <= '0;
      word <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      rd_v <= 1'b0;
      unique case (st)
        S_IDLE: if (cal_start) begin
          busy <= 1'b1; ch <= '0; pass <= 1'b0; idx <= '0; st <= S_INIT;
        end
        S_INIT: begin
          idx <= idx + 1'b1;
          if (idx == 9'd255) begin idx <= '0; st <= S_CLR; end
        end
        S_CLR: begin
          idx <= idx + 1'b1;
          if (idx == 9'd255) begin idx <= '0; st <= S_CDT; end
        end
        S_CDT: if (cdt_done[ch]) begin wait_cnt <= '0; st <= S_DRAIN; end
        S_DRAIN: begin
          wait_cnt <= wait_cnt + 1'b1;
          if (wait_cnt == 4'(DRAIN - 1)) begin
            idx <= '0; acc <= '0;
            st <= pass ? S_HCOM : S_TRAW;
          end
        end
        // read histogram bins 0..255, accumulate T_raw into BRAM-1
        S_TRAW: begin
          rd_v <= (idx < 9'd256);
          if (rd_v) acc <= acc + hist_rdata;
          idx <= idx + 1'b1;
          if (idx == 9'd256) begin
            n_scaled <= acc + hist_rdata;
            idx <= '0;
            st <= S_DIVV;
          end
        end
        S_DIVV: begin
          idx <= 9'd1;
          if (div_done) begin
            hit_vir <= div_quo[TW-1:0];
            acc <= '0; idx <= '0; st <= S_TVIR;
          end
        end
        S_TVIR: begin
          acc <= acc + hit_vir;
          idx <= idx + 1'b1;
          if (idx == 9'd255) begin
            idx <= 9'd1; sp <= vaddr_t'(1); st <= S_CFC_RD;
          end
        end
        S_CFC_RD: st <= S_CFC_V0;
        S_CFC_V0: begin t_raw_q <= b1_rd; tv0_q <= b2_rd; st <= S_CFC_V1; end
        S_CFC_V1: begin tv1_q <= b2_rd; st <= S_CFC_CMP; end
        S_CFC_CMP: begin
          sp  <= c_vr ? c_r : (c_vm ? c_m : c_l);
          idx <= idx + 1'b1;
          if (idx == 9'd255) begin
            idx <= '0; pass <= 1'b1; st <= S_CLR;
          end else begin
            st <= S_CFC_RD;
          end
        end
        // read histogram bins 0..255, hit_com into BRAM-1
        S_HCOM: begin
          rd_v <= (idx < 9'd256);
          idx <= idx + 1'b1;
          if (idx == 9'd256) begin idx <= 9'd1; st <= S_WC_RD; end
        end
        S_WC_RD: st <= S_WC_SEL;
        S_WC_SEL: begin
          // b2_rd now holds the addresses of raw bin idx
          word <= '{addr_l: w_al, addr_m: w_am, addr_r: w_ar,
                    coe_l: w_vl ? COE_ONE : coe_t'(0),
                    coe_m: w_vm ? COE_ONE : coe_t'(0),
                    coe_r: w_vr ? COE_ONE : coe_t'(0)};
          j  <= '0;
          st <= S_WC_AD;
        end
        S_WC_AD: st <= S_WC_HC;
        S_WC_HC: begin
          // b1_rd holds hit_com[cur_addr]; the division starts if used
          if (!cur_v) begin
            if (j == 2'd2) st <= S_WC_WR;
            else begin j <= j + 1'b1; st <= S_WC_AD; end
          end else begin
            st <= S_WC_DIV;
          end
        end
        S_WC_DIV: if (div_done) begin
          unique case (j)
            2'd0:    word.coe_l <= coe_sat;
            2'd1:    word.coe_m <= coe_sat;
            default: word.coe_r <= coe_sat;
          endcase
          if (j == 2'd2) st <= S_WC_WR;
          else begin j <= j + 1'b1; st <= S_WC_AD; end
        end
        S_WC_WR: begin
          idx <= idx + 1'b1;
          if (idx == 9'd255) st <= S_NEXT;
          else st <= S_WC_RD;
        end
        S_NEXT: begin
          if (ch == CHW'(NCH - 1)) begin
            busy <= 1'b0; done <= 1'b1; st <= S_IDLE;
          end else begin
            ch <= ch + 1'b1; pass <= 1'b0; idx <= '0; st <= S_INIT;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
