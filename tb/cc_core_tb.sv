// cc_core_tb -- calibrates two model channels whose raw bins have random
// widths (narrow, regular and ultra-wide). The testbench models each
// channel's C&C table, histogram and code density test (hits drawn in
// proportion to the bin widths from a generator restarted at every test).
// After calibration it replays the same hits through the final factors:
// every virtual bin 1..n_vir must then hold N/n_vir hits within the Coe
// rounding of the 5 fraction bits of Coe, bins outside must stay empty, and all addresses must be
// within 1..n_vir.
`timescale 1ps/1ps
module cc_core_tb;
  import tdc_pkg::*;
  localparam int NCH = 2, NRAW = 100, NCDT = 20000, NVIR = 60;
  int checks = 0, failures = 0, cycles = 0;
  logic clk = 0, rst_n = 0, cal_start = 0, busy, done;
  logic [NCH-1:0] sel_cdt, cdt_run, cdt_done, cc_we, hist_ext_en;
  logic cdt_clr, hist_we;
  fine_t cc_waddr, hist_addr;
  cc_word_t cc_wdata;
  hist_t hist_wdata, hist_rdata;

  cc_core #(.NCH(NCH)) dut (
    .clk, .rst_n, .cal_start, .n_vir(vaddr_t'(NVIR)), .n_cdt(24'(NCDT)), .busy, .done,
    .sel_cdt, .cdt_run, .cdt_clr, .cdt_done, .cc_we, .cc_waddr, .cc_wdata,
    .hist_ext_en, .hist_we, .hist_addr, .hist_wdata, .hist_rdata);

  always #500 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // channel models
  int       width [NCH][NRAW+1];
  int       wsum  [NCH];
  cc_word_t tab   [NCH][256];
  longint   hist  [NCH][256];
  int       cnt   [NCH];
  int unsigned lcg [NCH];
  hist_t    rd    [NCH];

  function automatic int draw(int c);
    int u, k;
    lcg[c] = lcg[c] * 1103515245 + 12345;
    u = int'((lcg[c] >> 4) % wsum[c]);
    k = 1;
    while (u >= width[c][k]) begin u -= width[c][k]; k++; end
    return k;
  endfunction

  longint h3 [NCH][256];   // replay histogram
  longint hc [NCH][256];   // hits per virtual bin of the compensated mapping

  // add one hit of raw bin k through the channel's factors
  task automatic apply(int c, int k, bit replay);
    cc_word_t w;
    w = tab[c][k];
    if (w.coe_l != 0) hc[c][w.addr_l]++;
    if (w.coe_m != 0) hc[c][w.addr_m]++;
    if (w.coe_r != 0) hc[c][w.addr_r]++;
    if (replay) begin
      if (w.coe_l != 0) h3[c][w.addr_l] += longint'(w.coe_l);
      if (w.coe_m != 0) h3[c][w.addr_m] += longint'(w.coe_m);
      if (w.coe_r != 0) h3[c][w.addr_r] += longint'(w.coe_r);
    end else begin
      if (w.coe_l != 0) hist[c][w.addr_l] += longint'(w.coe_l);
      if (w.coe_m != 0) hist[c][w.addr_m] += longint'(w.coe_m);
      if (w.coe_r != 0) hist[c][w.addr_r] += longint'(w.coe_r);
    end
  endtask

  for (genvar c = 0; c < NCH; c++) begin : g_done
    assign cdt_done[c] = cdt_run[c] && cnt[c] >= NCDT;
  end

  logic toggle = 0;
  always @(posedge clk) begin
    toggle <= ~toggle;
    for (int c = 0; c < NCH; c++) begin
      if (cc_we[c]) tab[c][cc_waddr] = cc_wdata;
      if (hist_ext_en[c]) begin
        if (hist_we) hist[c][hist_addr] = longint'(hist_wdata);
        rd[c] <= hist_t'(hist[c][hist_addr]);
      end
      if (cdt_clr) begin cnt[c] = 0; lcg[c] = 32'(c * 77 + 5); end
      if (cdt_run[c] && sel_cdt[c] && toggle && cnt[c] < NCDT) begin
        apply(c, draw(c), 1'b0);
        cnt[c]++;
      end
    end
  end
  always_comb begin
    hist_rdata = '0;
    for (int c = 0; c < NCH; c++) if (hist_ext_en[c]) hist_rdata = rd[c];
  end

  initial begin
    int start_cyc;
    for (int c = 0; c < NCH; c++) begin
      wsum[c] = 0;
      for (int k = 1; k <= NRAW; k++) begin
        automatic int r = $urandom % 10;
        width[c][k] = (r < 2) ? 1 + $urandom % 4 : (r < 9) ? 20 + $urandom % 40 : 150 + $urandom % 150;
        if (k == 1) width[c][k] = 30;   // raw bin 1 regular, so virtual bin 1 is reached
        wsum[c] += width[c][k];
      end
      foreach (tab[c][i]) tab[c][i] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); cal_start = 1; @(negedge clk); cal_start = 0;
    start_cyc = cycles;
    chk(busy, "busy after cal_start");
    wait (done);
    $display("calibration took %0d clocks", cycles - start_cyc);
    @(negedge clk);
    chk(!busy, "idle after done");
    for (int c = 0; c < NCH; c++) begin
      real e;
      automatic int used_m = 0, used_r = 0;
      for (int i = 0; i < 256; i++) begin h3[c][i] = 0; hc[c][i] = 0; end
      lcg[c] = 32'(c * 77 + 5);
      for (int n = 0; n < NCDT; n++) apply(c, draw(c), 1'b1);
      e = real'(NCDT) / NVIR;
      for (int i = 0; i < 256; i++) begin
        automatic real v = real'(h3[c][i]) / 32.0;
        if (i >= 1 && i <= NVIR) begin
          // Eq. (7) with an independent division: every hit of bin i adds
          // floor(2^5 * N / (n_vir * hit_com[i])), and the truncation costs
          // at most hit_com[i] / 32 hits
          automatic longint coe = (32 * longint'(NCDT)) / (NVIR * hc[c][i]);
          chk(h3[c][i] == hc[c][i] * coe,
              $sformatf("ch%0d virtual bin %0d holds %0d, expected %0d", c, i, h3[c][i], hc[c][i] * coe));
          chk(v <= e + 1 && v >= e - real'(hc[c][i]) / 32.0 - 1,
              $sformatf("ch%0d virtual bin %0d holds %f hits, expected %f", c, i, v, e));
        end
        else
          chk(h3[c][i] == 0, $sformatf("ch%0d bin %0d outside 1..n_vir holds %0d", c, i, h3[c][i]));
      end
      for (int k = 1; k <= NRAW; k++) begin
        automatic cc_word_t w = tab[c][k];
        chk(w.coe_l != 0 && w.addr_l >= 1 && w.addr_l <= NVIR, $sformatf("ch%0d raw %0d Addr_l", c, k));
        if (w.coe_m != 0) used_m++;
        if (w.coe_r != 0) used_r++;
      end
      chk(used_m > 0 && used_r > 0, "Addr_m and Addr_r in use");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (cycles == 2000000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
