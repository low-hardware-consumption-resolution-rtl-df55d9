// gco_tdc_top_tb -- end-to-end test of the 16-channel TDC at its default
// size: automatic calibration of every channel to n_vir = 55 virtual bins per
// clock period (80.45 ps at 226 MHz), then a code density test in
// measurement mode on all channels at once, read back through the host port.
// Random STOP edges (uniform over the clock period, mean spacing about 3.3
// periods) come from behavioural generators in this testbench.
// Checks per channel: every virtual bin 1..n_vir is populated within 50 % of
// N/n_vir, no count outside 1..n_vir, and the histogram total equals the
// histogrammed hits to within the Coe truncation. Mechanisms counted (each
// must occur): channel calibrations, code density test stops at n_cdt,
// raw bins mapped to two or three virtual bins, dead-time drops, START
// clears of the coarse counter, host histogram reads.
`timescale 1ps/1ps
module gco_tdc_top_tb;
  import tdc_pkg::*;
  localparam int T = 4424, NCH = 16, NVIR = 55;
  localparam int NCDT = 8000, NMEAS = 10000;
  int checks = 0, failures = 0, cycles = 0;
  logic clk = 0, rst_n = 0, start = 0, cdt_hit = 0, cal_start = 0;
  logic [NCH-1:0] stop_in = '0;
  logic cal_busy, cal_done;
  logic [NCH-1:0] ts_valid, hit_drop;
  logic [NCH-1:0][COARSE_W-1:0] ts_coarse;
  logic [NCH-1:0][FINE_W-1:0] ts_fine;
  logic host_en = 0, host_we = 0;
  logic [3:0] host_ch = '0;
  fine_t host_addr = '0;
  hist_t host_wdata = '0, host_rdata;

  gco_tdc_top dut (
    .clk, .rst_n, .start, .stop_in, .cdt_hit, .cal_start,
    .n_vir(vaddr_t'(NVIR)), .n_cdt(24'(NCDT)), .cal_busy, .cal_done,
    .ts_valid, .ts_coarse, .ts_fine, .hit_drop,
    .host_en, .host_ch, .host_we, .host_addr, .host_wdata, .host_rdata);

  always #(T/2) clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // mechanism counters
  int n_cal = 0, n_limit = 0, n_multi = 0, n_drop = 0, n_start = 0, n_host = 0;
  int n_ts [NCH];
  int n_dropc [NCH];
  logic meas = 0;
  always @(posedge clk) begin
    if (rst_n && cal_done) n_cal++;
    if (dut.u_core.cc_we != 0 && dut.u_core.cc_wdata.coe_m != 0 && dut.u_core.cc_wdata.coe_l == COE_ONE)
      n_multi++;
    if (meas) for (int i = 0; i < NCH; i++) begin
      if (ts_valid[i]) n_ts[i]++;
      if (hit_drop[i]) begin n_dropc[i]++; n_drop++; end
    end
  end
  logic [NCH-1:0] cdt_done_q = '0;
  always @(posedge clk) begin
    for (int i = 0; i < NCH; i++)
      if (dut.cdt_done[i] && !cdt_done_q[i]) n_limit++;
    cdt_done_q <= dut.cdt_done;
  end

  // random hit generator for calibration
  logic gen_on = 0;
  initial forever begin
    #(T * 3 / 2 + $urandom % (T * 7 / 2));
    if (gen_on) begin cdt_hit = 1; #(T / 3); cdt_hit = 0; end
  end
  // external STOP generators, one per channel
  for (genvar i = 0; i < NCH; i++) begin : g_stop
    initial forever begin
      #(T * 3 / 2 + $urandom % (T * 7 / 2));
      if (meas) begin
        stop_in[i] = 1; #(T / 3); stop_in[i] = 0;
        // now and then a second STOP in the next period: dead time
        if ($urandom % 50 == 0) begin #(T); stop_in[i] = 1; #(T / 3); stop_in[i] = 0; end
      end
    end
  end

  task automatic host_write(input int ch, input int a, input hist_t v);
    @(negedge clk);
    host_en = 1; host_we = 1; host_ch = 4'(ch); host_addr = fine_t'(a); host_wdata = v;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(input int ch, input int a, output longint v);
    @(negedge clk);
    host_en = 1; host_we = 0; host_ch = 4'(ch); host_addr = fine_t'(a);
    @(posedge clk); #1;
    v = longint'(host_rdata);
    n_host++;
    @(negedge clk);
    host_en = 0;
  endtask

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0; n_start++;
    // calibration
    gen_on = 1;
    @(negedge clk); cal_start = 1; @(negedge clk); cal_start = 0;
    t0 = cycles;
    wait (cal_done);
    gen_on = 0;
    $display("calibration of %0d channels took %0d clocks", NCH, cycles - t0);
    @(negedge clk);
    chk(!cal_busy, "core idle after calibration");
    // clear all histograms, then measure
    for (int c = 0; c < NCH; c++)
      for (int a = 0; a < 256; a++) host_write(c, a, '0);
    for (int i = 0; i < NCH; i++) begin n_ts[i] = 0; n_dropc[i] = 0; end
    meas = 1;
    t0 = cycles;
    while (n_ts[0] < NMEAS) begin
      @(negedge clk);
      if ($urandom % 3000 == 0) begin start = 1; @(negedge clk); start = 0; n_start++; end
    end
    meas = 0;
    repeat (20) @(negedge clk);
    $display("measurement took %0d clocks", cycles - t0);
    // read back and judge every channel
    for (int c = 0; c < NCH; c++) begin
      automatic longint v, tot = 0;
      automatic int hits;
      automatic real e, dmin = 9, dmax = -9;
      hits = n_ts[c] - n_dropc[c];
      e = real'(hits) / NVIR;
      for (int a = 0; a < 256; a++) begin
        host_read(c, a, v);
        tot += v;
        if (a >= 1 && a <= NVIR) begin
          automatic real d = real'(v) / 32.0 / e - 1.0;
          if (d < dmin) dmin = d;
          if (d > dmax) dmax = d;
          chk(d > -0.5 && d < 0.5, $sformatf("ch%0d bin %0d DNL %f", c, a, d));
        end else begin
          chk(v == 0, $sformatf("ch%0d bin %0d outside 1..n_vir holds %0d", c, a, v));
        end
      end
      chk(real'(tot) / 32.0 <= hits + 1 && real'(tot) / 32.0 >= 0.85 * hits,
          $sformatf("ch%0d total %f for %0d hits", c, real'(tot) / 32.0, hits));
      $display("ch%0d: %0d hits, DNL %f .. %f LSB", c, hits, dmin, dmax);
    end
    $display("mechanisms: calibrations=%0d cdt_stops=%0d multi_address_bins=%0d drops=%0d starts=%0d host_reads=%0d",
             n_cal, n_limit, n_multi, n_drop, n_start, n_host);
    chk(n_cal == 1, "calibration completed");
    chk(n_limit == 2 * NCH, "two code density tests per channel stopped at n_cdt");
    chk(n_multi > 0, "raw bins mapped to several virtual bins");
    chk(n_drop > 0, "dead-time drops");
    chk(n_start > 1, "START clears");
    chk(n_host > 0, "host reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (cycles == 4000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
