// resolution_sweep_tb -- runs the resolution configurations of the 226 MHz
// (UltraScale+-like) target one after another on a two-channel instance of
// the TDC: n_vir = 211, 148, 111, 88 and 55 virtual bins per clock period,
// i.e. about 21, 30, 40, 50 and 80 ps per bin. These are the n_vir values
// of the published resolution table for that family; the other two families
// run at 156 MHz with slower oscillators, which the behavioural front end
// here does not model, so they are not swept.
// For each n_vir the testbench recalibrates both channels through cal_start
// (no reset in between, so recalibration over old factors is exercised),
// clears the histograms through the host port, measures random STOPs and
// reads every bin back. Checks per n_vir and channel: each virtual bin
// 1..n_vir holds N/n_vir hits within 50 %, no bin outside 1..n_vir holds
// anything, and the histogram total matches the histogrammed hits to within
// the Coe truncation. The calibration length (n_cdt) and the number of
// measured hits grow with n_vir so that counting noise stays near 10 %.
// Only NCH is reduced (to 2) to keep the run short; everything else is at
// its default.
`timescale 1ps/1ps
module resolution_sweep_tb;
  import tdc_pkg::*;
  localparam int T = 4424, NCH = 2, NCFG = 5;
  localparam int NVIRS [NCFG] = '{211, 148, 111, 88, 55};
  int checks = 0, failures = 0, cycles = 0;
  logic clk = 0, rst_n = 0, start = 0, cdt_hit = 0, cal_start = 0;
  logic [NCH-1:0] stop_in = '0;
  logic cal_busy, cal_done;
  logic [NCH-1:0] ts_valid, hit_drop;
  logic [NCH-1:0][COARSE_W-1:0] ts_coarse;
  logic [NCH-1:0][FINE_W-1:0] ts_fine;
  logic host_en = 0, host_we = 0;
  logic [0:0] host_ch = '0;
  fine_t host_addr = '0;
  hist_t host_wdata = '0, host_rdata;
  vaddr_t n_vir = '0;
  logic [23:0] n_cdt = '0;

  gco_tdc_top #(.NCH(NCH)) dut (
    .clk, .rst_n, .start, .stop_in, .cdt_hit, .cal_start,
    .n_vir, .n_cdt, .cal_busy, .cal_done,
    .ts_valid, .ts_coarse, .ts_fine, .hit_drop,
    .host_en, .host_ch, .host_we, .host_addr, .host_wdata, .host_rdata);

  always #(T/2) clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  int n_ts [NCH];
  int n_dropc [NCH];
  logic meas = 0;
  always @(posedge clk)
    if (meas) for (int i = 0; i < NCH; i++) begin
      if (ts_valid[i]) n_ts[i]++;
      if (hit_drop[i]) n_dropc[i]++;
    end

  // random hit generator for calibration, random STOPs for measurement
  logic gen_on = 0;
  initial forever begin
    #(T * 3 / 2 + $urandom % (T * 7 / 2));
    if (gen_on) begin cdt_hit = 1; #(T / 3); cdt_hit = 0; end
  end
  for (genvar i = 0; i < NCH; i++) begin : g_stop
    initial forever begin
      #(T * 3 / 2 + $urandom % (T * 7 / 2));
      if (meas) begin stop_in[i] = 1; #(T / 3); stop_in[i] = 0; end
    end
  end

  task automatic host_write(input int ch, input int a, input hist_t v);
    @(negedge clk);
    host_en = 1; host_we = 1; host_ch = 1'(ch); host_addr = fine_t'(a); host_wdata = v;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(input int ch, input int a, output longint v);
    @(negedge clk);
    host_en = 1; host_we = 0; host_ch = 1'(ch); host_addr = fine_t'(a);
    @(posedge clk); #1;
    v = longint'(host_rdata);
    @(negedge clk);
    host_en = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int k = 0; k < NCFG; k++) begin
      automatic int nv = NVIRS[k];
      automatic int t0, tcal;
      n_vir = vaddr_t'(nv);
      n_cdt = 24'(nv * 150);
      gen_on = 1;
      @(negedge clk); cal_start = 1; @(negedge clk); cal_start = 0;
      t0 = cycles;
      @(posedge clk);
      while (!cal_done) @(posedge clk);
      tcal = cycles - t0;
      gen_on = 0;
      @(negedge clk);
      chk(!cal_busy, $sformatf("n_vir=%0d: core idle after calibration", nv));
      for (int c = 0; c < NCH; c++)
        for (int a = 0; a < 256; a++) host_write(c, a, '0);
      for (int i = 0; i < NCH; i++) begin n_ts[i] = 0; n_dropc[i] = 0; end
      meas = 1;
      while (n_ts[0] < nv * 150) @(negedge clk);
      meas = 0;
      repeat (20) @(negedge clk);
      for (int c = 0; c < NCH; c++) begin
        automatic longint v, tot = 0;
        automatic int hits = n_ts[c] - n_dropc[c];
        automatic real e = real'(hits) / nv, dmin = 9, dmax = -9;
        for (int a = 0; a < 256; a++) begin
          host_read(c, a, v);
          tot += v;
          if (a >= 1 && a <= nv) begin
            automatic real d = real'(v) / 32.0 / e - 1.0;
            if (d < dmin) dmin = d;
            if (d > dmax) dmax = d;
            chk(d > -0.5 && d < 0.5, $sformatf("n_vir=%0d ch%0d bin %0d DNL %f", nv, c, a, d));
          end else begin
            chk(v == 0, $sformatf("n_vir=%0d ch%0d bin %0d outside 1..n_vir holds %0d", nv, c, a, v));
          end
        end
        chk(real'(tot) / 32.0 <= hits + 1 && real'(tot) / 32.0 >= 0.85 * hits,
            $sformatf("n_vir=%0d ch%0d total %f for %0d hits", nv, c, real'(tot) / 32.0, hits));
        $display("n_vir=%0d (%0.1f ps/bin) ch%0d: calibration of both channels %0d clocks, %0d hits, DNL %f .. %f LSB",
                 nv, real'(T) / nv, c, tcal, hits, dmin, dmax);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (cycles == 12000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
