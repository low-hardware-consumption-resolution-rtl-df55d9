// tdc_channel_tb -- one channel with the oscillator and routing models.
// Loads identity factors, then sends STOP edges at swept positions within
// the 4424 ps clock period and checks
//   - the coarse code: clock periods since START,
//   - the fine code: close to M * tau_fine / 158 ps and never larger for a
//     later STOP,
//   - the histogram: one hit (2^5) in the bin of every timestamp,
//   - dead time: a STOP in the period right after a hit is dropped,
//   - the code density test limit: exactly n_cdt hits are taken.
`timescale 1ps/1ps
module tdc_channel_tb;
  import tdc_pkg::*;
  localparam int T = 4424, NG = 8;
  int checks = 0, failures = 0, cycles = 0;
  int n_drop = 0, n_limit = 0;
  logic clk = 0, rst_n = 0, start = 0, stop_in = 0;
  logic ts_valid, hit_drop, cdt_done;
  logic [COARSE_W-1:0] ts_coarse;
  fine_t ts_fine;
  logic meas_en = 0, cdt_run = 0, cdt_clr = 0;
  logic [23:0] n_cdt = '0;
  logic cc_we = 0, hist_ext_en = 0, hist_we = 0;
  fine_t cc_waddr = '0, hist_addr = '0;
  cc_word_t cc_wdata = '0;
  hist_t hist_wdata = '0, hist_rdata;
  longint model [256];

  tdc_channel #(.NG(NG)) dut (.*);

  always #(T/2) clk = ~clk;
  always @(posedge clk) cycles++;
  always @(posedge clk) if (hit_drop) n_drop++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // STOP at offset off after the next rising edge; returns the timestamp
  task automatic hit(input int off, output int coarse, output int fine);
    @(posedge clk);
    #(off);
    stop_in = 1;
    #(T - off + 1000);
    stop_in = 0;
    do begin @(posedge clk); #1; end while (!ts_valid);
    coarse = ts_coarse; fine = ts_fine;
  endtask

  task automatic read_hist(input int a, output longint v);
    @(negedge clk);
    hist_ext_en = 1; hist_we = 0; hist_addr = fine_t'(a);
    @(posedge clk); #1;
    v = longint'(hist_rdata);
    @(negedge clk);
    hist_ext_en = 0;
  endtask

  task automatic check_hist();
    repeat (10) @(negedge clk);
    meas_en = 0;
    for (int a = 0; a < 256; a++) begin
      longint v;
      read_hist(a, v);
      chk(v == model[a], $sformatf("histogram bin %0d = %0d, expected %0d", a, v, model[a]));
    end
  endtask

  initial begin
    int c, f, prev_f;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // identity factors and a cleared histogram
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      cc_we = 1; cc_waddr = fine_t'(a);
      cc_wdata = '{addr_l: vaddr_t'(a), addr_m: '0, addr_r: '0, coe_l: COE_ONE, coe_m: '0, coe_r: '0};
      hist_ext_en = 1; hist_we = 1; hist_addr = fine_t'(a); hist_wdata = '0;
      model[a] = 0;
    end
    @(negedge clk); cc_we = 0; hist_ext_en = 0; hist_we = 0;

    // START, then STOPs swept across the period
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    meas_en = 1;
    prev_f = 1000;
    for (int off = 100; off < T - 150; off += 37) begin
      hit(off, c, f);
      model[f] += 32;
      chk(f > 0, $sformatf("hit detected at offset %0d", off));
      chk(f <= prev_f, $sformatf("fine code %0d after %0d for a later STOP", f, prev_f));
      chk(f >= NG * (T - off) / 158 - 16 && f <= NG * (T - off) / 158 + 16,
          $sformatf("fine %0d for tau_fine %0d ps", f, T - off));
      prev_f = f;
      repeat (3) @(posedge clk);
    end
    check_hist();

    // coarse code: STOP k periods after START
    for (int k = 2; k < 40; k += 7) begin
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      // START was seen at the last edge: now in period N_c = 0
      repeat (k) @(posedge clk);
      #(1000);
      stop_in = 1;
      #(T);
      stop_in = 0;
      do begin @(posedge clk); #1; end while (!ts_valid);
      chk(ts_coarse == COARSE_W'(k), $sformatf("coarse %0d, expected %0d", ts_coarse, k));
      repeat (4) @(posedge clk);
    end

    // dead time: STOPs in two consecutive periods, the second is dropped
    meas_en = 1;
    begin
      int d0;
      d0 = n_drop;
      @(posedge clk); #(500); stop_in = 1; #(1000); stop_in = 0;
      @(posedge clk); #(500); stop_in = 1; #(1000); stop_in = 0;
      repeat (10) @(posedge clk);
      chk(n_drop == d0 + 1, "second of two back-to-back hits dropped");
      chk(n_drop > 0, "drop seen");
    end
    meas_en = 0;

    // code density test limit
    @(negedge clk); cdt_clr = 1; n_cdt = 24'd10; @(negedge clk); cdt_clr = 0;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      hist_ext_en = 1; hist_we = 1; hist_addr = fine_t'(a); hist_wdata = '0;
      model[a] = 0;
    end
    @(negedge clk); hist_ext_en = 0; hist_we = 0;
    cdt_run = 1;
    for (int n = 0; n < 15; n++) begin
      hit(300 + n * 211, c, f);
      if (n < 10) model[f] += 32;
      repeat (3) @(posedge clk);
    end
    chk(cdt_done, "code density test done after n_cdt hits");
    if (cdt_done) n_limit++;
    cdt_run = 0;
    check_hist();
    $display("drops=%0d limit_stops=%0d", n_drop, n_limit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
