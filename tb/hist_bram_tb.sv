// hist_bram_tb -- random factor updates, many of them back to back on the
// same bin, checked against a reference histogram by reading every bin
// through the external port; also clears bins through that port.
`timescale 1ps/1ps
module hist_bram_tb;
  import tdc_pkg::*;
  int checks = 0, failures = 0, cycles = 0;
  logic clk = 0, rst_n = 0;
  logic upd_valid = 0, ext_en = 0, ext_we = 0;
  fine_t upd_addr = '0, ext_addr = '0;
  coe_t upd_coe = '0;
  hist_t ext_wdata = '0, ext_rdata;
  longint model [256];
  hist_bram dut (.clk, .rst_n, .upd_valid, .upd_addr, .upd_coe, .ext_en, .ext_we,
                 .ext_addr, .ext_wdata, .ext_rdata);
  always #500 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic clear_all();
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      ext_en = 1; ext_we = 1; ext_addr = fine_t'(a); ext_wdata = '0;
      model[a] = 0;
    end
    @(negedge clk); ext_en = 0; ext_we = 0;
  endtask

  task automatic check_all();
    @(negedge clk);
    upd_valid = 0;
    repeat (3) @(negedge clk);
    for (int a = 0; a < 256; a++) begin
      ext_en = 1; ext_we = 0; ext_addr = fine_t'(a);
      @(posedge clk); #1;
      checks++;
      if (ext_rdata != hist_t'(model[a])) begin
        failures++; $display("FAIL: bin %0d = %0d expected %0d", a, ext_rdata, model[a]);
      end
      @(negedge clk);
    end
    ext_en = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      clear_all();
      for (int n = 0; n < 3000; n++) begin
        @(negedge clk);
        upd_valid = 1'($urandom % 5 != 0);
        // narrow address range gives frequent back-to-back hits on one bin
        upd_addr  = (round % 2 == 0) ? fine_t'($urandom % 4) : fine_t'($urandom);
        upd_coe   = coe_t'($urandom % 200);
        if (upd_valid) model[upd_addr] += upd_coe;
      end
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (cycles == 40000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
