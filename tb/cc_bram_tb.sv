// cc_bram_tb -- writes random merged words to random addresses while reading
// others; every read must return the last word written, one clock later.
`timescale 1ps/1ps
module cc_bram_tb;
  import tdc_pkg::*;
  int checks = 0, failures = 0, cycles = 0;
  logic clk = 0, we = 0;
  fine_t waddr = '0, raddr = '0;
  cc_word_t wdata = '0, rdata;
  cc_word_t model [256];
  cc_bram dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #500 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    // fill
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      we = 1; waddr = fine_t'(a); wdata = {$urandom, $urandom, $urandom};
      model[a] = wdata;
    end
    for (int n = 0; n < 1000; n++) begin
      cc_word_t e;
      @(negedge clk);
      we = 1'($urandom); waddr = fine_t'($urandom); wdata = {$urandom, $urandom, $urandom};
      raddr = fine_t'($urandom);
      if (raddr == waddr) raddr = raddr + 1'b1;
      e = model[raddr];
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata != e) begin failures++; $display("FAIL: addr %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (cycles == 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
