// coarse_counter_tb -- random START pulses; the count must equal the clock
// edges since the last START, including wrap-around at 2^W.
`timescale 1ps/1ps
module coarse_counter_tb;
  localparam int W = 8;
  int checks = 0, failures = 0, cycles = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [W-1:0] count;
  int model;
  coarse_counter #(.W(W)) dut (.clk, .rst_n, .start, .count);
  always #500 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1; model = 0;
    for (int n = 0; n < 2000; n++) begin
      start = ($urandom % 400 == 0);
      @(posedge clk);
      model = start ? 0 : (model + 1) % (1 << W);
      #1;
      checks++;
      if (count != W'(model)) begin failures++; $display("FAIL: %0d vs %0d", count, model); end
      @(negedge clk);
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
