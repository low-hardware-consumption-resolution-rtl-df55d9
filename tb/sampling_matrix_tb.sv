// sampling_matrix_tb -- random tap values; after each clock edge q must
// hold the values present at that edge, and must not follow later changes.
`timescale 1ps/1ps
module sampling_matrix_tb;
  import tdc_pkg::*;
  localparam int NG = 8;
  int checks = 0, failures = 0, cycles = 0;
  logic clk = 0;
  logic [NG-1:0][GRAY_W-1:0] taps, q, exp_q;
  sampling_matrix #(.NG(NG)) dut (.clk, .taps, .q);
  always #500 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    taps = '0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      taps = {$urandom, $urandom};
      exp_q = taps;
      @(posedge clk); #100;
      taps = ~taps;     // change after the edge
      #100;
      checks++;
      if (q != exp_q) begin failures++; $display("FAIL: q=%h exp=%h", q, exp_q); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (cycles == 1000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
