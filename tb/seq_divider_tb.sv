// seq_divider_tb -- random and edge-case divisions (including a zero
// divisor) against the simulator's own division; done must come exactly
// W + 1 clocks after start (start registered, then W steps).
`timescale 1ps/1ps
module seq_divider_tb;
  localparam int W = 40;
  int checks = 0, failures = 0, cycles = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [W-1:0] num = '0, den = '0, quo;
  seq_divider #(.W(W)) dut (.clk, .rst_n, .start, .num, .den, .busy, .done, .quo);
  always #500 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      logic [W-1:0] e;
      int c0, lat;
      @(negedge clk);
      num = {8'($urandom), $urandom} >> ($urandom % 12);
      den = W'($urandom % (n % 3 == 0 ? 300 : 40000000));
      if (n == 5) den = 0;
      if (n == 6) begin num = 1000; den = 1000; end
      if (n == 7) begin num = 5; den = 7; end
      e = (den == 0) ? '0 : num / den;
      start = 1; c0 = cycles;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      lat = cycles - c0;
      checks += 2;
      if (quo != e) begin failures++; $display("FAIL: %0d / %0d = %0d, got %0d", num, den, e, quo); end
      if (lat != W + 1) begin failures++; $display("FAIL: latency %0d", lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (cycles == 30000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
