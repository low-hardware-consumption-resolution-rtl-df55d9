// gco_tb -- enables the oscillator for random windows. While enabled, every
// output change must be one bit and follow the reflected gray sequence; the
// number of steps in a window must match the 158 ps +-30 ps step delay; after
// EN falls the outputs must return to 0.
`timescale 1ps/1ps
module gco_tb;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic en = 0;
  gray_t g;
  gco dut (.en, .g);
  int steps;
  gray_t prev;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask
  always @(g) begin
    if (en && g != 0) begin
      chk($countones(g ^ prev) == 1, "one bit changes per step");
      chk(gray2bin(g) == gray2bin(prev) + 1'b1, "gray sequence advances by one");
      steps++;
    end
    prev = g;
  end
  initial begin
    prev = '0;
    #1000;
    for (int n = 0; n < 300; n++) begin
      int w;
      w = 300 + int'($urandom % 4100);
      steps = 0;
      en = 1;
      #(w);
      en = 0;
      chk(steps >= w / 188 - 1 && steps <= w / 128 + 1,
          $sformatf("%0d steps in %0d ps", steps, w));
      #400;
      chk(g == '0, "reset to 0 after EN falls");
      #(100 + $urandom % 500);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
