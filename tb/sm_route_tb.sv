// sm_route_tb -- changes the input at spaced random times and checks that
// group k sees each change after k*20 ps (+-4 ps), group 0 at once, and
// that the delays grow with k.
`timescale 1ps/1ps
module sm_route_tb;
  import tdc_pkg::*;
  localparam int NG = 8;
  int checks = 0, failures = 0;
  gray_t g = '0;
  logic [NG-1:0][GRAY_W-1:0] taps;
  sm_route #(.NG(NG)) dut (.g, .taps);
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask
  initial begin
    #100;
    for (int n = 0; n < 100; n++) begin
      gray_t v, old;
      old = g;
      v = gray_t'($urandom);
      if (v == g) v = ~g;
      fork
        begin
          #1 g = v;
        end
        // group k must still show the old value 5 ps before k*20 ps and the
        // new one 5 ps after
        for (int k = 1; k < NG; k++) begin
          fork
            automatic int kk = k;
            begin
              #(1 + kk * 20 - 5);
              chk(taps[kk] == old, $sformatf("group %0d changed early", kk));
              #10;
              chk(taps[kk] == v, $sformatf("group %0d changed late", kk));
            end
          join_none
        end
      join_none
      #2;
      chk(taps[0] == v, "group 0 follows at once");
      #298;
      for (int k = 0; k < NG; k++) chk(taps[k] == g, $sformatf("group %0d value", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
