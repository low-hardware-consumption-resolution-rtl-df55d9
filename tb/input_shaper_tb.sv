// input_shaper_tb -- STOP edges at random points of the 4424 ps clock
// period. EN must rise right after the STOP edge, stay high until the next
// rising clock edge and then fall, even if STOP is still high; a new STOP
// edge must set it again.
`timescale 1ps/1ps
module input_shaper_tb;
  localparam int T = 4424;
  int checks = 0, failures = 0, cycles = 0;
  logic clk = 0, sel_in = 0, en;
  input_shaper dut (.clk, .sel_in, .en);
  always #(T/2) clk = ~clk;
  always @(posedge clk) cycles++;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask
  initial begin
    time t_stop, t_edge;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      int off;
      @(posedge clk);
      off = 200 + int'($urandom % (T - 400));
      #(off);
      chk(en == 1'b0, "EN low before STOP");
      sel_in = 1; t_stop = $time;
      #5;
      chk(en == 1'b1, "EN high right after STOP");
      @(posedge clk); t_edge = $time;
      #1;
      chk(en == 1'b0, "EN cleared by the clock edge");
      chk(t_edge - t_stop == T - off, "EN window ends at the next edge");
      #(100 + $urandom % 2000);
      sel_in = 0;
      #1;
      chk(en == 1'b0, "falling STOP leaves EN low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (cycles == 2000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
