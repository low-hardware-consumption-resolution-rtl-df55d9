// fine_encoder_tb -- random sets of eight gray codes. The fine code two
// clocks later must be the sum of their binary values (reference: each bit
// is the XOR of the gray bits at and above it) and valid must flag a
// non-zero sum. All-zero input checks the no-hit case.
`timescale 1ps/1ps
module fine_encoder_tb;
  import tdc_pkg::*;
  localparam int NG = 8;
  int checks = 0, failures = 0, cycles = 0;
  logic clk = 0, rst_n = 0;
  logic [NG-1:0][GRAY_W-1:0] q;
  fine_t fine;
  logic valid;
  fine_encoder #(.NG(NG)) dut (.clk, .rst_n, .q, .fine, .valid);
  always #500 clk = ~clk;
  always @(posedge clk) cycles++;
  int exp_sum [$];

  function automatic int ref_sum(input logic [NG-1:0][GRAY_W-1:0] v);
    int s = 0;
    for (int k = 0; k < NG; k++) begin
      int b = 0;
      for (int i = 0; i < GRAY_W; i++) if (^(v[k] >> i)) b += (1 << i);
      s += b;
    end
    return s;
  endfunction

  initial begin
    q = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      if (n % 5 == 0) q = '0;
      else q = {$urandom, $urandom};
      exp_sum.push_back(ref_sum(q));
      if (exp_sum.size() > 2) begin
        int e;
        e = exp_sum.pop_front();
        checks++;
        if (fine != fine_t'(e) || valid != (e != 0)) begin
          failures++; $display("FAIL: fine=%0d valid=%0d exp=%0d", fine, valid, e);
        end
      end
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
