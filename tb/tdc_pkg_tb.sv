// tdc_pkg_tb -- checks the gray code helpers and the merged word layout.
// Every 5-bit value is converted both ways and compared with an
// independent bit-by-bit reference; the C&C word must be 72 bits with
// Addr_l in the top byte.
`timescale 1ps/1ps
module tdc_pkg_tb;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int v = 0; v < 32; v++) begin
      logic [4:0] b, g, ref_g, ref_b;
      b = 5'(v);
      ref_g = {b[4], b[4]^b[3], b[3]^b[2], b[2]^b[1], b[1]^b[0]};
      g = bin2gray(b);
      chk(g == ref_g, $sformatf("bin2gray(%0d)=%b expected %b", v, g, ref_g));
      ref_b = '0;
      for (int i = 4; i >= 0; i--) ref_b[i] = ^(ref_g >> i);
      chk(gray2bin(ref_g) == ref_b && ref_b == b, $sformatf("gray2bin(%b)", ref_g));
      if (v > 0) chk($countones(bin2gray(b) ^ bin2gray(5'(v - 1))) == 1, "one bit per step");
    end
    // example printed in the coding comparison: gray 00101 <-> binary 00110
    chk(gray2bin(5'b00101) == 5'b00110, "gray 00101 -> 00110");
    chk(CC_W == 72, "merged word is 72 bits");
    begin
      cc_word_t w;
      w = '0; w.addr_l = 8'hA5;
      chk(w[71:64] == 8'hA5, "addr_l in the top byte");
    end
    chk(COE_ONE == 16'd32, "Coe of 1.0 is 2^MBAR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
