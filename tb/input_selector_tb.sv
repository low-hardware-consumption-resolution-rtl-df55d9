// input_selector_tb -- random select masks and inputs; each output must be
// the random hit where selected and the channel's own input elsewhere.
`timescale 1ps/1ps
module input_selector_tb;
  localparam int N = 16;
  int checks = 0, failures = 0;
  logic [N-1:0] ext_in, sel_cdt, sel_out;
  logic cdt_hit;
  input_selector #(.N_CH(N)) dut (.ext_in, .cdt_hit, .sel_cdt, .sel_out);
  initial begin
    for (int t = 0; t < 500; t++) begin
      ext_in = 16'($urandom); sel_cdt = 16'($urandom); cdt_hit = 1'($urandom);
      #10;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (sel_out[i] != (sel_cdt[i] ? cdt_hit : ext_in[i])) begin
          failures++; $display("FAIL: channel %0d", i);
        end
      end
    end
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
