// factor_pipeline_tb -- loads random merged words, back to back where busy
// allows. Each word must produce the pairs (Addr_l, Coe_l), (Addr_m, Coe_m),
// (Addr_r, Coe_r) on the three following clocks, pairs with Coe = 0
// produce no update, and busy must permit exactly one word per three clocks.
`timescale 1ps/1ps
module factor_pipeline_tb;
  import tdc_pkg::*;
  int checks = 0, failures = 0, cycles = 0, loads = 0;
  logic clk = 0, rst_n = 0, load = 0;
  cc_word_t word = '0;
  logic busy, upd_valid;
  vaddr_t upd_addr;
  coe_t upd_coe;
  factor_pipeline dut (.clk, .rst_n, .load, .word, .busy, .upd_valid, .upd_addr, .upd_coe);
  always #500 clk = ~clk;
  always @(posedge clk) cycles++;

  int       m_slots = 0;
  cc_word_t m_word = '0;
  logic     hold = 0;      // keep requesting a load every clock

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // check the outputs of the present state, then drive the next stimulus
  always @(negedge clk) if (rst_n) begin
    vaddr_t ea; coe_t ec;
    unique case (m_slots)
      3: begin ea = m_word.addr_l; ec = m_word.coe_l; end
      2: begin ea = m_word.addr_m; ec = m_word.coe_m; end
      1: begin ea = m_word.addr_r; ec = m_word.coe_r; end
      default: begin ea = '0; ec = '0; end
    endcase
    chk(busy == (m_slots > 1), "busy");
    chk(upd_valid == (m_slots > 0 && ec != 0), "update valid");
    if (m_slots > 0 && ec != 0) chk(upd_addr == ea && upd_coe == ec, "update pair");
    word = {$urandom, $urandom, $urandom};
    if ($urandom % 3 == 0) word.coe_m = '0;
    if ($urandom % 3 == 0) word.coe_r = '0;
    load = (hold || $urandom % 4 != 0) && !(m_slots > 1);
    if (load) begin m_slots = 3; m_word = word; loads++; end
    else if (m_slots > 0) m_slots--;
  end

  initial begin
    int l0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (600) @(posedge clk);
    // throughput: loads requested every clock give one word per three clocks
    @(posedge clk);
    hold = 1; l0 = loads;
    repeat (30) @(posedge clk);
    hold = 0;
    chk(loads - l0 == 10, $sformatf("%0d words in 30 clocks", loads - l0));
    chk(loads > 150, "enough words loaded");
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
