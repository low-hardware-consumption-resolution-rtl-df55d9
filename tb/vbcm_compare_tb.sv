// vbcm_compare_tb -- walks raw bins of random widths (narrow, regular and
// ultra-wide) against virtual bins of equal width, feeding each result's
// largest address back as the next start point, and compares every
// decision with a reference written from the four-case rule. Also checks
// that every virtual bin except the last three is reached (no missing bins).
`timescale 1ps/1ps
module vbcm_compare_tb;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  vaddr_t sp, al, am, ar;
  logic [31:0] t_raw, tv0, tv1, tv2;
  logic vl, vm, vr;
  int n_case [4];
  vbcm_compare dut (.sp, .t_raw, .t_vir0(tv0), .t_vir1(tv1), .t_vir2(tv2),
                    .addr_l(al), .addr_m(am), .addr_r(ar), .vl, .vm, .vr);
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  function automatic longint tvir(int m, int hv, int nv, longint tot);
    return (m >= nv) ? tot : longint'(m) * hv;
  endfunction
  initial begin
    for (int trial = 0; trial < 40; trial++) begin
      int w [200];
      automatic longint tot = 0, acc = 0;
      automatic int n = 120, nv, hv;
      bit covered [256];
      for (int k = 1; k <= n; k++) begin
        automatic int r = $urandom % 10;
        w[k] = (r < 2) ? $urandom % 5 : (r < 9) ? 20 + $urandom % 40 : 150 + $urandom % 200;
        if (k == 1) w[k] = 30;   // see below
        tot += w[k];
      end
      nv = 40 + $urandom % 60;
      hv = int'(tot / nv);
      sp = 1;
      foreach (covered[i]) covered[i] = 0;
      for (int k = 1; k <= n; k++) begin
        int e_l, e_m, e_r, c;
        acc += w[k];
        t_raw = 32'(acc);
        tv0 = 32'(tvir(sp, hv, nv, tot));
        tv1 = 32'(tvir(sp + 1, hv, nv, tot));
        tv2 = 32'(tvir(sp + 2, hv, nv, tot));
        #1;
        e_m = -1; e_r = -1;
        if (acc <= tv0) begin c = 0; e_l = sp; end
        else if (acc <= tv1) begin c = 1; e_l = sp; e_m = sp + 1; end
        else if (acc <= tv2) begin c = 2; e_l = sp; e_m = sp + 1; e_r = sp + 2; end
        else begin c = 3; e_l = sp + 1; e_m = sp + 2; e_r = sp + 3; end
        n_case[c]++;
        chk(vl && al == vaddr_t'(e_l), $sformatf("Addr_l k=%0d", k));
        chk(vm == (e_m >= 0) && (e_m < 0 || am == vaddr_t'(e_m)), $sformatf("Addr_m k=%0d", k));
        chk(vr == (e_r >= 0) && (e_r < 0 || ar == vaddr_t'(e_r)), $sformatf("Addr_r k=%0d", k));
        covered[e_l] = 1;
        if (e_m >= 0) covered[e_m] = 1;
        if (e_r >= 0) covered[e_r] = 1;
        sp = vaddr_t'((e_r >= 0) ? e_r : (e_m >= 0) ? e_m : e_l);
      end
      // The rule cannot reach virtual bin 1 if raw bin 1 spans more than
      // three virtual bins (hence the regular first bin above), and a run of
      // ultra-wide bins at the very end may leave the last bins unreached.
      for (int m = 1; m <= nv - 3; m++) chk(covered[m], $sformatf("virtual bin %0d reached", m));
    end
    for (int c = 0; c < 4; c++) chk(n_case[c] > 0, $sformatf("case %0d exercised", c));
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
