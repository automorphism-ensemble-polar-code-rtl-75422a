// tb_aed_pkg -- checks the constants and functions of aed_pkg.
//  * the frozen mask equals the closure of {27} under the polar partial order
//    (computed here by a different method) and has K = 60 information bits;
//  * every automorphism in the list is a bijection, and maps each of a set of
//    random code words onto a code word (re-encoding the permuted word leaves the
//    frozen positions zero);
//  * f_minsum and g_func against their defining formulas with saturation at +-31.
module tb_aed_pkg;
  import aed_pkg::*;
  import fssc_ref_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic bit_vec_t fr = ref_frozen();
    automatic int nk = 0;
    for (int i = 0; i < N; i++) begin
      check(FROZEN_MASK[i] == fr[i], $sformatf("frozen mask bit %0d", i));
      nk += !fr[i];
    end
    check(nk == 60, $sformatf("K = %0d", nk));
    // a few positions worked out by hand: 27 is the minimal information bit,
    // 26, 28 and 39 are frozen, 29, 30, 43, 127 are information bits
    check(!FROZEN_MASK[27] && FROZEN_MASK[26] && FROZEN_MASK[28] && FROZEN_MASK[39], "hand-picked frozen bits");
    check(!FROZEN_MASK[29] && !FROZEN_MASK[30] && !FROZEN_MASK[43] && !FROZEN_MASK[127], "hand-picked info bits");

    for (int m = 0; m < M_MAX; m++) begin
      bit seen [N];
      foreach (seen[i]) seen[i] = 0;
      for (int i = 0; i < N; i++) begin
        automatic int p = int'(blta_map(m, i));
        check(p == ref_perm(m, i), $sformatf("blta_map m=%0d i=%0d", m, i));
        seen[p] = 1;
      end
      for (int i = 0; i < N; i++) check(seen[i], $sformatf("perm %0d not a bijection", m));
      for (int t = 0; t < 20; t++) begin
        bit_vec_t u, x, xp, up;
        for (int i = 0; i < N; i++) u[i] = fr[i] ? 1'b0 : 1'($urandom);
        x = polar_encode(7, u);
        for (int i = 0; i < N; i++) xp[ref_perm(m, i)] = x[i];
        up = polar_encode(7, xp);   // G is its own inverse over GF(2)
        begin
          automatic bit ok = 1;
          for (int i = 0; i < N; i++) if (fr[i] && up[i]) ok = 0;
          check(ok, $sformatf("perm %0d is not an automorphism", m));
        end
      end
    end

    for (int a = -31; a <= 31; a++)
      for (int b = -31; b <= 31; b++) begin
        automatic int mn = (a < 0 ? -a : a) < (b < 0 ? -b : b) ? (a < 0 ? -a : a) : (b < 0 ? -b : b);
        automatic int ef = ((a < 0) != (b < 0)) ? -mn : mn;
        automatic int eg0 = a + b, eg1 = b - a;
        eg0 = eg0 > 31 ? 31 : (eg0 < -31 ? -31 : eg0);
        eg1 = eg1 > 31 ? 31 : (eg1 < -31 ? -31 : eg1);
        check(int'(f_minsum(llr_t'(a), llr_t'(b))) == ef, $sformatf("f(%0d,%0d)", a, b));
        check(int'(g_func(llr_t'(a), llr_t'(b), 1'b0)) == eg0, $sformatf("g(%0d,%0d,0)", a, b));
        check(int'(g_func(llr_t'(a), llr_t'(b), 1'b1)) == eg1, $sformatf("g(%0d,%0d,1)", a, b));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
