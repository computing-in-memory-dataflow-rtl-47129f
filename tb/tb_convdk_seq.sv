// tb_convdk_seq -- checks the ConvDK sequence constants of convdk_seq.
// For each (kw, s) the expected l, dn, m1, n1 are worked out by hand, and
// the Algorithm-1 visiting order built from them is checked to produce every
// output column exactly once (each m with m*s = n*kw + a, 0 <= a < l).
// Random odd kw and coprime strides are checked against a brute-force search.
// The sequences checked follow the published ConvDK theorems, including the
// kw = 3, s = 2 worked example.
module tb_convdk_seq;
  int checks = 0, failures = 0;
  logic [2:0] kw_i, s_i, l_o, dn_o, m1_o, n1_o;

  convdk_seq dut (.kw(kw_i), .s(s_i), .l(l_o), .dn(dn_o), .m1(m1_o), .n1(n1_o));

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic check_kw_s(int kw, int s, int l, int dn, int m1, int n1);
    int seen [200];
    int nn, mm, ndup;
    int gl, gdn, gm1, gn1;
    kw_i = 3'(kw); s_i = 3'(s);
    #1;
    gl = int'(l_o); gdn = int'(dn_o); gm1 = int'(m1_o); gn1 = int'(n1_o);
    expect_eq($sformatf("l(%0d,%0d)", kw, s),  gl,  l);
    expect_eq($sformatf("dn(%0d,%0d)", kw, s), gdn, dn);
    expect_eq($sformatf("m1(%0d,%0d)", kw, s), gm1, m1);
    expect_eq($sformatf("n1(%0d,%0d)", kw, s), gn1, n1);
    if (gl == 0 || gdn == 0) return;  // no sequence to walk
    ndup = 20;
    foreach (seen[i]) seen[i] = 0;
    for (int a = 0; a < gl; a++) begin
      nn = (a * gn1) % gdn;
      mm = (a * gm1) % gl;
      while (nn < ndup) begin
        expect_eq($sformatf("m*s = n*kw + a (kw=%0d s=%0d a=%0d)", kw, s, a), mm * s, nn * kw + a);
        seen[mm]++;
        nn += gdn;
        mm += gl;
      end
    end
    // every column whose window starts inside the duplicated blocks is produced once
    for (int x = 0; x * s < ndup * kw; x++) expect_eq($sformatf("column %0d visited once", x), seen[x], 1);
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_kw_s(3, 1, 3, 1, 1, 0);
    check_kw_s(3, 2, 3, 2, 2, 1);
    check_kw_s(5, 1, 5, 1, 1, 0);
    check_kw_s(5, 2, 5, 2, 3, 1);
    check_kw_s(5, 3, 5, 3, 2, 1);
    check_kw_s(7, 2, 7, 2, 4, 1);
    // random odd kw and coprime s < kw, expected values by brute force
    repeat (40) begin
      int kw, s, m1;
      kw = 3 + 2 * int'($urandom % 3);
      s = 1 + int'($urandom % (kw - 1));
      m1 = 1;
      while ((m1 * s) % kw != 1) m1++;
      check_kw_s(kw, s, kw, s, m1, (m1 * s - 1) / kw);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
