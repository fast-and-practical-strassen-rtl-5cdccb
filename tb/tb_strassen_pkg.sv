// tb_strassen_pkg: checks the Strassen-squared instruction table.
//
// For random 4x4 scalar matrices A and B (16-bit, wrapping) it forms the 49
// products from the table's LHS and RHS coefficients, accumulates them into
// C with the output coefficients, and compares C with the direct product.
// It also checks that every operand has 1, 2 or 4 terms, that the operand
// lists match the coefficients, and that products 0 and 2 (outer product 0,
// inner products 0 and 2) have the operands printed in the paper's Fig. 3(c)
// for its m0 and m1.
module tb_strassen_pkg;
  import strassen_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = !clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [15:0] a [16], b [16], c [16], cref [16], l, r;
    oplist_t ol;
    int n4, n2, n1, cnt;
    for (int trial = 0; trial < 20; trial++) begin
      for (int i = 0; i < 16; i++) begin a[i] = 16'($urandom); b[i] = 16'($urandom); c[i] = '0; end
      for (int t = 0; t < 49; t++) begin
        l = '0; r = '0;
        for (int x = 0; x < 16; x++) begin
          l += 16'(s2_lhs(t, x)) * a[x];
          r += 16'(s2_rhs(t, x)) * b[x];
        end
        for (int x = 0; x < 16; x++) c[x] += 16'(s2_out(t, x)) * (l * r);
      end
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        cref[4*i+j] = '0;
        for (int p = 0; p < 4; p++) cref[4*i+j] += a[4*i+p] * b[4*p+j];
        check(c[4*i+j] == cref[4*i+j], $sformatf("C[%0d][%0d]", i, j));
      end
    end
    n4 = 0; n2 = 0; n1 = 0;
    for (int side = 0; side < 2; side++) for (int t = 0; t < 49; t++) begin
      ol = s2_oplist(t, side[0]);
      cnt = 0;
      for (int x = 0; x < 16; x++) cnt += ((side ? s2_rhs(t, x) : s2_lhs(t, x)) != 0) ? 1 : 0;
      check(int'(ol.nops) == cnt, "oplist size");
      check(cnt == 1 || cnt == 2 || cnt == 4, "operand count");
      for (int i = 0; i < int'(ol.nops); i++)
        check((side ? s2_rhs(t, ol.idx[i]) : s2_lhs(t, ol.idx[i])) == (ol.neg[i] ? -2'sd1 : 2'sd1), "oplist sign");
      if (cnt == 4) n4++; else if (cnt == 2) n2++; else n1++;
    end
    // per side: 5*5 four-term, 2*5*2 two-term and 2*2 one-term operands
    check(n4 == 50 && n2 == 40 && n1 == 8, $sformatf("operand mix %0d/%0d/%0d", n4, n2, n1));
    // Fig. 3(c): (A00+A11+A22+A33)(B00+B11+B22+B33)
    for (int x = 0; x < 16; x++) begin
      check(s2_lhs(0, x) == ((x % 5 == 0) ? 2'sd1 : 2'sd0), "m0 lhs");
      check(s2_rhs(0, x) == ((x % 5 == 0) ? 2'sd1 : 2'sd0), "m0 rhs");
    end
    // Fig. 3(c) m1: (A00+A22)(B01-B11+B23-B33)
    check(s2_lhs(2, 0) == 1 && s2_lhs(2, 10) == 1 && s2_oplist(2, 1'b0).nops == 2, "fig m1 lhs");
    check(s2_rhs(2, 1) == 1 && s2_rhs(2, 5) == -1 && s2_rhs(2, 11) == 1 && s2_rhs(2, 15) == -1, "fig m1 rhs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
