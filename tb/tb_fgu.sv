// Testbench for fgu: random pairs of partial statistics, including empty
// partials (l = 0, m = -inf), against the real-number merge of Eq. 1-2.
module tb_fgu;
  import helios_pkg::*;
  int checks = 0, failures = 0;
  acc_t m1, l1, m2, l2, m, l, f1, f2;

  fgu dut (.*);

  function automatic real r(acc_t v); return $itor(v) / 65536.0; endfunction
  function automatic acc_t q(real v); return acc_t'($rtoi(v * 65536.0)); endfunction

  task automatic check(string what, real got, real exp, real tol);
    checks++;
    if ((got - exp > tol) || (exp - got > tol)) begin
      failures++;
      $display("FAIL %s got %f expected %f", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real rm1, rl1, rm2, rl2, rm, e1, e2, rl;
    for (int t = 0; t < 200; t++) begin
      rm1 = ($itor($urandom_range(0, 2000)) / 100.0) - 10.0;
      rm2 = ($itor($urandom_range(0, 2000)) / 100.0) - 10.0;
      rl1 = 1.0 + $itor($urandom_range(0, 6000)) / 100.0;
      rl2 = 1.0 + $itor($urandom_range(0, 6000)) / 100.0;
      m1 = q(rm1); m2 = q(rm2); l1 = q(rl1); l2 = q(rl2);
      if (t % 10 == 3) begin m1 = FX_NEGINF; l1 = '0; end
      #1;
      rm1 = r(m1); rm2 = r(m2); rl1 = r(l1); rl2 = r(l2);
      rm = (rm1 > rm2) ? rm1 : rm2;
      e1 = (l1 == 0) ? 0.0 : rl1 * $exp(rm1 - rm);
      e2 = rl2 * $exp(rm2 - rm);
      rl = e1 + e2;
      check("m", r(m), rm, 0.0001);
      check("l", r(l), rl, 0.001 * rl + 0.001);
      check("f1", r(f1), e1 / rl, 0.001);
      check("f2", r(f2), e2 / rl, 0.001);
      #9;
    end
    // both empty: zero factors
    m1 = FX_NEGINF; l1 = '0; m2 = FX_NEGINF; l2 = '0;
    #1;
    checks++;
    if (l != 0 || f1 != 0 || f2 != 0) begin failures++; $display("FAIL empty merge"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
