// Testbench for online_softmax_unit: feeds a chain of score blocks (the last
// one partially filled), feeding each step's m and l back as the next
// step's state, and compares m, l, alpha and p with a real-number model of
// online softmax. Also checks the one-cycle latency.
module tb_online_softmax_unit;
  import helios_pkg::*;
  localparam int LANES = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, first, out_valid;
  logic [$clog2(LANES+1)-1:0] n_valid;
  acc_t x [LANES];
  acc_t m_prev, l_prev, m, l, alpha;
  acc_t p [LANES];

  online_softmax_unit #(.LANES(LANES)) dut (.*);

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
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real rm, rl, xr [LANES], mx, ee [LANES], se, lsc, ra, rm_prev, rl_prev;
    int nv;
    in_valid = 0; first = 0; n_valid = '0; m_prev = '0; l_prev = '0;
    for (int j = 0; j < LANES; j++) x[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    rm = 0; rl = 0;
    for (int blk = 0; blk < 6; blk++) begin
      nv = (blk == 5) ? 23 : LANES;
      for (int j = 0; j < LANES; j++) begin
        // later blocks drift upward so the running max changes
        xr[j] = ($itor($urandom_range(0, 4000)) / 500.0) - 6.0 + blk * 0.7;
        x[j]  = q(xr[j]);
        xr[j] = r(x[j]);
      end
      // reference in real numbers
      rm_prev = rm; rl_prev = rl;
      mx = -1.0e30;
      for (int j = 0; j < nv; j++) if (xr[j] > mx) mx = xr[j];
      if (blk == 0 || mx > rm_prev) rm = mx; else rm = rm_prev;
      se = 0;
      for (int j = 0; j < LANES; j++) begin
        ee[j] = (j < nv) ? $exp(xr[j] - rm) : 0.0;
        se += ee[j];
      end
      lsc = (blk == 0) ? 0.0 : rl_prev * $exp(rm_prev - rm);
      rl  = lsc + se;
      ra  = lsc / rl;
      // drive, feeding the unit's own state back
      @(negedge clk);
      in_valid = 1; first = (blk == 0); n_valid = 7'(nv);
      m_prev = m; l_prev = l;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid not one cycle after in_valid"); end
      check("m", r(m), rm, 0.0001);
      check("l", r(l), rl, 0.003 * rl + 0.002);
      check("alpha", r(alpha), ra, 0.002);
      for (int j = 0; j < LANES; j++) check($sformatf("p[%0d]", j), r(p[j]), ee[j] / rl, 0.0005);
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid stuck"); end
      rm = r(m); rl = r(l);  // continue from the unit's (rounded) state
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
