// Testbench for vector_unit: every operation on random vectors against
// real-number results, including the statistics and pairwise merge that
// LayerNorm uses across PEs (merge checked against the statistics of the
// concatenated vector).
module tb_vector_unit;
  import helios_pkg::*;
  localparam int LANES = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  vec_op_e op;
  logic [$clog2(LANES+1)-1:0] n_valid;
  acc_t a [LANES];
  acc_t b [LANES];
  acc_t out [LANES];
  acc_t s0, s1, mu1, var1, mu2, var2, sum, sumsq, mu_out, var_out;
  logic [31:0] n1, n2, n_out;

  vector_unit #(.LANES(LANES)) dut (.*);

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
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real e, rs, rq, ra [LANES], rmu1, rv1, rmu2, rv2, mu, vr;
    in_valid = 0; op = V_ADD; n_valid = 7'(LANES); s0 = '0; s1 = '0;
    n1 = 0; n2 = 0; mu1 = '0; mu2 = '0; var1 = '0; var2 = '0;
    for (int k = 0; k < LANES; k++) begin a[k] = '0; b[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      @(negedge clk);
      op = vec_op_e'(t % 6);
      n_valid = 6'(LANES - (t % 5));
      s0 = q(($itor($urandom_range(0, 400)) / 100.0) - 2.0);
      s1 = q($itor($urandom_range(10, 300)) / 100.0);
      for (int k = 0; k < LANES; k++) begin
        a[k] = q(($itor($urandom_range(0, 1600)) / 100.0) - 8.0);
        b[k] = q(($itor($urandom_range(0, 1600)) / 100.0) - 8.0);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL latency"); end
      rs = 0; rq = 0;
      for (int k = 0; k < LANES; k++) begin
        case (op)
          V_ADD:   e = r(a[k]) + r(b[k]);
          V_MUL:   e = r(a[k]) * r(b[k]);
          V_RELU:  e = (r(a[k]) > 0) ? r(a[k]) : 0.0;
          V_SILU:  e = r(a[k]) / (1.0 + $exp(-r(a[k])));
          V_SCALE: e = (r(a[k]) - r(s0)) * r(s1);
          default: e = r(out[k]);
        endcase
        if (op != V_STAT) check($sformatf("op %0d lane %0d", op, k), r(out[k]), e, 0.005);
        if (k < int'(n_valid)) begin rs += r(a[k]); rq += r(a[k]) * r(a[k]); end
      end
      if (op == V_STAT) begin
        check("sum", r(sum), rs, 0.001);
        check("sumsq", r(sumsq), rq, 0.01);
      end
    end
    // pairwise merge: stats of two halves vs stats of the whole
    for (int t = 0; t < 10; t++) begin
      int na, nb;
      real xa [64], xb [64];
      na = $urandom_range(1, 40); nb = $urandom_range(1, 40);
      rmu1 = 0; rv1 = 0; rmu2 = 0; rv2 = 0;
      for (int i = 0; i < na; i++) begin xa[i] = ($itor($urandom_range(0, 1000)) / 100.0) - 5.0; rmu1 += xa[i]; end
      for (int i = 0; i < nb; i++) begin xb[i] = ($itor($urandom_range(0, 1000)) / 100.0) - 3.0; rmu2 += xb[i]; end
      rmu1 /= na; rmu2 /= nb;
      for (int i = 0; i < na; i++) rv1 += (xa[i] - rmu1) ** 2;
      for (int i = 0; i < nb; i++) rv2 += (xb[i] - rmu2) ** 2;
      rv1 /= na; rv2 /= nb;
      mu = 0; vr = 0;
      for (int i = 0; i < na; i++) mu += xa[i];
      for (int i = 0; i < nb; i++) mu += xb[i];
      mu /= (na + nb);
      for (int i = 0; i < na; i++) vr += (xa[i] - mu) ** 2;
      for (int i = 0; i < nb; i++) vr += (xb[i] - mu) ** 2;
      vr /= (na + nb);
      @(negedge clk);
      op = V_MERGE; n1 = na; n2 = nb; mu1 = q(rmu1); mu2 = q(rmu2); var1 = q(rv1); var2 = q(rv2);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (n_out != 32'(na + nb)) begin failures++; $display("FAIL n_out"); end
      check("merge mu", r(mu_out), mu, 0.001);
      check("merge var", r(var_out), vr, 0.002);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
