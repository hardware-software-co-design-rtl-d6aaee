// Testbench for reduction_unit: checks the three factor selections
// (plain sum, alpha scaling, FGU attention merge) against real-number
// results, the merged statistics and the one-cycle latency.
module tb_reduction_unit;
  import helios_pkg::*;
  localparam int LANES = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  red_mode_e mode;
  acc_t alpha, m1, l1, m2, l2, m_out, l_out;
  acc_t v1 [LANES];
  acc_t v2 [LANES];
  acc_t out [LANES];

  reduction_unit #(.LANES(LANES)) dut (.*);

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
    real s1, s2, rm, e1, e2, rl;
    in_valid = 0; mode = RED_SUM; alpha = '0; m1 = '0; l1 = '0; m2 = '0; l2 = '0;
    for (int k = 0; k < LANES; k++) begin v1[k] = '0; v2[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      @(negedge clk);
      mode  = red_mode_e'(t % 3);
      alpha = q($itor($urandom_range(0, 1000)) / 1000.0);
      m1 = q(($itor($urandom_range(0, 1000)) / 100.0) - 5.0);
      m2 = q(($itor($urandom_range(0, 1000)) / 100.0) - 5.0);
      l1 = q(1.0 + $itor($urandom_range(0, 3000)) / 100.0);
      l2 = q(1.0 + $itor($urandom_range(0, 3000)) / 100.0);
      for (int k = 0; k < LANES; k++) begin
        v1[k] = q(($itor($urandom_range(0, 2000)) / 100.0) - 10.0);
        v2[k] = q(($itor($urandom_range(0, 2000)) / 100.0) - 10.0);
      end
      in_valid = 1;
      rm = (r(m1) > r(m2)) ? r(m1) : r(m2);
      e1 = r(l1) * $exp(r(m1) - rm);
      e2 = r(l2) * $exp(r(m2) - rm);
      rl = e1 + e2;
      case (mode)
        RED_SUM:   begin s1 = 1.0; s2 = 1.0; end
        RED_SCALE: begin s1 = r(alpha); s2 = 1.0; end
        default:   begin s1 = e1 / rl; s2 = e2 / rl; end
      endcase
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL latency"); end
      for (int k = 0; k < LANES; k++)
        check($sformatf("out[%0d] mode %0d", k, mode), r(out[k]), s1 * r(v1[k]) + s2 * r(v2[k]), 0.01);
      if (mode == RED_ATTN) begin
        check("m_out", r(m_out), rm, 0.0001);
        check("l_out", r(l_out), rl, 0.001 * rl + 0.001);
      end else begin
        check("m_out pass", r(m_out), r(m1), 0.0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
