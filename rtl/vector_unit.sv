// vector_unit: element-wise operations of a PE.
//
// Operations (vec_op_e in helios_pkg), on LANES Q16.16 elements:
//   V_ADD    out = a + b                 residual connection
//   V_MUL    out = a * b                 gated linear unit product
//   V_RELU   out = max(a, 0)             activation
//   V_SILU   out = a * sigmoid(a)        activation (sigmoid from fx_exp)
//   V_SCALE  out = (a - s0) * s1         normalisation: s0 = mean (0 for
//                                        RMSNorm), s1 = 1/std or 1/rms
//   V_STAT   sum = sum(a), sumsq = sum(a^2) over the first n_valid lanes,
//            the per-sub-vector statistics that are all-reduced for
//            LayerNorm / RMSNorm
//   V_MERGE  pairwise merge of two sub-vectors' (n, mean, variance):
//            mu = (n1 mu1 + n2 mu2)/n, var = (n1 v1 + n2 v2)/n
//            + n1 n2 (mu1 - mu2)^2 / n^2, n = n1 + n2
// The paper lists residual, normalisation and activation and gives the merge
// formula; the choice of activation functions and the operand conventions
// are this design's. Timing: registered outputs, one cycle latency.
module vector_unit
  import helios_pkg::*;
#(
  parameter int LANES = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  vec_op_e                    op,
  input  logic [$clog2(LANES+1)-1:0] n_valid,
  input  acc_t                       a    [LANES],
  input  acc_t                       b    [LANES],
  input  acc_t                       s0,
  input  acc_t                       s1,
  // V_MERGE operands: element counts are integers, means/variances Q16.16
  input  logic [31:0]                n1,
  input  acc_t                       mu1,
  input  acc_t                       var1,
  input  logic [31:0]                n2,
  input  acc_t                       mu2,
  input  acc_t                       var2,
  output logic                       out_valid,
  output acc_t                       out  [LANES],
  output acc_t                       sum,
  output acc_t                       sumsq,
  output logic [31:0]                n_out,
  output acc_t                       mu_out,
  output acc_t                       var_out
);

  function automatic acc_t sigmoid(acc_t x);
    acc_t e;
    if (x >= 0) return fx_div(FX_ONE, FX_ONE + fx_exp(-64'(x)));
    e = fx_exp(64'(x));
    return fx_div(e, FX_ONE + e);
  endfunction

  acc_t r [LANES];
  acc_t st_sum, st_sq, m_mu, m_var;
  logic [31:0] m_n;

  always_comb begin
    st_sum = '0;
    st_sq  = '0;
    for (int k = 0; k < LANES; k++) begin
      unique case (op)
        V_ADD:   r[k] = a[k] + b[k];
        V_MUL:   r[k] = fx_mul(a[k], b[k]);
        V_RELU:  r[k] = (a[k] > 0) ? a[k] : '0;
        V_SILU:  r[k] = fx_mul(a[k], sigmoid(a[k]));
        V_SCALE: r[k] = fx_mul(a[k] - s0, s1);
        default: r[k] = a[k];
      endcase
      if (k < int'(n_valid)) begin
        st_sum = st_sum + a[k];
        st_sq  = st_sq + fx_mul(a[k], a[k]);
      end
    end
    // pairwise mean / variance (integer counts, Q16.16 moments)
    m_n = n1 + n2;
    begin
      logic signed [63:0] num_mu, num_var, d, dd;
      num_mu  = 64'(signed'({1'b0, n1})) * 64'(mu1) + 64'(signed'({1'b0, n2})) * 64'(mu2);
      num_var = 64'(signed'({1'b0, n1})) * 64'(var1) + 64'(signed'({1'b0, n2})) * 64'(var2);
      d       = 64'(mu1) - 64'(mu2);
      dd      = (d * d) >>> FRAC;
      if (m_n == 0) begin
        m_mu  = '0;
        m_var = '0;
      end else begin
        m_mu  = acc_t'(num_mu / 64'(m_n));
        m_var = acc_t'(num_var / 64'(m_n)
              + (dd * 64'(n1) * 64'(n2)) / (64'(m_n) * 64'(m_n)));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sum <= '0; sumsq <= '0; n_out <= '0; mu_out <= '0; var_out <= '0;
      for (int k = 0; k < LANES; k++) out[k] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int k = 0; k < LANES; k++) out[k] <= r[k];
        sum     <= st_sum;
        sumsq   <= st_sq;
        n_out   <= m_n;
        mu_out  <= m_mu;
        var_out <= m_var;
      end
    end
  end

endmodule
