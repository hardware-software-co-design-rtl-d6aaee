// online_softmax_unit: one step of online softmax for a block of scores.
//
// Given the scores x_i of one KV block (x = q*K_i^T) and the running state
// (m_{i-1}, l_{i-1}) it produces, as in lines 4-7 of iterative tiled attention:
//   m_i   = max(m_{i-1}, max(x_i))
//   e_i   = exp(x_i - m_i)
//   l_i   = l_{i-1}*exp(m_{i-1} - m_i) + sum(e_i)
//   alpha = l_{i-1}*exp(m_{i-1} - m_i) / l_i ,   p_i = e_i / l_i
// The datapath follows the paper's block diagram: a max stage, two subtract +
// exp paths (one per element, one for the old maximum), a multiply of l_{i-1}
// by the correction, an adder producing l_i and the divisions producing p_i
// and alpha. Own choice: the divisions share one reciprocal 1/l_i (one
// divider) followed by a multiplier per lane. Arithmetic is Q16.16 fixed point (helios_pkg) instead of the paper's
// FP16.
//
// Interface: in_valid with x[LANES], n_valid (number of valid scores; lanes
// at or above it are masked, for the partially filled last block), first
// (no previous state: m_{i-1} = -inf, l_{i-1} = 0), m_prev and l_prev.
// Timing: fully combinational datapath, registered outputs; results appear
// with out_valid one cycle after in_valid, one block per cycle.
// LANES defaults to the paper's KV block size of 64 tokens.
module online_softmax_unit
  import helios_pkg::*;
#(
  parameter int LANES = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic                       first,
  input  logic [$clog2(LANES+1)-1:0] n_valid,
  input  acc_t                       x      [LANES],
  input  acc_t                       m_prev,
  input  acc_t                       l_prev,
  output logic                       out_valid,
  output acc_t                       m,
  output acc_t                       l,
  output acc_t                       alpha,
  output acc_t                       p      [LANES]
);

  acc_t xmax, m_new, corr, l_scaled, l_new, sum_e;
  acc_t e [LANES];
  logic [48:0] rcp;   // 2^32 / l: one reciprocal shared by all lanes

  // v / l as (v * rcp) >> 32 for v >= 0
  function automatic acc_t mul_rcp(acc_t v, logic [48:0] r);
    logic [81:0] prod;
    prod = 82'(unsigned'(v)) * 82'(r);
    return acc_t'(prod >> 32);
  endfunction

  always_comb begin
    xmax = FX_NEGINF;
    for (int j = 0; j < LANES; j++)
      if (j < int'(n_valid) && x[j] > xmax) xmax = x[j];
    m_new = (first || xmax > m_prev) ? xmax : m_prev;
    sum_e = '0;
    for (int j = 0; j < LANES; j++) begin
      e[j]  = (j < int'(n_valid)) ? fx_exp(64'(x[j]) - 64'(m_new)) : '0;
      sum_e = sum_e + e[j];
    end
    corr     = first ? '0 : fx_exp(64'(m_prev) - 64'(m_new));
    l_scaled = first ? '0 : fx_mul(l_prev, corr);
    l_new    = l_scaled + sum_e;
    rcp      = (l_new > 0) ? 49'((64'd1 << 48) / 64'(unsigned'(l_new))) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      m         <= FX_NEGINF;
      l         <= '0;
      alpha     <= '0;
      for (int j = 0; j < LANES; j++) p[j] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        m     <= m_new;
        l     <= l_new;
        alpha <= mul_rcp(l_scaled, rcp);
        for (int j = 0; j < LANES; j++) p[j] <= mul_rcp(e[j], rcp);
      end
    end
  end

endmodule
