// fgu: factor generation unit of the reduction unit.
//
// Merging two tiled-attention partial results (O1, m1, l1) and (O2, m2, l2)
// needs (Eq. 1-2 of the reduction version of tiled attention):
//   m = max(m1, m2), e1 = l1*exp(m1 - m), e2 = l2*exp(m2 - m), l = e1 + e2
// and the scaling factors e1/l and e2/l applied to O1 and O2. The datapath is
// the paper's: one max, two subtract/exp/multiply paths, an adder for l and
// two dividers. A partial with l = 0 (a PE that held no block) contributes a
// zero factor; if both are empty the factors and l are zero and m stays -inf.
// Purely combinational; Q16.16 fixed point (helios_pkg) in place of FP16.
module fgu
  import helios_pkg::*;
(
  input  acc_t m1,
  input  acc_t l1,
  input  acc_t m2,
  input  acc_t l2,
  output acc_t m,
  output acc_t l,
  output acc_t f1,
  output acc_t f2
);

  acc_t e1, e2;

  always_comb begin
    m  = (m1 > m2) ? m1 : m2;
    e1 = fx_mul(l1, fx_exp(64'(m1) - 64'(m)));
    e2 = fx_mul(l2, fx_exp(64'(m2) - 64'(m)));
    l  = e1 + e2;
    f1 = fx_div(e1, l);
    f2 = fx_div(e2, l);
  end

endmodule
