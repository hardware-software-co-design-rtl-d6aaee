// reduction_unit: partial-sum accumulation of a PE.
//
// out[k] = s1*v1[k] + s2*v2[k], with the factor pair (s1, s2) chosen by the
// factor select stage:
//   RED_SUM   (1, 1)            plain partial-sum accumulation of FC tiles
//   RED_SCALE (alpha, 1)        output accumulation O = alpha*O + O_i of
//                               iterative tiled attention
//   RED_ATTN  (e1/l, e2/l)      reduction version of tiled attention, factors
//                               from the factor generation unit (fgu)
// In RED_ATTN mode the merged statistics (m, l) are returned as well; in the
// other modes m_out/l_out repeat m1/l1. The RED_SCALE path is this design's
// reading of the paper's "vector scaling & accumulation unit"; the paper
// shows only the FGU path and the select stage.
// Timing: combinational datapath, registered outputs, one cycle latency,
// one vector per cycle. Q16.16 fixed point (helios_pkg).
module reduction_unit
  import helios_pkg::*;
#(
  parameter int LANES = 128
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  red_mode_e mode,
  input  acc_t      alpha,
  input  acc_t      m1,
  input  acc_t      l1,
  input  acc_t      m2,
  input  acc_t      l2,
  input  acc_t      v1 [LANES],
  input  acc_t      v2 [LANES],
  output logic      out_valid,
  output acc_t      m_out,
  output acc_t      l_out,
  output acc_t      out [LANES]
);

  acc_t fm, fl, f1, f2, s1, s2;

  fgu u_fgu (.m1(m1), .l1(l1), .m2(m2), .l2(l2), .m(fm), .l(fl), .f1(f1), .f2(f2));

  always_comb begin
    unique case (mode)
      RED_ATTN:  begin s1 = f1;    s2 = f2;     end
      RED_SCALE: begin s1 = alpha; s2 = FX_ONE; end
      default:   begin s1 = FX_ONE; s2 = FX_ONE; end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      m_out     <= FX_NEGINF;
      l_out     <= '0;
      for (int k = 0; k < LANES; k++) out[k] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        m_out <= (mode == RED_ATTN) ? fm : m1;
        l_out <= (mode == RED_ATTN) ? fl : l1;
        for (int k = 0; k < LANES; k++)
          out[k] <= fx_mul(s1, v1[k]) + fx_mul(s2, v2[k]);
      end
    end
  end

endmodule
