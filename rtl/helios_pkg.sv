// helios_pkg: number formats and arithmetic shared by the PE datapath.
//
// Stored tensors (query, key and value rows) use a 16-bit signed fixed-point
// word, Q8.8 (data_t). Everything computed on-chip (scores, softmax state,
// partial outputs) uses a 32-bit signed Q16.16 word (acc_t). The paper
// computes in FP16; this package replaces floating point with fixed point so
// that every unit stays small and exact enough to be checked against a
// real-number model.
//
// fx_exp() evaluates e^x for x <= 0 as 2^(x*log2 e): the integer part of the
// exponent becomes a right shift and the fraction is looked up in a 16-entry
// table of 2^(-k/16) with linear interpolation (relative error below 1e-4).
// fx_div() is a plain fixed-point quotient. Units call these functions
// combinationally; the registers around them belong to the units.
package helios_pkg;

  typedef logic signed [15:0] data_t;  // Q8.8 stored element
  typedef logic signed [31:0] acc_t;   // Q16.16 working value

  localparam int   FRAC     = 16;
  localparam acc_t FX_ONE   = 32'sh0001_0000;
  localparam acc_t FX_NEGINF = 32'sh8000_0000;  // stands for -infinity (empty partial)
  localparam logic [31:0] LOG2E_Q16 = 32'd94548;  // log2(e) in Q16.16

  // Reduction-unit factor selection.
  typedef enum logic [1:0] {
    RED_SUM   = 2'd0,   // out = v1 + v2              (FC partial sums)
    RED_SCALE = 2'd1,   // out = alpha*v1 + v2        (Algorithm 1, line 10)
    RED_ATTN  = 2'd2    // out = e1/l*v1 + e2/l*v2    (Eq. 1-2, FGU factors)
  } red_mode_e;

  // Vector-unit operations.
  typedef enum logic [2:0] {
    V_ADD   = 3'd0,  // a + b            (residual)
    V_MUL   = 3'd1,  // a * b            (GLU gate)
    V_RELU  = 3'd2,  // max(a, 0)
    V_SILU  = 3'd3,  // a * sigmoid(a)
    V_SCALE = 3'd4,  // (a - s0) * s1    (normalisation)
    V_STAT  = 3'd5,  // sums of a and a^2 over the valid lanes
    V_MERGE = 3'd6   // pairwise mean/variance merge of two sub-vectors
  } vec_op_e;

  // Q16.16 product with truncation toward -inf.
  function automatic acc_t fx_mul(acc_t a, acc_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return acc_t'(p >>> FRAC);
  endfunction

  // Q16.16 quotient a/b; returns 0 when b is 0.
  function automatic acc_t fx_div(acc_t a, acc_t b);
    logic signed [63:0] n;
    if (b == 0) return '0;
    n = 64'(a) <<< FRAC;
    return acc_t'(n / 64'(b));
  endfunction

  // 2^(-k/16) in Q16.16, k = 0..16.
  function automatic logic [16:0] exp2_tab(logic [4:0] k);
    case (k)
      5'd0:  return 17'd65536;  5'd1:  return 17'd62757;  5'd2:  return 17'd60097;
      5'd3:  return 17'd57549;  5'd4:  return 17'd55109;  5'd5:  return 17'd52773;
      5'd6:  return 17'd50535;  5'd7:  return 17'd48393;  5'd8:  return 17'd46341;
      5'd9:  return 17'd44376;  5'd10: return 17'd42495;  5'd11: return 17'd40693;
      5'd12: return 17'd38968;  5'd13: return 17'd37316;  5'd14: return 17'd35734;
      5'd15: return 17'd34219;  default: return 17'd32768;
    endcase
  endfunction

  // e^x for x <= 0 given in Q16.16 (64-bit so that x - m never overflows).
  // Positive arguments are clamped to 0 (result 1.0).
  function automatic acc_t fx_exp(logic signed [63:0] x);
    logic [63:0] ny;      // -x * log2(e), Q16.16, non-negative
    logic [47:0] n;
    logic [15:0] f;
    logic [4:0]  k;
    logic [11:0] r;
    logic [16:0] t0, t1;
    logic [31:0] v;
    if (x >= 0) return FX_ONE;
    if (x < -64'sd2147483648) return '0;
    ny = (64'(-x) * 64'(LOG2E_Q16)) >> FRAC;
    n  = ny[63:16];
    f  = ny[15:0];
    if (n >= 48'd17) return '0;
    k  = {1'b0, f[15:12]};
    r  = f[11:0];
    t0 = exp2_tab(k);
    t1 = exp2_tab(k + 5'd1);
    // linear interpolation between 2^(-k/16) and 2^(-(k+1)/16)
    v  = 32'(t0) - ((32'(t0 - t1) * 32'(r)) >> 12);
    return acc_t'(v >> n[4:0]);
  endfunction

endpackage
