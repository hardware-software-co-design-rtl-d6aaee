// matrix_unit: the PE's MAC array for GEMMs.
//
// NUM_FPU floating-point units (here fixed-point), each a MACS-wide dot
// product followed by an accumulator: on every beat FPU n adds
//   sum_k a[k] * w[n][k]
// to its accumulator (or loads it, when clear is set). The operand a is
// broadcast to all FPUs, so one beat advances a vector-matrix product by MACS
// along the reduction dimension for NUM_FPU output columns. The PE controller
// uses it for both attention GEMMs (q*K^T and p*V). a is Q16.16, w is the
// stored Q8.8 element; accumulators are Q16.16.
// Defaults follow the paper: 512 FPUs of 16 MACs each. The multiplier /
// adder-tree / accumulator arrangement inside an FPU is this design's choice.
// Timing: acc is registered; a beat's result is visible the cycle after it,
// with out_valid. Beats may be issued back to back.
module matrix_unit
  import helios_pkg::*;
#(
  parameter int NUM_FPU = 512,
  parameter int MACS    = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  clear,
  input  acc_t  a   [MACS],
  input  data_t w   [NUM_FPU][MACS],
  output logic  out_valid,
  output acc_t  acc [NUM_FPU]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int n = 0; n < NUM_FPU; n++) acc[n] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int n = 0; n < NUM_FPU; n++) begin
          logic signed [63:0] dot;
          dot = '0;
          for (int k = 0; k < MACS; k++) dot += 64'(a[k]) * 64'(w[n][k]);
          acc[n] <= (clear ? '0 : acc[n]) + acc_t'(dot >>> 8);
        end
      end
    end
  end

endmodule
