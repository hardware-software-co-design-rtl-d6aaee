// Testbench for matrix_unit at the paper's size (512 FPUs x 16 MACs):
// accumulates several beats of random operands, with a clear in between,
// and compares every accumulator with an integer model; checks that a
// result appears one cycle after its beat.
module tb_matrix_unit;
  import helios_pkg::*;
  localparam int NUM_FPU = 512, MACS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, clear, out_valid;
  acc_t a [MACS];
  data_t w [NUM_FPU][MACS];
  acc_t acc [NUM_FPU];
  longint ref_acc [NUM_FPU];

  matrix_unit #(.NUM_FPU(NUM_FPU), .MACS(MACS)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; clear = 0;
    for (int k = 0; k < MACS; k++) a[k] = '0;
    for (int n = 0; n < NUM_FPU; n++) for (int k = 0; k < MACS; k++) w[n][k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int beat = 0; beat < 7; beat++) begin
      @(negedge clk);
      clear = (beat == 0 || beat == 4);
      in_valid = 1;
      for (int k = 0; k < MACS; k++) a[k] = acc_t'($signed($urandom_range(0, 32'h3_FFFF)) - 32'sh2_0000);
      for (int n = 0; n < NUM_FPU; n++)
        for (int k = 0; k < MACS; k++) w[n][k] = data_t'($urandom);
      for (int n = 0; n < NUM_FPU; n++) begin
        longint d;
        d = 0;
        for (int k = 0; k < MACS; k++) d += longint'(a[k]) * longint'(w[n][k]);
        ref_acc[n] = (clear ? 0 : ref_acc[n]) + (d >>> 8);
        ref_acc[n] = longint'(int'(ref_acc[n]));   // 32-bit wrap
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid latency"); end
      for (int n = 0; n < NUM_FPU; n++) begin
        checks++;
        if (longint'(acc[n]) != ref_acc[n]) begin
          failures++;
          if (failures < 10) $display("FAIL beat %0d fpu %0d got %0d exp %0d", beat, n, acc[n], ref_acc[n]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
