// Testbench for sram_buffer (small configuration): segment writes into
// random words, registered reads checked one cycle later against a model,
// read-during-write returning the old word, and read enable holding data.
module tb_sram_buffer;
  localparam int WORDS = 12, SEG_W = 16, NSEG = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, re;
  logic [3:0] waddr, raddr;
  logic [1:0] wseg;
  logic [SEG_W-1:0] wdata;
  logic [NSEG*SEG_W-1:0] rdata;
  logic [NSEG*SEG_W-1:0] model [WORDS];

  sram_buffer #(.WORDS(WORDS), .SEG_W(SEG_W), .NSEG(NSEG)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NSEG*SEG_W-1:0] expv, held;
    we = 0; re = 0; waddr = '0; raddr = '0; wseg = '0; wdata = '0;
    // initialise every word
    for (int a = 0; a < WORDS; a++)
      for (int s = 0; s < NSEG; s++) begin
        @(negedge clk);
        we = 1; waddr = 4'(a); wseg = 2'(s); wdata = 16'($urandom);
        model[a][s*SEG_W +: SEG_W] = wdata;
      end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1);
      waddr = 4'($urandom_range(0, WORDS - 1));
      wseg = 2'($urandom_range(0, NSEG - 1));
      wdata = 16'($urandom);
      re = ($urandom_range(0, 3) != 0);
      raddr = (t % 7 == 0) ? waddr : 4'($urandom_range(0, WORDS - 1));
      expv = model[raddr];             // value before this cycle's write
      held = rdata;
      if (we) model[waddr][wseg*SEG_W +: SEG_W] = wdata;
      @(negedge clk);
      checks++;
      if (re && rdata !== expv) begin
        failures++; $display("FAIL read addr %0d got %h exp %h", raddr, rdata, expv);
      end
      if (!re && rdata !== held) begin
        failures++; $display("FAIL read data changed without re");
      end
      we = 0; re = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
