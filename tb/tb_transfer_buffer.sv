// Testbench for transfer_buffer (small depth): fine mode must write only
// while the memory reports idle and in arrival order; coarse mode must hold
// rows until the threshold is reached and then write the whole buffer back
// to back; drain must flush a coarse buffer below threshold; a full buffer
// must refuse input. A model of the memory side checks every written row
// and address.
module tb_transfer_buffer;
  localparam int DEPTH = 16, ROW_W = 32, AW = 16, PW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic coarse, drain, in_valid, in_ready, mem_idle, mem_req, mem_gnt, flushing, empty;
  logic [PW:0] threshold, count;
  logic [AW-1:0] in_addr, mem_addr;
  logic [ROW_W-1:0] in_row, mem_row;

  transfer_buffer #(.DEPTH(DEPTH), .ROW_W(ROW_W), .AW(AW)) dut (.*);

  logic [AW+ROW_W-1:0] expq [$];
  int n_in, n_out, fine_writes, coarse_writes, burst_len, max_burst, gaps_in_flush;
  bit was_flushing;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory side monitor
  always @(posedge clk) if (rst_n) begin
    if (mem_req && mem_gnt) begin
      logic [AW+ROW_W-1:0] e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL write with nothing queued"); end
      else begin
        e = expq.pop_front();
        if ({mem_addr, mem_row} !== e) begin
          failures++; $display("FAIL write %h/%h expected %h", mem_addr, mem_row, e);
        end
      end
      if (!coarse) begin
        checks++;
        if (!mem_idle) begin failures++; $display("FAIL fine-mode write while memory busy"); end
        fine_writes++;
      end else begin
        checks++;
        if (!flushing) begin failures++; $display("FAIL coarse-mode write outside a flush"); end
        coarse_writes++;
      end
      n_out++;
    end
    if (coarse && flushing && !mem_req && !empty) gaps_in_flush++;
  end

  task automatic push_row(input bit random_wait);
    @(negedge clk);
    in_valid = 1; in_addr = AW'($urandom); in_row = ROW_W'($urandom);
    while (!in_ready) @(negedge clk);
    expq.push_back({in_addr, in_row});
    n_in++;
    @(negedge clk);
    in_valid = 0;
    if (random_wait) repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  initial begin
    coarse = 0; drain = 0; in_valid = 0; mem_idle = 0; mem_gnt = 1;
    threshold = (PW+1)'(12); in_addr = '0; in_row = '0;
    n_in = 0; n_out = 0; fine_writes = 0; coarse_writes = 0; gaps_in_flush = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fine mode, memory busy with random idle slots
    fork
      for (int i = 0; i < 60; i++) push_row(1);
      repeat (400) begin @(negedge clk); mem_idle = ($urandom_range(0, 2) == 0); end
    join
    mem_idle = 1;
    repeat (30) @(negedge clk);
    checks++;
    if (!empty || n_out != n_in) begin failures++; $display("FAIL fine mode left rows %0d/%0d", n_out, n_in); end
    // coarse mode: nothing leaves below threshold even when idle
    coarse = 1; mem_idle = 1;
    for (int i = 0; i < 11; i++) push_row(0);
    repeat (10) @(negedge clk);
    checks++;
    if (count != 11 || flushing) begin failures++; $display("FAIL coarse wrote below threshold (count %0d)", count); end
    // the 12th row starts a burst that empties the buffer without gaps
    push_row(0);
    repeat (3) @(negedge clk);
    checks++;
    if (!flushing && !empty) begin failures++; $display("FAIL no flush at threshold"); end
    repeat (20) @(negedge clk);
    checks++;
    if (!empty || gaps_in_flush != 0) begin failures++; $display("FAIL flush incomplete or with gaps (%0d)", gaps_in_flush); end
    // drain below threshold
    for (int i = 0; i < 5; i++) push_row(0);
    repeat (5) @(negedge clk);
    checks++;
    if (count != 5) begin failures++; $display("FAIL rows left early"); end
    @(negedge clk); drain = 1; @(negedge clk); drain = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (!empty) begin failures++; $display("FAIL drain did not empty the buffer"); end
    // full buffer back-pressure: threshold above depth, memory never idle
    threshold = (PW+1)'(DEPTH);
    mem_gnt = 0;
    for (int i = 0; i < DEPTH; i++) push_row(0);
    @(negedge clk);
    checks++;
    if (in_ready) begin failures++; $display("FAIL in_ready while full"); end
    mem_gnt = 1;
    repeat (DEPTH + 5) @(negedge clk);
    // coarse with grant stalls, flushing holds
    mem_gnt = 1;
    threshold = (PW+1)'(4);
    fork
      for (int i = 0; i < 40; i++) push_row(1);
    join
    repeat (10) @(negedge clk);
    @(negedge clk); drain = 1; @(negedge clk); drain = 0;
    repeat (30) @(negedge clk);
    checks++;
    if (!empty || n_out != n_in) begin failures++; $display("FAIL end state %0d/%0d", n_out, n_in); end
    checks++;
    if (fine_writes == 0 || coarse_writes == 0) begin failures++; $display("FAIL a mode never wrote"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
