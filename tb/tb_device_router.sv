// Testbench for device_router: random KV rows with random target PE, block,
// slot and K/V selection are offered with random downstream back-pressure.
// Every flit must carry {row, address, y, x} with address = base + block*B +
// slot, flits must leave in order without loss or duplication, a row must
// appear one cycle after acceptance, and rows_sent must count deliveries.
module tb_device_router;
  localparam int MESH = 4, B = 64, AW = 32, ROW_W = 64, CRD = 2, RFW = 2 * CRD + AW + ROW_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [AW-1:0] k_base, v_base;
  logic kv_valid, kv_is_v, kv_ready, out_valid, out_ready;
  logic [CRD-1:0] kv_pe_x, kv_pe_y;
  logic [15:0] kv_block, kv_slot;
  logic [ROW_W-1:0] kv_row;
  logic [RFW-1:0] out_data;
  logic [31:0] rows_sent;

  device_router #(.MESH(MESH), .B(B), .AW(AW), .ROW_W(ROW_W)) dut (.*);

  logic [RFW-1:0] expq [$];
  int n_out;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0 || out_data !== expq[0]) begin
      failures++; $display("FAIL flit %h", out_data);
    end
    if (expq.size() > 0) void'(expq.pop_front());
    n_out++;
  end

  initial begin
    int n_in;
    bit acc;
    k_base = 32'h0001_0000; v_base = 32'h0800_0000;
    kv_valid = 0; kv_is_v = 0; kv_pe_x = '0; kv_pe_y = '0; kv_block = '0; kv_slot = '0;
    kv_row = '0; out_ready = 1; n_in = 0; n_out = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency: accepted row visible at the output one cycle later
    @(negedge clk);
    kv_valid = 1; kv_is_v = 1; kv_pe_x = 2'd3; kv_pe_y = 2'd1; kv_block = 16'd7; kv_slot = 16'd5;
    kv_row = 64'h1234_5678_9abc_def0;
    expq.push_back({kv_row, v_base + 32'd7 * 32'd64 + 32'd5, 2'd1, 2'd3});
    @(negedge clk);
    kv_valid = 0; n_in++;
    checks++;
    if (!out_valid) begin failures++; $display("FAIL latency"); end
    // random traffic
    while (n_in < 500) begin
      kv_valid = ($urandom_range(0, 3) != 0);
      kv_is_v = 1'($urandom); kv_pe_x = 2'($urandom); kv_pe_y = 2'($urandom);
      kv_block = 16'($urandom_range(0, 1000)); kv_slot = 16'($urandom_range(0, B - 1));
      kv_row = {$urandom, $urandom};
      out_ready = ($urandom_range(0, 2) != 0);
      #1;   // let kv_ready follow out_ready
      acc = kv_valid && kv_ready;
      if (acc) begin
        expq.push_back({kv_row, (kv_is_v ? v_base : k_base) + 32'(kv_block) * 32'd64 + 32'(kv_slot),
                        kv_pe_y, kv_pe_x});
        n_in++;
      end
      @(negedge clk);
    end
    kv_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (n_out != n_in || rows_sent != 32'(n_in)) begin
      failures++; $display("FAIL delivered %0d counted %0d sent %0d", n_out, rows_sent, n_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
