// Testbench for noc_router: a router in the middle of a 4x4 mesh receives
// random flits on all five inputs with random destinations and random
// output back-pressure. Every flit must leave exactly once, on the port that
// X-then-Y routing selects, and flits from one input to one output keep
// their order. Also checks that a single flit passes in one cycle when the
// output is free.
module tb_noc_router;
  localparam int MESH = 4, X = 1, Y = 2, DW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          in_valid  [5];
  logic [DW-1:0] in_data   [5];
  logic          in_ready  [5];
  logic          out_valid [5];
  logic [DW-1:0] out_data  [5];
  logic          out_ready [5];

  logic [1:0] pos_x, pos_y;
  assign pos_x = 2'(X);
  assign pos_y = 2'(Y);

  noc_router #(.MESH(MESH), .DW(DW)) dut (.*);

  // flit: [31:24] source input, [23:8] sequence, [3:2] y, [1:0] x
  int sent [5];
  int got_total;
  int last_seq [5][5];
  bit seen [5][4096];

  function automatic int exp_port(logic [DW-1:0] f);
    int dx, dy;
    dx = int'(f[1:0]); dy = int'(f[3:2]);
    if (dx < X) return 1;
    if (dx > X) return 2;
    if (dy < Y) return 3;
    if (dy > Y) return 4;
    return 0;
  endfunction

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++)
      if (out_valid[o] && out_ready[o]) begin
        int src, seq;
        src = int'(out_data[o][31:24]); seq = int'(out_data[o][23:8]);
        checks++;
        if (exp_port(out_data[o]) != o) begin
          failures++; $display("FAIL flit %h left on port %0d", out_data[o], o);
        end
        if (src > 4 || seen[src][seq]) begin
          failures++; $display("FAIL duplicate or bogus flit %h", out_data[o]);
        end else seen[src][seq] = 1;
        if (seq <= last_seq[src][o]) begin
          failures++; $display("FAIL order src %0d out %0d", src, o);
        end
        last_seq[src][o] = seq;
        got_total++;
      end
  end

  initial begin
    int n_per = 300;
    for (int i = 0; i < 5; i++) begin
      in_valid[i] = 0; in_data[i] = '0; out_ready[i] = 1; sent[i] = 0;
      for (int o = 0; o < 5; o++) last_seq[i][o] = -1;
    end
    got_total = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // single-flit latency: local input to east output
    @(negedge clk);
    in_valid[0] = 1; in_data[0] = {8'd0, 16'd0, 4'd0, 2'd3, 2'(X)};
    @(negedge clk);
    in_valid[0] = 0;
    checks++;
    if (!(out_valid[4] && out_data[4][23:8] == 16'd0)) begin
      failures++; $display("FAIL single flit not on east output after one cycle");
    end
    sent[0] = 1;
    @(negedge clk);
    // random traffic
    while (sent[0] < n_per || sent[1] < n_per || sent[2] < n_per || sent[3] < n_per || sent[4] < n_per) begin
      bit acc [5];
      for (int i = 0; i < 5; i++) acc[i] = in_valid[i] && in_ready[i];
      @(negedge clk);
      for (int i = 0; i < 5; i++) begin
        if (acc[i]) begin in_valid[i] = 0; sent[i]++; end
      end
      // drive after the edge the handshakes above refer to
      for (int i = 0; i < 5; i++) begin
        if (!in_valid[i] && sent[i] < n_per && $urandom_range(0, 2) != 0) begin
          in_valid[i] = 1;
          in_data[i] = {8'(i), 16'(sent[i]), 4'd0, 2'($urandom_range(0, 3)), 2'($urandom_range(0, 3))};
        end
        out_ready[i] = ($urandom_range(0, 3) != 0);
      end
    end
    for (int i = 0; i < 5; i++) out_ready[i] = 1;
    repeat (20) @(negedge clk);
    checks++;
    if (got_total != 5 * n_per) begin
      failures++; $display("FAIL delivered %0d of %0d", got_total, 5 * n_per);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
