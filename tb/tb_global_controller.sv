// Testbench for global_controller (16 PEs): each host command must produce
// its one-cycle effect on the PE-side outputs; ATTN must wait until every PE
// has reported done (in any order, some more than once) before evt_done and
// must refuse new commands meanwhile; DRAIN must hold drain until all
// transfer buffers are empty; VEC must pulse vec_valid and evt_done.
module tb_global_controller;
  import helios_pkg::*;
  localparam int NPE = 16, MAX_BLK = 64, B = 64, AW = 32, TPW = 14;
  localparam int PW = $clog2(NPE), TW = $clog2(MAX_BLK + 1), NW = $clog2(B + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, cmd_coarse, evt_done, start, xfer_coarse, xfer_drain, vec_valid;
  logic [2:0] cmd_op;
  logic [PW-1:0] cmd_pe;
  logic [TW-1:0] cmd_idx, tbl_idx;
  logic [15:0] cmd_blk, tbl_blk;
  logic [NW-1:0] cmd_ntok, tbl_ntok;
  logic [AW-1:0] cmd_k_base, cmd_v_base, k_base, v_base;
  logic [TPW:0] cmd_threshold, xfer_threshold;
  vec_op_e cmd_vec_op, vec_op;
  logic [NPE-1:0] tbl_we, attn_done, xfer_empty;
  logic [TW-1:0] n_blocks [NPE];
  logic [31:0] attn_runs;

  global_controller #(.NPE(NPE), .MAX_BLK(MAX_BLK), .B(B), .AW(AW), .TPW(TPW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect1(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic cmd(logic [2:0] op);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = op;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  initial begin
    int ev;
    cmd_valid = 0; cmd_op = '0; cmd_pe = '0; cmd_idx = '0; cmd_blk = '0; cmd_ntok = '0;
    cmd_k_base = '0; cmd_v_base = '0; cmd_coarse = 0; cmd_threshold = '0; cmd_vec_op = V_ADD;
    attn_done = '0; xfer_empty = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // table writes to random PEs
    for (int t = 0; t < 20; t++) begin
      cmd_pe = PW'($urandom); cmd_idx = TW'($urandom_range(0, MAX_BLK - 1));
      cmd_blk = 16'($urandom); cmd_ntok = NW'($urandom_range(1, B));
      cmd(3'd0);
      expect1("table write strobe", tbl_we == (NPE'(1) << cmd_pe) && tbl_idx == cmd_idx &&
              tbl_blk == cmd_blk && tbl_ntok == cmd_ntok);
      @(negedge clk);
      expect1("table strobe one cycle", tbl_we == '0);
    end
    for (int p = 0; p < NPE; p++) begin
      cmd_pe = PW'(p); cmd_idx = TW'(p % 5); cmd(3'd1);
    end
    for (int p = 0; p < NPE; p++) expect1("n_blocks", n_blocks[p] == TW'(p % 5));
    cmd_k_base = 32'h100; cmd_v_base = 32'h9000; cmd(3'd2);
    expect1("bases", k_base == 32'h100 && v_base == 32'h9000);
    cmd_coarse = 1; cmd_threshold = 15'd1024; cmd(3'd3);
    expect1("xfer mode", xfer_coarse && xfer_threshold == 15'd1024);
    // attention: PEs report in random order
    cmd(3'd5);
    expect1("start pulse", start);
    ev = 0;
    begin
      int order [NPE];
      for (int p = 0; p < NPE; p++) order[p] = p;
      order.shuffle();
      for (int i = 0; i < NPE; i++) begin
        @(negedge clk);
        expect1("busy during attention", !cmd_ready && !evt_done);
        attn_done = NPE'(1) << order[i];
        if (i == 3) attn_done[order[0]] = 1'b1;   // a repeated report
      end
      @(negedge clk);
      attn_done = '0;
      expect1("evt_done after last PE", evt_done);
      expect1("attn_runs", attn_runs == 1);
      @(negedge clk);
      expect1("ready after attention", cmd_ready);
    end
    // drain: waits for all transfer buffers
    xfer_empty = 16'h00f0 ^ '1;
    cmd(3'd4);
    repeat (5) begin
      expect1("drain held", xfer_drain && !cmd_ready && !evt_done);
      @(negedge clk);
    end
    xfer_empty = '1;
    @(negedge clk);
    expect1("drain done", evt_done);
    @(negedge clk);
    expect1("drain released", !xfer_drain && cmd_ready);
    // vector command
    cmd_vec_op = V_SILU; cmd(3'd6);
    expect1("vector pulse", vec_valid && vec_op == V_SILU && evt_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
