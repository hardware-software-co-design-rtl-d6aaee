// Testbench for pe: one PE (1x1 mesh, so the collective step is local; H =
// 32, B = 16) with a behavioural DRAM (random grant, fixed read latency).
//  1. K/V rows of three blocks arrive as router-NoC flits while an
//     attention run over preloaded blocks is in progress, with the transfer
//     buffer in fine-grained mode: every write must fall in a cycle the
//     attention loader leaves free.
//  2. More rows arrive in coarse-grained mode: no write before the threshold,
//     then a flush; a drain empties the remainder.
//  3. An attention run over the blocks written through the NoC (the last one
//     partially filled) is compared with attention computed in real
//     numbers from the testbench's own copy of the rows.
//  4. Vector commands on the result: residual add and sum/sum of squares.
// Fails if stall, overlap, fine write, coarse flush or drain never occurred.
module tb_pe;
  import helios_pkg::*;
  localparam int MESH = 1, H = 32, B = 16, MACS = 16, NUM_FPU = 32, MAX_BLK = 8;
  localparam int AW = 16, CB_WORDS = 4, TB_DEPTH = 32, LAT = 4, MEMW = 512;
  localparam int ROW_W = H * 16, TW = $clog2(MAX_BLK + 1), NW = $clog2(B + 1);
  localparam int CRD = 1, CW = H, VL = H, QFW = 4 * CRD + 1 + 64 + 32 * CW;
  localparam int RFW = 2 * CRD + AW + ROW_W, TPW = $clog2(TB_DEPTH);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tbl_we, start, xfer_coarse, xfer_drain, xfer_empty, xfer_flushing;
  logic [TW-1:0] tbl_idx, n_blocks;
  logic [15:0] tbl_blk;
  logic [NW-1:0] tbl_ntok;
  logic [AW-1:0] k_base, v_base;
  data_t q [H];
  logic [TPW:0] xfer_threshold;
  logic vec_valid, vec_out_valid, busy, attn_done;
  vec_op_e vec_op;
  acc_t vec_b [VL];
  acc_t vec_out [VL];
  acc_t a_x [VL];
  acc_t vec_s0, vec_s1, vec_sum, vec_sumsq;
  logic [31:0] stall_cycles, overlap_cycles;
  logic mem_req, mem_we, mem_gnt, mem_rsp_valid;
  logic [AW-1:0] mem_addr;
  logic [ROW_W-1:0] mem_wdata, mem_rsp_data;
  logic q_in_valid [4], q_in_ready [4], q_out_valid [4], q_out_ready [4];
  logic [QFW-1:0] q_in_data [4], q_out_data [4];
  logic r_in_valid [4], r_in_ready [4], r_out_valid [4], r_out_ready [4];
  logic [RFW-1:0] r_in_data [4], r_out_data [4];

  logic pos_x, pos_y;
  assign pos_x = 1'b0;
  assign pos_y = 1'b0;

  pe #(.MESH(MESH), .H(H), .B(B), .MACS(MACS), .NUM_FPU(NUM_FPU),
       .MAX_BLK(MAX_BLK), .AW(AW), .CB_WORDS(CB_WORDS), .TB_DEPTH(TB_DEPTH)) dut (.*);

  // behavioural DRAM
  logic [ROW_W-1:0] mem [MEMW];
  logic [ROW_W-1:0] shadow [MEMW];   // testbench's copy of what should be stored
  logic          pv [LAT];
  logic [AW-1:0] pa [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pa[i] <= '0; end
      mem_gnt <= 1'b0;
    end else begin
      pv[0] <= mem_req && mem_gnt && !mem_we; pa[0] <= mem_addr;
      for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pa[i] <= pa[i-1]; end
      if (mem_req && mem_gnt && mem_we) mem[mem_addr % MEMW] <= mem_wdata;
      mem_gnt <= ($urandom_range(0, 3) != 0);
    end
  end
  assign mem_rsp_valid = pv[LAT-1];
  assign mem_rsp_data  = mem[pa[LAT-1] % MEMW];

  // mechanism counters
  int n_fine, n_coarse, n_bad_fine, n_drain;
  always @(posedge clk) if (rst_n && mem_req && mem_gnt && mem_we) begin
    if (xfer_flushing) n_coarse++;
    else begin
      n_fine++;
      if (dut.ld_req) n_bad_fine++;
    end
  end

  function automatic real r(acc_t v); return $itor(v) / 65536.0; endfunction
  function automatic real rd(data_t v); return $itor(v) / 256.0; endfunction
  function automatic logic [ROW_W-1:0] rnd_row(int lo, int hi);
    logic [ROW_W-1:0] v;
    for (int e = 0; e < H; e++) v[e*16 +: 16] = 16'($signed($urandom_range(0, hi - lo - 1)) + lo);
    return v;
  endfunction

  task automatic check(string what, real got, real exp, real tol);
    checks++;
    if ((got - exp > tol) || (exp - got > tol)) begin
      failures++;
      $display("FAIL %s got %f expected %f", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // send one row over the router NoC into this PE's local memory
  task automatic send_row(int addr, logic [ROW_W-1:0] row);
    bit acc;
    @(negedge clk);
    r_in_valid[0] = 1;
    r_in_data[0] = {row, AW'(addr), 1'b0, 1'b0};
    acc = r_in_ready[0];
    while (!acc) begin @(negedge clk); acc = r_in_ready[0]; end
    shadow[addr] = row;
    @(negedge clk);
    r_in_valid[0] = 0;
  endtask

  task automatic send_block(int id, int ntok);
    for (int j = 0; j < ntok; j++) send_row(int'(k_base) + id * B + j, rnd_row(-160, 160));
    for (int j = 0; j < ntok; j++) send_row(int'(v_base) + id * B + j, rnd_row(-1024, 1024));
  endtask

  task automatic load_table(int nb, int ids [], int nt []);
    for (int i = 0; i < nb; i++) begin
      @(negedge clk);
      tbl_we = 1; tbl_idx = TW'(i); tbl_blk = 16'(ids[i]); tbl_ntok = NW'(nt[i]);
    end
    @(negedge clk);
    tbl_we = 0;
    n_blocks = TW'(nb);
  endtask

  task automatic attention_ref(int nb, int ids [], int nt [], output real o [H]);
    real s [MAX_BLK * B], mx, l;
    int cnt;
    cnt = 0; mx = -1.0e30;
    for (int i = 0; i < nb; i++)
      for (int j = 0; j < nt[i]; j++) begin
        real d;
        d = 0;
        for (int e = 0; e < H; e++)
          d += rd(q[e]) * rd(data_t'(shadow[int'(k_base) + ids[i] * B + j][e*16 +: 16]));
        s[cnt++] = d;
        if (d > mx) mx = d;
      end
    l = 0;
    for (int e = 0; e < H; e++) o[e] = 0;
    cnt = 0;
    for (int i = 0; i < nb; i++)
      for (int j = 0; j < nt[i]; j++) begin
        real p;
        p = $exp(s[cnt++] - mx);
        l += p;
        for (int e = 0; e < H; e++)
          o[e] += p * rd(data_t'(shadow[int'(v_base) + ids[i] * B + j][e*16 +: 16]));
      end
    for (int e = 0; e < H; e++) o[e] /= l;
  endtask

  initial begin
    int ids_a [] = '{1, 3};
    int nt_a [] = '{B, B};
    int ids_b [] = '{6, 0, 4};
    int nt_b [] = '{B, B, 11};
    real o [H];
    int t_stall;
    tbl_we = 0; tbl_idx = '0; tbl_blk = '0; tbl_ntok = '0; n_blocks = '0; start = 0;
    k_base = AW'(0); v_base = AW'(160);
    xfer_coarse = 0; xfer_threshold = (TPW+1)'(12); xfer_drain = 0;
    vec_valid = 0; vec_op = V_ADD; vec_s0 = '0; vec_s1 = '0;
    n_fine = 0; n_coarse = 0; n_bad_fine = 0; n_drain = 0;
    for (int e = 0; e < VL; e++) vec_b[e] = '0;
    for (int e = 0; e < H; e++) q[e] = data_t'($signed($urandom_range(0, 511)) - 256);
    for (int d = 0; d < 4; d++) begin
      q_in_valid[d] = 0; q_in_data[d] = '0; q_out_ready[d] = 1;
      r_in_valid[d] = 0; r_in_data[d] = '0; r_out_ready[d] = 1;
    end
    for (int a = 0; a < MEMW; a++) begin mem[a] = '0; shadow[a] = '0; end
    // preloaded blocks 1 and 3
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < B; j++) begin
        mem[int'(k_base) + ids_a[i] * B + j] = rnd_row(-160, 160);
        mem[int'(v_base) + ids_a[i] * B + j] = rnd_row(-1024, 1024);
        shadow[int'(k_base) + ids_a[i] * B + j] = mem[int'(k_base) + ids_a[i] * B + j];
        shadow[int'(v_base) + ids_a[i] * B + j] = mem[int'(v_base) + ids_a[i] * B + j];
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. attention over preloaded blocks with fine-mode writes beside it
    load_table(2, ids_a, nt_a);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      send_block(6, B);
      begin
        while (!attn_done) @(negedge clk);
        attention_ref(2, ids_a, nt_a, o);
        for (int e = 0; e < H; e++) check($sformatf("run1 a_x[%0d]", e), r(a_x[e]), o[e], 0.02);
      end
    join
    for (int w = 0; w < 200 && !xfer_empty; w++) @(negedge clk);
    checks++;
    if (!xfer_empty || n_fine == 0) begin failures++; $display("FAIL fine mode did not write"); end
    checks++;
    if (n_bad_fine != 0) begin failures++; $display("FAIL %0d fine writes collided with loads", n_bad_fine); end
    // 2. coarse mode
    @(negedge clk); xfer_coarse = 1;
    for (int j = 0; j < 11; j++) send_row(int'(k_base) + 0 * B + j, rnd_row(-160, 160));
    repeat (5) @(negedge clk);
    checks++;
    if (n_coarse != 0 || xfer_empty) begin failures++; $display("FAIL coarse mode wrote below threshold"); end
    for (int j = 11; j < B; j++) send_row(int'(k_base) + 0 * B + j, rnd_row(-160, 160));
    for (int j = 0; j < B; j++) send_row(int'(v_base) + 0 * B + j, rnd_row(-1024, 1024));
    send_block(4, 11);
    repeat (5) @(negedge clk);
    checks++;
    if (n_coarse == 0) begin failures++; $display("FAIL no coarse flush"); end
    for (int w = 0; w < 200 && !xfer_empty; w++) @(negedge clk);
    // a tail below the threshold stays until a drain
    for (int j = 0; j < 5; j++) send_row(int'(v_base) + 4 * B + j, rnd_row(-1024, 1024));
    repeat (10) @(negedge clk);
    checks++;
    if (xfer_empty) begin failures++; $display("FAIL tail below threshold was written"); end
    n_drain++;
    @(negedge clk); xfer_drain = 1; @(negedge clk); xfer_drain = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (!xfer_empty || n_drain == 0) begin failures++; $display("FAIL drain (empty %0d, drains %0d)", xfer_empty, n_drain); end
    for (int a = 0; a < MEMW; a++) begin
      checks++;
      if (mem[a] !== shadow[a]) begin failures++; $display("FAIL memory row %0d", a); end
    end
    // 3. attention over the NoC-written blocks
    xfer_coarse = 0;
    load_table(3, ids_b, nt_b);
    t_stall = stall_cycles;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!attn_done) @(negedge clk);
    attention_ref(3, ids_b, nt_b, o);
    for (int e = 0; e < H; e++) check($sformatf("run2 a_x[%0d]", e), r(a_x[e]), o[e], 0.02);
    checks++;
    if (int'(stall_cycles) == t_stall || overlap_cycles == 0) begin failures++; $display("FAIL no stall/overlap"); end
    // 4. vector unit on the result
    @(negedge clk);
    vec_valid = 1; vec_op = V_ADD;
    for (int e = 0; e < VL; e++) vec_b[e] = acc_t'($signed($urandom_range(0, 131071)) - 65536);
    @(negedge clk);
    vec_valid = 0;
    checks++;
    if (!vec_out_valid) begin failures++; $display("FAIL vector latency"); end
    for (int e = 0; e < VL; e++) check("residual", r(vec_out[e]), r(a_x[e]) + r(vec_b[e]), 0.0001);
    @(negedge clk);
    vec_valid = 1; vec_op = V_STAT;
    @(negedge clk);
    vec_valid = 0;
    begin
      real sm;
      sm = 0;
      for (int e = 0; e < VL; e++) sm += r(a_x[e]);
      check("sum", r(vec_sum), sm, 0.001);
    end
    $display("fine=%0d coarse=%0d stall=%0d overlap=%0d", n_fine, n_coarse, stall_cycles, overlap_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
