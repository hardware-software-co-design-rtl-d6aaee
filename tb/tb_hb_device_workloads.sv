// Workload testbench for hb_device at its default parameters (4x4 PEs,
// H = 128, B = 64, 512 FPUs x 16 MACs, 2.5 MB buffers per PE): one KV head
// of one request at each of the two context lengths of the evaluation,
// 4096 tokens (OPT 66B and DeepSeek 236B) and 16384 tokens (LLaMA3 70B,
// Mixtral 8x22B, Qwen3 30B-A3B). All these models have a head dimension of
// 128, so they differ here only in the context length; batch size and layer
// count repeat the same per-head work.
//
// Host, DRAM and allocator models are those of tb_hb_device_full: full
// blocks go to the PE with the fewest tokens (ties towards PEs far from
// the centre). The 4K request (64 blocks, 4 per PE) is written in
// coarse-grained mode and drained; attention over it runs while the 16K
// request's 32768 rows (256 blocks, 16 per PE) arrive in fine-grained mode;
// then attention over the 16K request. Each a_x is compared with attention
// worked out in real numbers from the rows sent. The test also checks that
// compute stalls, load/compute overlap, fine writes and coarse flushes
// happened.
module tb_hb_device_workloads;
  import helios_pkg::*;
  localparam int MESH = 4, H = 128, B = 64, MACS = 16, NUM_FPU = 512, MAX_BLK = 64;
  localparam int AW = 32, CB_WORDS = 160, TB_DEPTH = 10240;
  localparam int NPE = MESH * MESH, PW = $clog2(NPE), ROW_W = H * 16;
  localparam int TW = $clog2(MAX_BLK + 1), NW = $clog2(B + 1), CRD = $clog2(MESH);
  localparam int CW = H / NPE, VL = MESH * CW, TPW = $clog2(TB_DEPTH), LAT = 4;
  localparam int V_BASE = 65536;
  localparam int WATCHDOG = 400000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, cmd_coarse, evt_done, kv_valid, kv_is_v, kv_ready;
  logic [2:0] cmd_op;
  logic [PW-1:0] cmd_pe;
  logic [TW-1:0] cmd_idx;
  logic [15:0] cmd_blk, kv_block, kv_slot;
  logic [NW-1:0] cmd_ntok;
  logic [AW-1:0] cmd_k_base, cmd_v_base;
  logic [TPW:0] cmd_threshold;
  vec_op_e cmd_vec_op;
  acc_t vec_b [VL];
  acc_t vec_s0, vec_s1;
  data_t q [H];
  logic [CRD-1:0] kv_pe_x, kv_pe_y;
  logic [ROW_W-1:0] kv_row;
  acc_t a_x [NPE][VL];
  acc_t vec_out [NPE][VL];
  acc_t vec_sum [NPE];
  acc_t vec_sumsq [NPE];
  logic [31:0] stall_cycles [NPE];
  logic [31:0] overlap_cycles [NPE];
  logic [NPE-1:0] xfer_flushing;
  logic [31:0] attn_runs, kv_rows_in;
  logic mem_req [NPE], mem_we [NPE], mem_gnt [NPE], mem_rsp_valid [NPE];
  logic [AW-1:0] mem_addr [NPE];
  logic [ROW_W-1:0] mem_wdata [NPE], mem_rsp_data [NPE];

  hb_device dut (.*);

  // ------------------------------------------------ behavioural DRAM per PE
  int n_fine, n_coarse;
  for (genvar p = 0; p < NPE; p++) begin : g_dram
    logic [ROW_W-1:0] mem [int];
    logic          pv [LAT];
    logic [AW-1:0] pa [LAT];
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pa[i] <= '0; end
        mem_gnt[p] <= 1'b0;
      end else begin
        pv[0] <= mem_req[p] && mem_gnt[p] && !mem_we[p];
        pa[0] <= mem_addr[p];
        for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pa[i] <= pa[i-1]; end
        if (mem_req[p] && mem_gnt[p] && mem_we[p]) begin
          mem[int'(mem_addr[p])] = mem_wdata[p];
          if (xfer_flushing[p]) n_coarse++; else n_fine++;
        end
        mem_gnt[p] <= ($urandom_range(0, 3) != 0);
      end
    end
    assign mem_rsp_valid[p] = pv[LAT-1];
    assign mem_rsp_data[p]  = mem.exists(int'(pa[LAT-1])) ? mem[int'(pa[LAT-1])] : '0;
  end

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
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
      if (failures < 20) $display("FAIL %s got %f expected %f", what, got, exp);
    end
  endtask

  // ------------------------------------------------------- allocator model
  int t_sum [NPE];      // tokens stored per PE
  int n_last [NPE];     // partially filled blocks per PE
  int next_id [NPE];    // next free block slot per PE
  // per request: block list per PE
  typedef struct { int pe; int id; int ntok; } blk_t;

  function automatic int d_l1(int p);
    int x, y, dx, dy;
    x = p / MESH; y = p % MESH;
    dx = (x < MESH / 2 - 1) ? (MESH / 2 - 1 - x) : (x > MESH / 2) ? (x - MESH / 2) : 0;
    dy = (y < MESH / 2 - 1) ? (MESH / 2 - 1 - y) : (y > MESH / 2) ? (y - MESH / 2) : 0;
    return dx + dy;
  endfunction

  function automatic bit cmp_full(int a, int b);   // a ranks before b
    if (t_sum[a] != t_sum[b]) return t_sum[a] < t_sum[b];
    return d_l1(a) > d_l1(b);
  endfunction

  function automatic bit cmp_last(int a, int b);
    if (t_sum[a] != t_sum[b]) return t_sum[a] < t_sum[b];
    if (d_l1(a) != d_l1(b)) return d_l1(a) < d_l1(b);
    return n_last[a] < n_last[b];
  endfunction

  task automatic allocate(int tokens, output blk_t blks [$]);
    int n_full, t_last, best;
    n_full = tokens / B; t_last = tokens % B;
    blks = {};
    for (int i = 0; i < n_full + (t_last > 0 ? 1 : 0); i++) begin
      bit last;
      last = (i == n_full);
      best = 0;
      for (int p = 1; p < NPE; p++)
        if (last ? cmp_last(p, best) : cmp_full(p, best)) best = p;
      blks.push_back('{pe: best, id: next_id[best], ntok: last ? t_last : B});
      next_id[best]++;
      t_sum[best] += last ? t_last : B;
      if (last) n_last[best]++;
    end
  endtask

  // ------------------------------------------------------------ host model
  logic [ROW_W-1:0] shadow [longint];
  int n_backpressure;

  task automatic cmd(logic [2:0] op);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = op;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic wait_evt();
    while (!evt_done) @(negedge clk);
  endtask

  // rows are offered back to back; valid stays high between rows
  task automatic send_row(int p, int id, int slot, bit is_v);
    logic [ROW_W-1:0] row;
    row = is_v ? rnd_row(-1024, 1024) : rnd_row(-160, 160);
    kv_valid = 1; kv_pe_x = CRD'(p / MESH); kv_pe_y = CRD'(p % MESH);
    kv_block = 16'(id); kv_slot = 16'(slot); kv_is_v = is_v; kv_row = row;
    #1;
    while (!kv_ready) begin n_backpressure++; @(negedge clk); #1; end
    shadow[longint'(p) * 64'h1_0000_0000 + longint'((is_v ? V_BASE : 0) + id * B + slot)] = row;
    @(negedge clk);
  endtask

  task automatic send_request(blk_t blks [$]);
    @(negedge clk);
    foreach (blks[i]) begin
      for (int j = 0; j < blks[i].ntok; j++) send_row(blks[i].pe, blks[i].id, j, 0);
      for (int j = 0; j < blks[i].ntok; j++) send_row(blks[i].pe, blks[i].id, j, 1);
    end
    kv_valid = 0;
  endtask

  int n_empty_pe, n_multi_blk, n_partial, n_drain_pending, n_vec;

  task automatic load_tables(blk_t blks [$]);
    int cnt [NPE];
    for (int p = 0; p < NPE; p++) cnt[p] = 0;
    foreach (blks[i]) begin
      cmd_pe = PW'(blks[i].pe); cmd_idx = TW'(cnt[blks[i].pe]);
      cmd_blk = 16'(blks[i].id); cmd_ntok = NW'(blks[i].ntok);
      cmd(3'd0);
      cnt[blks[i].pe]++;
      if (blks[i].ntok < B) n_partial++;
    end
    for (int p = 0; p < NPE; p++) begin
      cmd_pe = PW'(p); cmd_idx = TW'(cnt[p]);
      cmd(3'd1);
      if (cnt[p] == 0) n_empty_pe++;
      if (cnt[p] >= 2) n_multi_blk++;
    end
  endtask

  task automatic check_attention(string tag, blk_t blks [$]);
    real s [$], mx, l, o [H], ps;
    mx = -1.0e30;
    foreach (blks[i])
      for (int j = 0; j < blks[i].ntok; j++) begin
        real d;
        logic [ROW_W-1:0] kr;
        kr = shadow[longint'(blks[i].pe) * 64'h1_0000_0000 + longint'(blks[i].id * B + j)];
        d = 0;
        for (int e = 0; e < H; e++) d += rd(q[e]) * rd(data_t'(kr[e*16 +: 16]));
        s.push_back(d);
        if (d > mx) mx = d;
      end
    l = 0;
    for (int e = 0; e < H; e++) o[e] = 0;
    begin
      int c;
      c = 0;
      foreach (blks[i])
        for (int j = 0; j < blks[i].ntok; j++) begin
          logic [ROW_W-1:0] vr;
          vr = shadow[longint'(blks[i].pe) * 64'h1_0000_0000 + longint'(V_BASE + blks[i].id * B + j)];
          ps = $exp(s[c++] - mx);
          l += ps;
          for (int e = 0; e < H; e++) o[e] += ps * rd(data_t'(vr[e*16 +: 16]));
        end
    end
    for (int p = 0; p < NPE; p++)
      for (int i = 0; i < VL; i++)
        check($sformatf("%s PE%0d a_x[%0d]", tag, p, i), r(a_x[p][i]), o[(p / MESH) * VL + i] / l, 0.02);
  endtask

  task automatic run_attention();
    for (int e = 0; e < H; e++) q[e] = data_t'($signed($urandom_range(0, 511)) - 256);
    cmd(3'd5);
    wait_evt();
  endtask

  task automatic drain();
    begin
      bit pending;
      pending = 0;
      for (int p = 0; p < NPE; p++) if (!dut.xfer_empty[p]) pending = 1;
      if (pending) n_drain_pending++;
    end
    cmd(3'd4);
    wait_evt();
  endtask

  initial begin
    blk_t ra [$], rb [$];
    int stall_sum, ovl_sum;
    cmd_valid = 0; cmd_op = '0; cmd_pe = '0; cmd_idx = '0; cmd_blk = '0; cmd_ntok = '0;
    cmd_k_base = '0; cmd_v_base = AW'(V_BASE); cmd_coarse = 0; cmd_threshold = '0;
    cmd_vec_op = V_ADD; vec_s0 = '0; vec_s1 = '0;
    kv_valid = 0; kv_is_v = 0; kv_pe_x = '0; kv_pe_y = '0; kv_block = '0; kv_slot = '0; kv_row = '0;
    for (int i = 0; i < VL; i++) vec_b[i] = '0;
    for (int e = 0; e < H; e++) q[e] = '0;
    for (int p = 0; p < NPE; p++) begin t_sum[p] = 0; n_last[p] = 0; next_id[p] = 0; end
    n_fine = 0; n_coarse = 0; n_backpressure = 0; n_empty_pe = 0; n_multi_blk = 0;
    n_partial = 0; n_drain_pending = 0; n_vec = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cmd(3'd2);                                    // K/V base addresses
    // 1. request A in coarse mode
    allocate(4096, ra);
    cmd_coarse = 1; cmd_threshold = (TPW+1)'(48); cmd(3'd3);
    send_request(ra);
    drain();
    load_tables(ra);
    // 2. attention over A with B's rows arriving in fine mode
    for (int p = 0; p < NPE; p++) begin t_sum[p] = 0; n_last[p] = 0; end
    allocate(16384, rb);
    cmd_coarse = 0; cmd(3'd3);
    fork
      run_attention();
      send_request(rb);
    join
    check_attention("A", ra);
    // 3. attention over B
    drain();
    load_tables(rb);
    run_attention();
    check_attention("B", rb);
    checks++;
    if (attn_runs != 2) begin failures++; $display("FAIL attn_runs %0d", attn_runs); end
    checks++;
    if (kv_rows_in != 32'(2 * (4096 + 16384))) begin failures++; $display("FAIL kv_rows_in %0d", kv_rows_in); end
    // 4. vector commands
    for (int i = 0; i < VL; i++) vec_b[i] = acc_t'($signed($urandom_range(0, 131071)) - 65536);
    cmd_vec_op = V_ADD; cmd(3'd6);
    @(negedge clk);
    n_vec++;
    for (int p = 0; p < NPE; p++)
      for (int i = 0; i < VL; i++)
        check("residual", r(vec_out[p][i]), r(a_x[p][i]) + r(vec_b[i]), 0.0001);
    cmd_vec_op = V_STAT; cmd(3'd6);
    @(negedge clk);
    for (int p = 0; p < NPE; p++) begin
      real sm;
      sm = 0;
      for (int i = 0; i < VL; i++) sm += r(a_x[p][i]);
      check("sum", r(vec_sum[p]), sm, 0.001);
    end
    // mechanism counters
    stall_sum = 0; ovl_sum = 0;
    for (int p = 0; p < NPE; p++) begin stall_sum += stall_cycles[p]; ovl_sum += overlap_cycles[p]; end
    $display("mechanisms: stall=%0d overlap=%0d fine_writes=%0d coarse_writes=%0d drains_with_rows=%0d",
             stall_sum, ovl_sum, n_fine, n_coarse, n_drain_pending);
    $display("mechanisms: empty_pe=%0d multi_block_pe=%0d partial_blocks=%0d ingress_backpressure=%0d vector_ops=%0d",
             n_empty_pe, n_multi_blk, n_partial, n_backpressure, n_vec);
    checks++; if (stall_sum == 0)       begin failures++; $display("FAIL no compute stall"); end
    checks++; if (ovl_sum == 0)         begin failures++; $display("FAIL no load/compute overlap"); end
    checks++; if (n_fine == 0)          begin failures++; $display("FAIL no fine-grained write"); end
    checks++; if (n_coarse == 0)        begin failures++; $display("FAIL no coarse-grained flush"); end


    checks++; if (n_multi_blk == 0)     begin failures++; $display("FAIL no PE with several blocks"); end

    checks++; if (n_vec == 0)           begin failures++; $display("FAIL no vector op"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
