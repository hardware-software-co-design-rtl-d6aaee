// Testbench for pe_controller. The controller is wired to the real matrix,
// online-softmax and reduction units and a compute buffer, as inside a PE,
// plus a behavioural DRAM with fixed read latency and random grant. Runs:
// three scattered blocks with a partially filled last block, an empty run
// (no blocks on this PE) and a single block with an always-free DRAM. The
// partial result (O, m, l) is compared with attention computed in real
// numbers from the same K/V rows. Timing check: every busy cycle is either
// a stall or one of the 6 + H/16 + B/16 fixed compute cycles per block (18 at
// H = 128, B = 64), plus one final
// cycle. The run with random grant must show both stalls and overlap.
module tb_pe_controller;
  import helios_pkg::*;
  localparam int H = 32, B = 16, MACS = 16, NUM_FPU = 32, MAX_BLK = 8, AW = 16, CB_WORDS = 4;
  localparam int ROW_W = H * 16, TW = $clog2(MAX_BLK + 1), NW = $clog2(B + 1);
  localparam int CBA = $clog2(CB_WORDS), RW = $clog2(B), LAT = 3, MEMW = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tbl_we, start, busy, done, rd_req, rd_gnt, rd_rsp_valid, mem_idle;
  logic [TW-1:0] tbl_idx, n_blocks;
  logic [15:0] tbl_blk;
  logic [NW-1:0] tbl_ntok;
  logic [AW-1:0] k_base, v_base, rd_addr;
  data_t q [H];
  acc_t part_o [H];
  acc_t part_m, part_l;
  logic [31:0] stall_cycles, overlap_cycles;
  logic [ROW_W-1:0] rd_rsp_data;
  logic cb_we, cb_re;
  logic [CBA-1:0] cb_waddr, cb_raddr;
  logic [RW-1:0] cb_wseg;
  logic [ROW_W-1:0] cb_wdata;
  logic [B*ROW_W-1:0] cb_rdata;
  logic mu_valid, mu_clear, mu_out_valid;
  acc_t mu_a [MACS];
  data_t mu_w [NUM_FPU][MACS];
  acc_t mu_acc [NUM_FPU];
  logic sm_valid, sm_first, sm_out_valid;
  logic [NW-1:0] sm_nvalid;
  acc_t sm_x [B];
  acc_t sm_m, sm_l, sm_alpha;
  acc_t sm_p [B];
  logic red_valid, red_out_valid;
  red_mode_e red_mode;
  acc_t red_alpha, red_m, red_l;
  acc_t red_v1 [H];
  acc_t red_v2 [H];
  acc_t red_out [H];

  pe_controller #(.H(H), .B(B), .MACS(MACS), .NUM_FPU(NUM_FPU), .MAX_BLK(MAX_BLK),
                  .AW(AW), .CB_WORDS(CB_WORDS)) dut (.*);

  matrix_unit #(.NUM_FPU(NUM_FPU), .MACS(MACS)) u_mu (
    .clk, .rst_n, .in_valid(mu_valid), .clear(mu_clear), .a(mu_a), .w(mu_w),
    .out_valid(mu_out_valid), .acc(mu_acc));
  online_softmax_unit #(.LANES(B)) u_sm (
    .clk, .rst_n, .in_valid(sm_valid), .first(sm_first), .n_valid(sm_nvalid), .x(sm_x),
    .m_prev(sm_m), .l_prev(sm_l), .out_valid(sm_out_valid), .m(sm_m), .l(sm_l),
    .alpha(sm_alpha), .p(sm_p));
  reduction_unit #(.LANES(H)) u_red (
    .clk, .rst_n, .in_valid(red_valid), .mode(red_mode), .alpha(red_alpha),
    .m1(FX_NEGINF), .l1('0), .m2(FX_NEGINF), .l2('0), .v1(red_v1), .v2(red_v2),
    .out_valid(red_out_valid), .m_out(red_m), .l_out(red_l), .out(red_out));
  sram_buffer #(.WORDS(CB_WORDS), .SEG_W(ROW_W), .NSEG(B)) u_cb (
    .clk, .we(cb_we), .waddr(cb_waddr), .wseg(cb_wseg), .wdata(cb_wdata),
    .re(cb_re), .raddr(cb_raddr), .rdata(cb_rdata));

  // behavioural DRAM: fixed latency, in order
  logic [ROW_W-1:0] mem [MEMW];
  logic          pv [LAT];
  logic [AW-1:0] pa [LAT];
  bit random_gnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pa[i] <= '0; end
      rd_gnt <= 1'b0;
    end else begin
      pv[0] <= rd_req && rd_gnt; pa[0] <= rd_addr;
      for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pa[i] <= pa[i-1]; end
      rd_gnt <= random_gnt ? ($urandom_range(0, 3) == 0) : 1'b1;
    end
  end
  assign rd_rsp_valid = pv[LAT-1];
  assign rd_rsp_data  = mem[pa[LAT-1] % MEMW];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real r(acc_t v); return $itor(v) / 65536.0; endfunction
  function automatic real rd(data_t v); return $itor(v) / 256.0; endfunction
  function automatic data_t rnd16(int lo, int hi);  // value in [lo, hi) / 256
    return data_t'($signed($urandom_range(0, hi - lo - 1)) + lo);
  endfunction

  task automatic check(string what, real got, real exp, real tol);
    checks++;
    if ((got - exp > tol) || (exp - got > tol)) begin
      failures++;
      $display("FAIL %s got %f expected %f", what, got, exp);
    end
  endtask

  int busy_cycles;
  always @(posedge clk) if (busy) busy_cycles++;

  task automatic run(int nb, int ids [], int ntok [], bit rg, bit expect_stall);
    real s [MAX_BLK * B], mx, l, o [H];
    int cnt, t0;
    random_gnt = rg;
    @(negedge clk);
    for (int i = 0; i < nb; i++) begin
      tbl_we = 1; tbl_idx = TW'(i); tbl_blk = 16'(ids[i]); tbl_ntok = NW'(ntok[i]);
      @(negedge clk);
    end
    tbl_we = 0;
    for (int e = 0; e < H; e++) q[e] = rnd16(-256, 256);
    // reference
    cnt = 0; mx = -1.0e30;
    for (int i = 0; i < nb; i++)
      for (int j = 0; j < ntok[i]; j++) begin
        real d;
        logic [ROW_W-1:0] kr;
        kr = mem[(int'(k_base) + ids[i] * B + j) % MEMW];
        d = 0;
        for (int e = 0; e < H; e++) d += rd(q[e]) * rd(data_t'(kr[e*16 +: 16]));
        s[cnt++] = d;
        if (d > mx) mx = d;
      end
    l = 0;
    for (int e = 0; e < H; e++) o[e] = 0;
    cnt = 0;
    for (int i = 0; i < nb; i++)
      for (int j = 0; j < ntok[i]; j++) begin
        logic [ROW_W-1:0] vr;
        real p;
        vr = mem[(int'(v_base) + ids[i] * B + j) % MEMW];
        p = $exp(s[cnt++] - mx);
        l += p;
        for (int e = 0; e < H; e++) o[e] += p * rd(data_t'(vr[e*16 +: 16]));
      end
    n_blocks = TW'(nb);
    busy_cycles = 0;
    t0 = stall_cycles;
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    if (nb == 0) begin
      checks++;
      if (part_m != FX_NEGINF || part_l != 0) begin failures++; $display("FAIL empty run statistics"); end
      for (int e = 0; e < H; e++) check("empty O", r(part_o[e]), 0.0, 0.0);
    end else begin
      check("m", r(part_m), mx, 0.001);
      check("l", r(part_l), l, 0.01 * l + 0.01);
      for (int e = 0; e < H; e++) check($sformatf("O[%0d]", e), r(part_o[e]), o[e] / l, 0.02);
    end
    checks++;
    if (busy_cycles != int'(stall_cycles) - t0 + (6 + H / MACS + B / MACS) * nb + 1) begin
      failures++;
      $display("FAIL busy %0d cycles, stalls %0d, blocks %0d", busy_cycles, int'(stall_cycles) - t0, nb);
    end
    if (expect_stall) begin
      checks++;
      if (int'(stall_cycles) == t0) begin failures++; $display("FAIL no stall seen"); end
    end
    @(negedge clk);
  endtask

  initial begin
    int ids3 [] = '{5, 1, 3};
    int nt3 [] = '{B, B, 9};
    int ids1 [] = '{2};
    int nt1 [] = '{B};
    int none [] = '{};
    tbl_we = 0; tbl_idx = '0; tbl_blk = '0; tbl_ntok = '0; n_blocks = '0; start = 0;
    k_base = AW'(0); v_base = AW'(256); random_gnt = 0;
    for (int a = 0; a < MEMW; a++)
      for (int e = 0; e < H; e++) mem[a][e*16 +: 16] = (a < 256) ? rnd16(-160, 160) : rnd16(-1024, 1024);
    for (int e = 0; e < H; e++) q[e] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(3, ids3, nt3, 1, 1);
    checks++;
    if (overlap_cycles == 0) begin failures++; $display("FAIL no load overlapped with compute"); end
    run(0, none, none, 0, 0);
    run(1, ids1, nt1, 0, 1);
    run(3, ids3, nt3, 0, 1);
    $display("stall=%0d overlap=%0d", stall_cycles, overlap_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
