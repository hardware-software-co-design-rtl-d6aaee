// hb_device: logic die of one HB-Device (top level).
//
// A MESH x MESH array of PEs (4 x 4 by default), each under its own bank
// partition of the stacked DRAM, joined by two independent 2D meshes: the
// router NoC, which carries KV cache rows from the device router to the PE
// that holds the block, and the inter-PE NoC, which carries attention
// partials between PEs. The global controller takes host commands, loads
// the per-PE block tables and starts distributed tiled attention.
//
// A decoding attention step for one KV head runs as follows:
//   1. the host streams KV rows in through kv_* (device router -> router
//      NoC -> PE transfer buffer -> PE DRAM), then issues CMD_DRAIN;
//   2. the host writes each PE's block list (CMD_TABLE / CMD_NBLK) as chosen
//      by its block allocator, and presents the query on q;
//   3. CMD_ATTN: every PE runs tiled attention over its own blocks, then all
//      PEs combine their partials (reduce-scatter + row all-gather); evt_done
//      pulses and PE(x, y) holds the x-th quarter of the output on a_x.
// The query is broadcast to all PEs from the q port (the paper replicates it
// with an all-reduce/all-gather after the Q projection, which is outside
// this design).
//
// The HB controllers, the DRAM dies and the auxiliary die are not part of
// the RTL: each PE's DRAM port is a port of this module (mem_*[p], with
// p = x*MESH + y), to be connected to a memory model or controller.
// Router port order inside a PE: 0 north (x-1), 1 south (x+1), 2 west
// (y-1), 3 east (y+1). The device router feeds PE(0,0)'s north input.
module hb_device
  import helios_pkg::*;
#(
  parameter int MESH     = 4,
  parameter int H        = 128,
  parameter int B        = 64,
  parameter int MACS     = 16,
  parameter int NUM_FPU  = 512,
  parameter int MAX_BLK  = 64,
  parameter int AW       = 32,
  parameter int CB_WORDS = 160,
  parameter int TB_DEPTH = 10240,
  localparam int NPE     = MESH * MESH,
  localparam int PW      = $clog2(NPE),
  localparam int ROW_W   = H * 16,
  localparam int TW      = $clog2(MAX_BLK + 1),
  localparam int NW      = $clog2(B + 1),
  localparam int CRD     = (MESH > 1) ? $clog2(MESH) : 1,
  localparam int CW      = H / NPE,
  localparam int VL      = MESH * CW,
  localparam int QFW     = 4 * CRD + 1 + 64 + 32 * CW,
  localparam int RFW     = 2 * CRD + AW + ROW_W,
  localparam int TPW     = $clog2(TB_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host command interface
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  logic [2:0]       cmd_op,
  input  logic [PW-1:0]    cmd_pe,
  input  logic [TW-1:0]    cmd_idx,
  input  logic [15:0]      cmd_blk,
  input  logic [NW-1:0]    cmd_ntok,
  input  logic [AW-1:0]    cmd_k_base,
  input  logic [AW-1:0]    cmd_v_base,
  input  logic             cmd_coarse,
  input  logic [TPW:0]     cmd_threshold,
  input  vec_op_e          cmd_vec_op,
  input  acc_t             vec_b     [VL],
  input  acc_t             vec_s0,
  input  acc_t             vec_s1,
  output logic             evt_done,
  input  data_t            q         [H],
  // KV cache ingress
  input  logic             kv_valid,
  input  logic [CRD-1:0]   kv_pe_x,
  input  logic [CRD-1:0]   kv_pe_y,
  input  logic [15:0]      kv_block,
  input  logic [15:0]      kv_slot,
  input  logic             kv_is_v,
  input  logic [ROW_W-1:0] kv_row,
  output logic             kv_ready,
  // results
  output acc_t             a_x       [NPE][VL],
  output acc_t             vec_out   [NPE][VL],
  output acc_t             vec_sum   [NPE],
  output acc_t             vec_sumsq [NPE],
  output logic [31:0]      stall_cycles   [NPE],
  output logic [31:0]      overlap_cycles [NPE],
  output logic [NPE-1:0]   xfer_flushing,
  output logic [31:0]      attn_runs,
  output logic [31:0]      kv_rows_in,
  // DRAM ports, one per PE
  output logic             mem_req       [NPE],
  output logic             mem_we        [NPE],
  output logic [AW-1:0]    mem_addr      [NPE],
  output logic [ROW_W-1:0] mem_wdata     [NPE],
  input  logic             mem_gnt       [NPE],
  input  logic             mem_rsp_valid [NPE],
  input  logic [ROW_W-1:0] mem_rsp_data  [NPE]
);

  // global controller outputs
  logic [NPE-1:0] tbl_we, attn_done, xfer_empty, busy, vec_ov;
  logic [TW-1:0]  tbl_idx;
  logic [15:0]    tbl_blk;
  logic [NW-1:0]  tbl_ntok;
  logic [TW-1:0]  n_blocks [NPE];
  logic [AW-1:0]  k_base, v_base;
  logic           start, xfer_coarse, xfer_drain, vec_valid;
  logic [TPW:0]   xfer_threshold;
  vec_op_e        vec_op;

  global_controller #(.NPE(NPE), .MAX_BLK(MAX_BLK), .B(B), .AW(AW), .TPW(TPW)) u_gc (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_pe, .cmd_idx, .cmd_blk, .cmd_ntok,
    .cmd_k_base, .cmd_v_base, .cmd_coarse, .cmd_threshold, .cmd_vec_op, .evt_done,
    .tbl_we, .tbl_idx, .tbl_blk, .tbl_ntok, .n_blocks, .k_base, .v_base, .start,
    .xfer_coarse, .xfer_threshold, .xfer_drain, .vec_valid, .vec_op,
    .attn_done, .xfer_empty, .attn_runs);

  // device router into PE(0,0)'s north port of the router NoC
  logic           dr_valid, dr_ready;
  logic [RFW-1:0] dr_data;

  device_router #(.MESH(MESH), .B(B), .AW(AW), .ROW_W(ROW_W)) u_dr (
    .clk, .rst_n, .k_base, .v_base, .kv_valid, .kv_pe_x, .kv_pe_y, .kv_block, .kv_slot,
    .kv_is_v, .kv_row, .kv_ready, .out_valid(dr_valid), .out_data(dr_data),
    .out_ready(dr_ready), .rows_sent(kv_rows_in));

  // mesh links: [pe][dir] with dir 0 N, 1 S, 2 W, 3 E
  logic           qi_v [NPE][4];
  logic [QFW-1:0] qi_d [NPE][4];
  logic           qi_r [NPE][4];
  logic           qo_v [NPE][4];
  logic [QFW-1:0] qo_d [NPE][4];
  logic           qo_r [NPE][4];
  logic           ri_v [NPE][4];
  logic [RFW-1:0] ri_d [NPE][4];
  logic           ri_r [NPE][4];
  logic           ro_v [NPE][4];
  logic [RFW-1:0] ro_d [NPE][4];
  logic           ro_r [NPE][4];

  // neighbour of PE p in direction d, -1 at the mesh edge
  function automatic int nbr(int p, int d);
    int x, y;
    x = p / MESH;
    y = p % MESH;
    case (d)
      0: return (x > 0)        ? p - MESH : -1;
      1: return (x < MESH - 1) ? p + MESH : -1;
      2: return (y > 0)        ? p - 1    : -1;
      default: return (y < MESH - 1) ? p + 1 : -1;
    endcase
  endfunction

  // direction seen from the neighbour: N<->S, W<->E
  function automatic int opp(int d);
    return d ^ 1;
  endfunction

  always_comb begin
    for (int p = 0; p < NPE; p++)
      for (int d = 0; d < 4; d++) begin
        int n;
        n = nbr(p, d);
        if (n >= 0) begin
          qi_v[p][d] = qo_v[n][opp(d)];
          qi_d[p][d] = qo_d[n][opp(d)];
          qo_r[p][d] = qi_r[n][opp(d)];
          ri_v[p][d] = ro_v[n][opp(d)];
          ri_d[p][d] = ro_d[n][opp(d)];
          ro_r[p][d] = ri_r[n][opp(d)];
        end else begin
          qi_v[p][d] = 1'b0;
          qi_d[p][d] = '0;
          qo_r[p][d] = 1'b0;
          ri_v[p][d] = 1'b0;
          ri_d[p][d] = '0;
          ro_r[p][d] = 1'b0;
        end
      end
    // device router enters at PE(0,0), north
    ri_v[0][0] = dr_valid;
    ri_d[0][0] = dr_data;
    dr_ready   = ri_r[0][0];
  end

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    pe #(.MESH(MESH), .H(H), .B(B), .MACS(MACS),
         .NUM_FPU(NUM_FPU), .MAX_BLK(MAX_BLK), .AW(AW), .CB_WORDS(CB_WORDS),
         .TB_DEPTH(TB_DEPTH)) u_pe (
      .clk, .rst_n, .pos_x(CRD'(p / MESH)), .pos_y(CRD'(p % MESH)),
      .tbl_we(tbl_we[p]), .tbl_idx, .tbl_blk, .tbl_ntok, .n_blocks(n_blocks[p]),
      .k_base, .v_base, .q, .start,
      .xfer_coarse, .xfer_threshold, .xfer_drain, .xfer_empty(xfer_empty[p]),
      .xfer_flushing(xfer_flushing[p]),
      .vec_valid, .vec_op, .vec_b, .vec_s0, .vec_s1, .vec_out_valid(vec_ov[p]),
      .vec_out(vec_out[p]), .vec_sum(vec_sum[p]), .vec_sumsq(vec_sumsq[p]),
      .busy(busy[p]), .attn_done(attn_done[p]), .a_x(a_x[p]),
      .stall_cycles(stall_cycles[p]), .overlap_cycles(overlap_cycles[p]),
      .mem_req(mem_req[p]), .mem_we(mem_we[p]), .mem_addr(mem_addr[p]),
      .mem_wdata(mem_wdata[p]), .mem_gnt(mem_gnt[p]), .mem_rsp_valid(mem_rsp_valid[p]),
      .mem_rsp_data(mem_rsp_data[p]),
      .q_in_valid(qi_v[p]), .q_in_data(qi_d[p]), .q_in_ready(qi_r[p]),
      .q_out_valid(qo_v[p]), .q_out_data(qo_d[p]), .q_out_ready(qo_r[p]),
      .r_in_valid(ri_v[p]), .r_in_data(ri_d[p]), .r_in_ready(ri_r[p]),
      .r_out_valid(ro_v[p]), .r_out_data(ro_d[p]), .r_out_ready(ro_r[p]));
  end

endmodule
