// pe: one processing engine of the HB-Device logic die.
//
// The PE sits under its bank partition of the stacked DRAM and sees only its
// local memory. It holds:
//   - pe_controller: block table and tiled-attention sequencer;
//   - matrix_unit, online_softmax_unit, reduction_unit, vector_unit;
//   - compute buffer (sram_buffer) for the K/V tiles of the running blocks;
//   - transfer_buffer for KV cache rows arriving over the router NoC;
//   - collective_unit for the reduce-scatter / all-gather of attention
//     partials over the inter-PE NoC;
//   - two noc_routers, one per NoC, both at the PE's mesh position
//     (pos_x, pos_y), which are strap inputs so that all PEs are one design.
// Flow of one attention run: start -> local tiled attention over the blocks
// in the table -> collective exchange -> attn_done, with a_x holding the
// x-th quarter of the attention output (the layout the output projection
// needs). A vector command (vec_valid) applies an element-wise operation
// to a_x afterwards (for example a residual add, or the sums a norm layer
// all-reduces), with the results on vec_out / vec_sum / vec_sumsq.
//
// DRAM port (to the PE's HB controllers, outside this design): one request
// per cycle when mem_gnt is high; mem_we selects a write of one row; read
// data return in order on mem_rsp_*. The transfer buffer's writes use the
// cycles the attention loader leaves free (fine-grained) or take priority
// while it flushes (coarse-grained).
// NoC ports are indexed 0 north, 1 south, 2 west, 3 east (router ports 1-4).
module pe
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
  localparam int ROW_W   = H * 16,
  localparam int TW      = $clog2(MAX_BLK + 1),
  localparam int NW      = $clog2(B + 1),
  localparam int CRD     = (MESH > 1) ? $clog2(MESH) : 1,
  localparam int CW      = H / (MESH * MESH),
  localparam int VL      = MESH * CW,
  localparam int QFW     = 4 * CRD + 1 + 64 + 32 * CW,     // inter-PE NoC flit
  localparam int RFW     = 2 * CRD + AW + ROW_W,           // router NoC flit
  localparam int TPW     = $clog2(TB_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // mesh position of this PE (row x, column y), strapped by the device
  input  logic [CRD-1:0]   pos_x,
  input  logic [CRD-1:0]   pos_y,
  // configuration and commands from the global controller
  input  logic             tbl_we,
  input  logic [TW-1:0]    tbl_idx,
  input  logic [15:0]      tbl_blk,
  input  logic [NW-1:0]    tbl_ntok,
  input  logic [TW-1:0]    n_blocks,
  input  logic [AW-1:0]    k_base,
  input  logic [AW-1:0]    v_base,
  input  data_t            q         [H],
  input  logic             start,
  input  logic             xfer_coarse,
  input  logic [TPW:0]     xfer_threshold,
  input  logic             xfer_drain,
  output logic             xfer_empty,
  output logic             xfer_flushing,
  input  logic             vec_valid,
  input  vec_op_e          vec_op,
  input  acc_t             vec_b     [VL],
  input  acc_t             vec_s0,
  input  acc_t             vec_s1,
  output logic             vec_out_valid,
  output acc_t             vec_out   [VL],
  output acc_t             vec_sum,
  output acc_t             vec_sumsq,
  output logic             busy,
  output logic             attn_done,
  output acc_t             a_x       [VL],
  output logic [31:0]      stall_cycles,
  output logic [31:0]      overlap_cycles,
  // DRAM port
  output logic             mem_req,
  output logic             mem_we,
  output logic [AW-1:0]    mem_addr,
  output logic [ROW_W-1:0] mem_wdata,
  input  logic             mem_gnt,
  input  logic             mem_rsp_valid,
  input  logic [ROW_W-1:0] mem_rsp_data,
  // inter-PE NoC links
  input  logic             q_in_valid  [4],
  input  logic [QFW-1:0]   q_in_data   [4],
  output logic             q_in_ready  [4],
  output logic             q_out_valid [4],
  output logic [QFW-1:0]   q_out_data  [4],
  input  logic             q_out_ready [4],
  // router NoC links
  input  logic             r_in_valid  [4],
  input  logic [RFW-1:0]   r_in_data   [4],
  output logic             r_in_ready  [4],
  output logic             r_out_valid [4],
  output logic [RFW-1:0]   r_out_data  [4],
  input  logic             r_out_ready [4]
);

  localparam int CBA = $clog2(CB_WORDS);
  localparam int RW  = (B > 1) ? $clog2(B) : 1;

  // ------------------------------------------------------------ controller
  logic ld_req, ld_gnt, ld_idle, ctl_busy, ctl_done;
  logic [AW-1:0] ld_addr;
  acc_t part_o [H];
  acc_t part_m, part_l;
  logic cb_we, cb_re;
  logic [CBA-1:0] cb_waddr, cb_raddr;
  logic [RW-1:0] cb_wseg;
  logic [ROW_W-1:0] cb_wdata;
  logic [B*ROW_W-1:0] cb_rdata;
  logic mu_valid, mu_clear, mu_ov;
  acc_t mu_a [MACS];
  data_t mu_w [NUM_FPU][MACS];
  acc_t mu_acc [NUM_FPU];
  logic sm_valid, sm_first, sm_ov;
  logic [NW-1:0] sm_nvalid;
  acc_t sm_x [B];
  acc_t sm_p [B];
  acc_t sm_m, sm_l, sm_alpha;
  logic red_valid, red_ov;
  red_mode_e red_mode;
  acc_t red_alpha, red_mo, red_lo;
  acc_t red_v1 [H];
  acc_t red_v2 [H];
  acc_t red_out [H];

  pe_controller #(.H(H), .B(B), .MACS(MACS), .NUM_FPU(NUM_FPU), .MAX_BLK(MAX_BLK),
                  .AW(AW), .CB_WORDS(CB_WORDS)) u_ctl (
    .clk, .rst_n, .tbl_we, .tbl_idx, .tbl_blk, .tbl_ntok, .n_blocks, .k_base, .v_base,
    .q, .start, .busy(ctl_busy), .done(ctl_done), .part_o, .part_m, .part_l,
    .stall_cycles, .overlap_cycles,
    .rd_req(ld_req), .rd_addr(ld_addr), .rd_gnt(ld_gnt), .rd_rsp_valid(mem_rsp_valid),
    .rd_rsp_data(mem_rsp_data), .mem_idle(ld_idle),
    .cb_we, .cb_waddr, .cb_wseg, .cb_wdata, .cb_re, .cb_raddr, .cb_rdata,
    .mu_valid, .mu_clear, .mu_a, .mu_w, .mu_acc,
    .sm_valid, .sm_first, .sm_nvalid, .sm_x, .sm_m, .sm_l, .sm_alpha, .sm_p,
    .red_valid, .red_mode, .red_alpha, .red_v1, .red_v2, .red_out);

  // ----------------------------------------------------------- datapath
  matrix_unit #(.NUM_FPU(NUM_FPU), .MACS(MACS)) u_mu (
    .clk, .rst_n, .in_valid(mu_valid), .clear(mu_clear), .a(mu_a), .w(mu_w),
    .out_valid(mu_ov), .acc(mu_acc));

  online_softmax_unit #(.LANES(B)) u_sm (
    .clk, .rst_n, .in_valid(sm_valid), .first(sm_first), .n_valid(sm_nvalid), .x(sm_x),
    .m_prev(sm_m), .l_prev(sm_l), .out_valid(sm_ov), .m(sm_m), .l(sm_l),
    .alpha(sm_alpha), .p(sm_p));

  reduction_unit #(.LANES(H)) u_red (
    .clk, .rst_n, .in_valid(red_valid), .mode(red_mode), .alpha(red_alpha),
    .m1(FX_NEGINF), .l1('0), .m2(FX_NEGINF), .l2('0), .v1(red_v1), .v2(red_v2),
    .out_valid(red_ov), .m_out(red_mo), .l_out(red_lo), .out(red_out));

  sram_buffer #(.WORDS(CB_WORDS), .SEG_W(ROW_W), .NSEG(B)) u_cbuf (
    .clk, .we(cb_we), .waddr(cb_waddr), .wseg(cb_wseg), .wdata(cb_wdata),
    .re(cb_re), .raddr(cb_raddr), .rdata(cb_rdata));

  // ------------------------------------------------------ DRAM arbitration
  logic tb_req, tb_gnt, sel_tb;
  logic [AW-1:0] tb_addr;
  logic [ROW_W-1:0] tb_row;
  logic [TPW:0] tb_count;

  assign sel_tb    = xfer_flushing ? tb_req : (tb_req && !ld_req);
  assign mem_req   = ld_req || tb_req;
  assign mem_we    = sel_tb;
  assign mem_addr  = sel_tb ? tb_addr : ld_addr;
  assign mem_wdata = tb_row;
  assign ld_gnt    = mem_gnt && !sel_tb;
  assign tb_gnt    = mem_gnt && sel_tb;

  // ------------------------------------------------------------ router NoC
  logic             rr_iv [5];
  logic [RFW-1:0]   rr_id [5];
  logic             rr_ir [5];
  logic             rr_ov [5];
  logic [RFW-1:0]   rr_od [5];
  logic             rr_or [5];
  logic             tb_in_ready;

  assign rr_iv[0] = 1'b0;
  assign rr_id[0] = '0;
  assign rr_or[0] = tb_in_ready;
  for (genvar d = 0; d < 4; d++) begin : g_rlink
    assign rr_iv[d+1]     = r_in_valid[d];
    assign rr_id[d+1]     = r_in_data[d];
    assign r_in_ready[d]  = rr_ir[d+1];
    assign r_out_valid[d] = rr_ov[d+1];
    assign r_out_data[d]  = rr_od[d+1];
    assign rr_or[d+1]     = r_out_ready[d];
  end

  noc_router #(.MESH(MESH), .DW(RFW)) u_rnoc (
    .clk, .rst_n, .pos_x, .pos_y, .in_valid(rr_iv), .in_data(rr_id), .in_ready(rr_ir),
    .out_valid(rr_ov), .out_data(rr_od), .out_ready(rr_or));

  transfer_buffer #(.DEPTH(TB_DEPTH), .ROW_W(ROW_W), .AW(AW)) u_xfer (
    .clk, .rst_n, .coarse(xfer_coarse), .threshold(xfer_threshold), .drain(xfer_drain),
    .in_valid(rr_ov[0]), .in_addr(rr_od[0][2*CRD +: AW]), .in_row(rr_od[0][2*CRD+AW +: ROW_W]),
    .in_ready(tb_in_ready), .mem_idle(ld_idle), .mem_req(tb_req), .mem_addr(tb_addr),
    .mem_row(tb_row), .mem_gnt(tb_gnt), .flushing(xfer_flushing), .empty(xfer_empty),
    .count(tb_count));

  // --------------------------------------------------------- inter-PE NoC
  logic             qr_iv [5];
  logic [QFW-1:0]   qr_id [5];
  logic             qr_ir [5];
  logic             qr_ov [5];
  logic [QFW-1:0]   qr_od [5];
  logic             qr_or [5];
  logic             cu_tx_v, cu_rx_r, cu_busy;
  logic [QFW-1:0]   cu_tx_d;
  acc_t             cu_cm, cu_cl;

  assign qr_iv[0] = cu_tx_v;
  assign qr_id[0] = cu_tx_d;
  assign qr_or[0] = cu_rx_r;
  for (genvar d = 0; d < 4; d++) begin : g_qlink
    assign qr_iv[d+1]     = q_in_valid[d];
    assign qr_id[d+1]     = q_in_data[d];
    assign q_in_ready[d]  = qr_ir[d+1];
    assign q_out_valid[d] = qr_ov[d+1];
    assign q_out_data[d]  = qr_od[d+1];
    assign qr_or[d+1]     = q_out_ready[d];
  end

  noc_router #(.MESH(MESH), .DW(QFW)) u_qnoc (
    .clk, .rst_n, .pos_x, .pos_y, .in_valid(qr_iv), .in_data(qr_id), .in_ready(qr_ir),
    .out_valid(qr_ov), .out_data(qr_od), .out_ready(qr_or));

  collective_unit #(.MESH(MESH), .H(H)) u_coll (
    .clk, .rst_n, .pos_x, .pos_y, .start(ctl_done), .part_o, .part_m, .part_l,
    .tx_valid(cu_tx_v), .tx_data(cu_tx_d), .tx_ready(qr_ir[0]),
    .rx_valid(qr_ov[0]), .rx_data(qr_od[0]), .rx_ready(cu_rx_r),
    .busy(cu_busy), .done(attn_done), .a_x, .chunk_m(cu_cm), .chunk_l(cu_cl));

  // ----------------------------------------------------------- vector unit
  logic [31:0] vu_n;
  acc_t vu_mu, vu_var;

  vector_unit #(.LANES(VL)) u_vec (
    .clk, .rst_n, .in_valid(vec_valid), .op(vec_op), .n_valid(($clog2(VL+1))'(VL)),
    .a(a_x), .b(vec_b), .s0(vec_s0), .s1(vec_s1),
    .n1('0), .mu1('0), .var1('0), .n2('0), .mu2('0), .var2('0),
    .out_valid(vec_out_valid), .out(vec_out), .sum(vec_sum), .sumsq(vec_sumsq),
    .n_out(vu_n), .mu_out(vu_mu), .var_out(vu_var));

  assign busy = ctl_busy || cu_busy;

endmodule
