// pe_controller: the PE controller's tiled-attention sequencer.
//
// For one query vector q (length H) it walks the PE's list of KV blocks and
// runs iterative tiled attention (Algorithm 1) on the PE's own units:
//   1. QK GEMM   x_i = q * K_i^T      matrix unit, H/MACS beats, FPU n <-> token n
//   2. online softmax                 m_i, l_i, alpha, p_i from x_i
//   3. SV GEMM   O_i = p_i * V_i      matrix unit, B/MACS beats, FPU n <-> column n
//   4. output accumulation O = alpha*O + O_i   reduction unit, RED_SCALE
// The result (O, m, l) is this PE's attention partial; l = 0 and m = -inf
// when the PE holds no block of the request.
//
// Block table: entry t holds the local block id and its token count (B for a
// full block, fewer for the request's last, partially filled block). KV
// cache lives in DRAM as two tensors (K and V) with fixed base addresses;
// row j of block i is at word base + i*B + j (the paper's
// base + (i*b + j)*H, counted in rows of H elements instead of elements).
//
// A loader streams the K and V rows of block t+1 from DRAM into the compute
// buffer while block t is computed (double buffering over two tile slots;
// slot s uses compute-buffer words 2s (K) and 2s+1 (V)). Compute waits when
// the next tile is not loaded yet; such cycles are counted in stall_cycles,
// cycles where a load runs beside the computation in overlap_cycles.
// The paper further splits a macro block into two groups so that softmax
// and accumulation of one group hide under the GEMMs of the other; this
// sequencer runs the four steps of a block one after another instead.
//
// DRAM read port: rd_req/rd_addr, accepted when rd_gnt is high in the same
// cycle; data returns in request order on rd_rsp_valid/rd_rsp_data.
// mem_idle tells the transfer buffer that the loader leaves the port free.
// start (one cycle) begins a run; done pulses when part_* are final.
module pe_controller
  import helios_pkg::*;
#(
  parameter int H        = 128,
  parameter int B        = 64,
  parameter int MACS     = 16,
  parameter int NUM_FPU  = 512,
  parameter int MAX_BLK  = 64,
  parameter int AW       = 32,
  parameter int CB_WORDS = 160,
  localparam int ROW_W   = H * 16,
  localparam int TW      = $clog2(MAX_BLK + 1),
  localparam int NW      = $clog2(B + 1),
  localparam int CBA     = $clog2(CB_WORDS),
  localparam int RW      = (B > 1) ? $clog2(B) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic               tbl_we,
  input  logic [TW-1:0]      tbl_idx,
  input  logic [15:0]        tbl_blk,
  input  logic [NW-1:0]      tbl_ntok,
  input  logic [TW-1:0]      n_blocks,
  input  logic [AW-1:0]      k_base,
  input  logic [AW-1:0]      v_base,
  input  data_t              q        [H],
  input  logic               start,
  output logic               busy,
  output logic               done,
  output acc_t               part_o   [H],
  output acc_t               part_m,
  output acc_t               part_l,
  output logic [31:0]        stall_cycles,
  output logic [31:0]        overlap_cycles,
  // DRAM read port
  output logic               rd_req,
  output logic [AW-1:0]      rd_addr,
  input  logic               rd_gnt,
  input  logic               rd_rsp_valid,
  input  logic [ROW_W-1:0]   rd_rsp_data,
  output logic               mem_idle,
  // compute buffer
  output logic               cb_we,
  output logic [CBA-1:0]     cb_waddr,
  output logic [RW-1:0]      cb_wseg,
  output logic [ROW_W-1:0]   cb_wdata,
  output logic               cb_re,
  output logic [CBA-1:0]     cb_raddr,
  input  logic [B*ROW_W-1:0] cb_rdata,
  // matrix unit
  output logic               mu_valid,
  output logic               mu_clear,
  output acc_t               mu_a     [MACS],
  output data_t              mu_w     [NUM_FPU][MACS],
  input  acc_t               mu_acc   [NUM_FPU],
  // online softmax unit
  output logic               sm_valid,
  output logic               sm_first,
  output logic [NW-1:0]      sm_nvalid,
  output acc_t               sm_x     [B],
  input  acc_t               sm_m,
  input  acc_t               sm_l,
  input  acc_t               sm_alpha,
  input  acc_t               sm_p     [B],
  // reduction unit
  output logic               red_valid,
  output red_mode_e          red_mode,
  output acc_t               red_alpha,
  output acc_t               red_v1   [H],
  output acc_t               red_v2   [H],
  input  acc_t               red_out  [H]
);

  localparam int QK_BEATS = H / MACS;
  localparam int SV_BEATS = B / MACS;

  typedef enum logic [3:0] {
    C_IDLE, C_WAIT, C_QK_RD, C_QK, C_QK_W, C_SM_W, C_SV_RD, C_SV, C_SV_W, C_NEXT
  } cstate_e;

  // block table
  logic [15:0]   tbl_id  [2**TW];
  logic [NW-1:0] tbl_n   [2**TW];

  always_ff @(posedge clk)
    if (tbl_we) begin
      tbl_id[tbl_idx] <= tbl_blk;
      tbl_n[tbl_idx]  <= tbl_ntok;
    end

  // ---------------------------------------------------------------- loader
  logic          ld_act;                 // a load is being requested
  logic [TW-1:0] ld_blk;                 // next block to request
  logic          ld_ph;                  // 0: K rows, 1: V rows
  logic [NW-1:0] ld_row;
  logic [TW-1:0] rs_blk;                 // block of the next response
  logic          rs_ph;
  logic [NW-1:0] rs_row;
  logic [1:0]    slot_busy, slot_ready;
  logic [TW-1:0] c_blk;
  logic          run;
  logic          ld_slot_free;

  assign ld_slot_free = !slot_busy[ld_blk[0]];
  assign rd_req   = run && (ld_blk < n_blocks) && (ld_act || ld_slot_free);
  assign rd_addr  = (ld_ph ? v_base : k_base) + AW'(tbl_id[ld_blk]) * AW'(B) + AW'(ld_row);
  assign mem_idle = !rd_req;

  assign cb_we    = rd_rsp_valid;
  assign cb_waddr = CBA'({rs_blk[0], rs_ph});
  assign cb_wseg  = RW'(rs_row);
  assign cb_wdata = rd_rsp_data;

  // --------------------------------------------------------------- compute
  cstate_e       cs;
  logic [7:0]    beat;
  logic          fin_c;    // compute finished block c_blk this cycle

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; ld_act <= 1'b0; ld_blk <= '0; ld_ph <= 1'b0; ld_row <= '0;
      rs_blk <= '0; rs_ph <= 1'b0; rs_row <= '0;
      slot_busy <= '0; slot_ready <= '0;
      cs <= C_IDLE; beat <= '0; c_blk <= '0; done <= 1'b0;
      stall_cycles <= '0; overlap_cycles <= '0;
    end else begin
      done <= 1'b0;
      // request side
      if (rd_req && rd_gnt) begin
        if (!ld_act) begin
          ld_act <= 1'b1;
          slot_busy[ld_blk[0]] <= 1'b1;
        end
        if (ld_row == tbl_n[ld_blk] - 1'b1) begin
          ld_row <= '0;
          if (ld_ph) begin
            ld_ph  <= 1'b0;
            ld_act <= 1'b0;
            ld_blk <= ld_blk + 1'b1;
          end else ld_ph <= 1'b1;
        end else ld_row <= ld_row + 1'b1;
      end
      // response side
      if (rd_rsp_valid) begin
        if (rs_row == tbl_n[rs_blk] - 1'b1) begin
          rs_row <= '0;
          if (rs_ph) begin
            rs_ph <= 1'b0;
            rs_blk <= rs_blk + 1'b1;
            slot_ready[rs_blk[0]] <= 1'b1;
          end else rs_ph <= 1'b1;
        end else rs_row <= rs_row + 1'b1;
      end
      if (fin_c) begin
        slot_busy[c_blk[0]]  <= 1'b0;
        slot_ready[c_blk[0]] <= 1'b0;
      end
      if (cs != C_IDLE && cs != C_WAIT && rd_req) overlap_cycles <= overlap_cycles + 1;

      unique case (cs)
        C_IDLE: if (start) begin
          run <= 1'b1; ld_blk <= '0; ld_ph <= 1'b0; ld_row <= '0; ld_act <= 1'b0;
          rs_blk <= '0; rs_ph <= 1'b0; rs_row <= '0; c_blk <= '0;
          slot_busy <= '0; slot_ready <= '0;
          cs <= (n_blocks == 0) ? C_NEXT : C_WAIT;
        end
        C_WAIT: if (slot_ready[c_blk[0]]) cs <= C_QK_RD;
                else stall_cycles <= stall_cycles + 1;
        C_QK_RD: begin cs <= C_QK; beat <= '0; end
        C_QK: begin
          beat <= beat + 1'b1;
          if (int'(beat) == QK_BEATS - 1) cs <= C_QK_W;
        end
        C_QK_W:  cs <= C_SM_W;
        C_SM_W:  cs <= C_SV_RD;
        C_SV_RD: begin cs <= C_SV; beat <= '0; end
        C_SV: begin
          beat <= beat + 1'b1;
          if (int'(beat) == SV_BEATS - 1) cs <= C_SV_W;
        end
        C_SV_W: begin
          c_blk <= c_blk + 1'b1;
          cs    <= (c_blk + 1'b1 == n_blocks) ? C_NEXT : C_WAIT;
        end
        C_NEXT: begin
          // one cycle for the reduction unit to register the last O
          run  <= 1'b0;
          done <= 1'b1;
          cs   <= C_IDLE;
        end
        default: cs <= C_IDLE;
      endcase
    end
  end

  assign fin_c = (cs == C_SV_W);
  assign busy  = (cs != C_IDLE);

  // ----------------------------------------------------- datapath operands
  always_comb begin
    cb_re    = (cs == C_QK_RD) || (cs == C_SV_RD);
    cb_raddr = CBA'({c_blk[0], (cs == C_SV_RD)});
    mu_valid = (cs == C_QK) || (cs == C_SV);
    mu_clear = (beat == '0);
    for (int k = 0; k < MACS; k++) mu_a[k] = '0;
    for (int n = 0; n < NUM_FPU; n++)
      for (int k = 0; k < MACS; k++) mu_w[n][k] = '0;
    // operand selection per beat with constant slices (a beat-indexed
    // multiplexer rather than a variable shifter over the whole tile)
    if (cs == C_QK) begin
      for (int b = 0; b < QK_BEATS; b++)
        if (int'(beat) == b)
          for (int k = 0; k < MACS; k++) begin
            mu_a[k] = acc_t'(q[b * MACS + k]) <<< 8;
            for (int n = 0; n < B; n++)
              mu_w[n][k] = cb_rdata[n * ROW_W + (b * MACS + k) * 16 +: 16];
          end
    end else if (cs == C_SV) begin
      for (int b = 0; b < SV_BEATS; b++)
        if (int'(beat) == b)
          for (int k = 0; k < MACS; k++) begin
            mu_a[k] = sm_p[b * MACS + k];
            for (int n = 0; n < H; n++)
              mu_w[n][k] = cb_rdata[(b * MACS + k) * ROW_W + n * 16 +: 16];
          end
    end
    sm_valid  = (cs == C_QK_W);
    sm_first  = (c_blk == '0);
    sm_nvalid = tbl_n[c_blk];
    for (int n = 0; n < B; n++) sm_x[n] = mu_acc[n];
    red_valid = (cs == C_SV_W);
    red_mode  = RED_SCALE;
    red_alpha = sm_alpha;
    for (int n = 0; n < H; n++) begin
      red_v1[n] = red_out[n];
      red_v2[n] = mu_acc[n];
    end
  end

  // ------------------------------------------------------------- results
  logic empty_run;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) empty_run <= 1'b1;
    else if (start && cs == C_IDLE) empty_run <= (n_blocks == 0);

  always_comb begin
    for (int n = 0; n < H; n++) part_o[n] = empty_run ? '0 : red_out[n];
    part_m = empty_run ? FX_NEGINF : sm_m;
    part_l = empty_run ? '0 : sm_l;
  end

  initial begin
    assert (B <= NUM_FPU && H <= NUM_FPU) else $error("matrix unit too small");
    assert (H % MACS == 0 && B % MACS == 0) else $error("H and B must be multiples of MACS");
  end

endmodule
