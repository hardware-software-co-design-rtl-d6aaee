// global_controller: command sequencer of the HB-Device.
//
// The host (the block manager on the CPU) drives one command at a time
// through cmd_valid/cmd_ready; cmd_ready is high only when the previous
// command has completed. Commands:
//   CMD_TABLE  write block-table entry cmd_idx of PE cmd_pe (block id, tokens)
//   CMD_NBLK   set the number of blocks PE cmd_pe holds for the request
//   CMD_BASE   set the K and V tensor base addresses (all PEs, device router)
//   CMD_XFER   set the transfer-buffer store mode and threshold (all PEs)
//   CMD_DRAIN  flush every transfer buffer; completes when all are empty
//   CMD_ATTN   start distributed tiled attention on all PEs; completes when
//              every PE has finished the collective exchange
//   CMD_VEC    apply a vector operation on every PE's gathered output
// evt_done pulses when a CMD_DRAIN, CMD_ATTN or CMD_VEC completes.
// The paper says only that a global controller manages the device (and
// tells PEs which MoE experts to compute); the command set is this design's.
module global_controller
  import helios_pkg::*;
#(
  parameter int NPE     = 16,
  parameter int MAX_BLK = 64,
  parameter int B       = 64,
  parameter int AW      = 32,
  parameter int TPW     = 14,
  localparam int PW     = $clog2(NPE),
  localparam int TW     = $clog2(MAX_BLK + 1),
  localparam int NW     = $clog2(B + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // host commands
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  logic [2:0]      cmd_op,
  input  logic [PW-1:0]   cmd_pe,
  input  logic [TW-1:0]   cmd_idx,
  input  logic [15:0]     cmd_blk,
  input  logic [NW-1:0]   cmd_ntok,
  input  logic [AW-1:0]   cmd_k_base,
  input  logic [AW-1:0]   cmd_v_base,
  input  logic            cmd_coarse,
  input  logic [TPW:0]    cmd_threshold,
  input  vec_op_e         cmd_vec_op,
  output logic            evt_done,
  // to the PEs
  output logic [NPE-1:0]  tbl_we,
  output logic [TW-1:0]   tbl_idx,
  output logic [15:0]     tbl_blk,
  output logic [NW-1:0]   tbl_ntok,
  output logic [TW-1:0]   n_blocks [NPE],
  output logic [AW-1:0]   k_base,
  output logic [AW-1:0]   v_base,
  output logic            start,
  output logic            xfer_coarse,
  output logic [TPW:0]    xfer_threshold,
  output logic            xfer_drain,
  output logic            vec_valid,
  output vec_op_e         vec_op,
  input  logic [NPE-1:0]  attn_done,
  input  logic [NPE-1:0]  xfer_empty,
  output logic [31:0]     attn_runs
);

  localparam logic [2:0] CMD_TABLE = 3'd0, CMD_NBLK = 3'd1, CMD_BASE = 3'd2,
                         CMD_XFER  = 3'd3, CMD_DRAIN = 3'd4, CMD_ATTN = 3'd5,
                         CMD_VEC   = 3'd6;

  typedef enum logic [1:0] {G_IDLE, G_ATTN, G_DRAIN} gst_e;
  gst_e           st;
  logic [NPE-1:0] seen;

  assign cmd_ready = (st == G_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; seen <= '0; tbl_we <= '0; tbl_idx <= '0; tbl_blk <= '0; tbl_ntok <= '0;
      for (int p = 0; p < NPE; p++) n_blocks[p] <= '0;
      k_base <= '0; v_base <= '0; start <= 1'b0; xfer_coarse <= 1'b0;
      xfer_threshold <= '0; xfer_drain <= 1'b0; vec_valid <= 1'b0; vec_op <= V_ADD;
      evt_done <= 1'b0; attn_runs <= '0;
    end else begin
      tbl_we    <= '0;
      start     <= 1'b0;
      vec_valid <= 1'b0;
      evt_done  <= 1'b0;
      unique case (st)
        G_IDLE: if (cmd_valid) begin
          unique case (cmd_op)
            CMD_TABLE: begin
              tbl_we[cmd_pe] <= 1'b1;
              tbl_idx  <= cmd_idx;
              tbl_blk  <= cmd_blk;
              tbl_ntok <= cmd_ntok;
            end
            CMD_NBLK: n_blocks[cmd_pe] <= cmd_idx;
            CMD_BASE: begin k_base <= cmd_k_base; v_base <= cmd_v_base; end
            CMD_XFER: begin xfer_coarse <= cmd_coarse; xfer_threshold <= cmd_threshold; end
            CMD_DRAIN: begin xfer_drain <= 1'b1; st <= G_DRAIN; end
            CMD_ATTN: begin start <= 1'b1; seen <= '0; st <= G_ATTN; end
            CMD_VEC: begin vec_valid <= 1'b1; vec_op <= cmd_vec_op; evt_done <= 1'b1; end
            default: ;
          endcase
        end
        G_ATTN: begin
          if ((seen | attn_done) == '1) begin
            st <= G_IDLE;
            evt_done <= 1'b1;
            attn_runs <= attn_runs + 1;
          end
          seen <= seen | attn_done;
        end
        G_DRAIN: if (xfer_empty == '1) begin
          xfer_drain <= 1'b0;
          evt_done   <= 1'b1;
          st         <= G_IDLE;
        end
        default: st <= G_IDLE;
      endcase
    end
  end

endmodule
