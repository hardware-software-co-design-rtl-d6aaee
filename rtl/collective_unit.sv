// collective_unit: inter-PE combination of tiled-attention partials.
//
// After local tiled attention every PE holds a partial (A, m, l) of the full
// attention output. The attention output vector of H elements is cut into
// MESH*MESH chunks; chunk k = x*MESH + y (CW = H/(MESH*MESH) elements) is
// owned by PE(x, y). Two collective steps follow the paper's flow:
//   1. 2D reduce-scatter: each PE sends chunk k of its partial, with its m
//      and l, to PE k and merges the MESH*MESH - 1 chunks it receives into
//      its own with the reduction version of tiled attention (Eq. 1-2,
//      reduction unit in RED_ATTN mode);
//   2. Y-axis all-gather: each PE sends its merged chunk to the other PEs of
//      its row, so that every PE of row x ends with A_x, the x-th quarter of
//      the full output (the input layout of the output projection).
// The paper implements these collectives with a mesh-specific algorithm it
// cites; this unit sends every chunk point to point over the inter-PE NoC
// (dimension-order routing) instead. Incoming flits are always accepted and
// parked per source, so the exchange cannot deadlock whatever order the PEs
// finish in; flits may arrive before this PE has started.
//
// Flit (inter-PE NoC), LSB first: dst x, dst y, src x, src y (CRD bits
// each), type (0 reduce-scatter, 1 all-gather), m, l, CW data words.
// pos_x/pos_y give the PE's mesh position (strap inputs).
// start takes part_* (held stable only in that cycle); done pulses when a_x
// is complete. The merge uses a chunk-wide reduction unit of its own.
// The chunk counters k_tx/k_mg are one bit wider than a PE index because
// they count up to NPE to mark the end of a phase; indexing the per-source
// arrays with them truncates that bit (a width warning), and every use at
// the value NPE is gated off by the phase tests.
module collective_unit
  import helios_pkg::*;
#(
  parameter int MESH = 4,
  parameter int H    = 128,
  localparam int NPE = MESH * MESH,
  localparam int CW  = H / NPE,
  localparam int CRD = (MESH > 1) ? $clog2(MESH) : 1,
  localparam int FW  = 4 * CRD + 1 + 64 + 32 * CW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CRD-1:0] pos_x,    // mesh row of this PE
  input  logic [CRD-1:0] pos_y,    // mesh column of this PE
  input  logic          start,
  input  acc_t          part_o [H],
  input  acc_t          part_m,
  input  acc_t          part_l,
  output logic          tx_valid,
  output logic [FW-1:0] tx_data,
  input  logic          tx_ready,
  input  logic          rx_valid,
  input  logic [FW-1:0] rx_data,
  output logic          rx_ready,
  output logic          busy,
  output logic          done,
  output acc_t          a_x    [MESH * CW],
  output acc_t          chunk_m,
  output acc_t          chunk_l
);

  localparam int IW   = $clog2(NPE + 1);
  logic [IW-1:0] self_id;   // chunk index owned by this PE
  assign self_id = IW'(pos_x) * IW'(MESH) + IW'(pos_y);

  typedef struct packed {
    logic [CW-1:0][31:0] data;
    logic [31:0]         l;
    logic [31:0]         m;
    logic                ag;
    logic [CRD-1:0]      sy;
    logic [CRD-1:0]      sx;
    logic [CRD-1:0]      dy;
    logic [CRD-1:0]      dx;
  } flit_t;

  flit_t rxf, txf;
  acc_t  part_m_q, part_l_q;   // partial statistics sent with the chunks
  assign rxf      = flit_t'(rx_data);
  assign tx_data  = FW'(txf);
  assign rx_ready = 1'b1;

  // partial held for sending, parked inputs, merge accumulator
  acc_t        own   [H];
  acc_t        rs_d  [NPE][CW];
  acc_t        rs_m  [NPE];
  acc_t        rs_l  [NPE];
  logic [NPE-1:0]  rs_got;
  acc_t        ag_d  [MESH][CW];
  logic [MESH-1:0] ag_got;

  typedef enum logic [2:0] {S_IDLE, S_RS, S_MERGE, S_MWAIT, S_AG, S_WAIT} st_e;
  st_e         st;
  logic [IW-1:0] k_tx;      // next chunk to send in S_RS / column in S_AG
  logic [IW-1:0] k_mg;      // next source to merge
  acc_t        acc_m, acc_l;
  acc_t        acc_d [CW];

  // chunk-wide reduction unit
  logic  r_valid;
  acc_t  r_m, r_l;
  acc_t  r_v1 [CW];
  acc_t  r_v2 [CW];
  acc_t  r_out [CW];
  logic  r_ov;

  reduction_unit #(.LANES(CW)) u_red (
    .clk(clk), .rst_n(rst_n), .in_valid(r_valid), .mode(RED_ATTN), .alpha('0),
    .m1(acc_m), .l1(acc_l), .m2(rs_m[k_mg]), .l2(rs_l[k_mg]),
    .v1(r_v1), .v2(r_v2), .out_valid(r_ov), .m_out(r_m), .l_out(r_l), .out(r_out));

  always_comb begin
    for (int i = 0; i < CW; i++) begin
      r_v1[i] = acc_d[i];
      r_v2[i] = rs_d[k_mg][i];
    end
    r_valid = (st == S_MERGE) && (int'(k_mg) < NPE) && (k_mg != self_id) && rs_got[k_mg];
  end

  // transmit flit
  always_comb begin
    txf    = '0;
    txf.sx = pos_x;
    txf.sy = pos_y;
    tx_valid = 1'b0;
    if (st == S_RS && int'(k_tx) < NPE && k_tx != self_id) begin
      tx_valid = 1'b1;
      txf.dx = CRD'(int'(k_tx) / MESH);
      txf.dy = CRD'(int'(k_tx) % MESH);
      txf.ag = 1'b0;
      txf.m  = part_m_q;
      txf.l  = part_l_q;
      for (int i = 0; i < CW; i++) txf.data[i] = own[int'(k_tx) * CW + i];
    end else if (st == S_AG && int'(k_tx) < MESH && k_tx != IW'(pos_y)) begin
      tx_valid = 1'b1;
      txf.dx = pos_x;
      txf.dy = CRD'(k_tx);
      txf.ag = 1'b1;
      txf.m  = acc_m;
      txf.l  = acc_l;
      for (int i = 0; i < CW; i++) txf.data[i] = acc_d[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; k_tx <= '0; k_mg <= '0; rs_got <= '0; ag_got <= '0; done <= 1'b0;
      acc_m <= FX_NEGINF; acc_l <= '0; part_m_q <= FX_NEGINF; part_l_q <= '0;
    end else begin
      done <= 1'b0;
      // receive side, always ready
      if (rx_valid) begin
        if (rxf.ag) begin
          ag_got[rxf.sy] <= 1'b1;
          for (int i = 0; i < CW; i++) ag_d[rxf.sy][i] <= rxf.data[i];
        end else begin
          rs_got[int'(rxf.sx) * MESH + int'(rxf.sy)] <= 1'b1;
          rs_m[int'(rxf.sx) * MESH + int'(rxf.sy)]   <= rxf.m;
          rs_l[int'(rxf.sx) * MESH + int'(rxf.sy)]   <= rxf.l;
          for (int i = 0; i < CW; i++) rs_d[int'(rxf.sx) * MESH + int'(rxf.sy)][i] <= rxf.data[i];
        end
      end
      unique case (st)
        S_IDLE: if (start) begin
          for (int i = 0; i < H; i++) own[i] <= part_o[i];
          part_m_q <= part_m;
          part_l_q <= part_l;
          acc_m    <= part_m;
          acc_l    <= part_l;
          for (int i = 0; i < CW; i++) acc_d[i] <= part_o[int'(self_id) * CW + i];
          k_tx <= '0;
          k_mg <= '0;
          st   <= S_RS;
        end
        S_RS: begin
          // send one chunk per accepted flit, skipping this PE's own chunk
          if (k_tx == self_id || (tx_valid && tx_ready)) k_tx <= k_tx + 1'b1;
          if (int'(k_tx) >= NPE) st <= S_MERGE;
        end
        S_MERGE: begin
          if (int'(k_mg) >= NPE) begin
            st   <= S_AG;
            k_tx <= '0;
          end else if (k_mg == self_id) k_mg <= k_mg + 1'b1;
          else if (rs_got[k_mg]) st <= S_MWAIT;
        end
        S_MWAIT: begin
          acc_m <= r_m;
          acc_l <= r_l;
          for (int i = 0; i < CW; i++) acc_d[i] <= r_out[i];
          rs_got[k_mg] <= 1'b0;
          k_mg <= k_mg + 1'b1;
          st   <= S_MERGE;
        end
        S_AG: begin
          if (k_tx == IW'(pos_y) || (tx_valid && tx_ready)) k_tx <= k_tx + 1'b1;
          if (int'(k_tx) >= MESH) begin
            for (int i = 0; i < CW; i++) ag_d[pos_y][i] <= acc_d[i];
            st <= S_WAIT;
          end
        end
        S_WAIT: begin
          logic all;
          all = 1'b1;
          for (int c = 0; c < MESH; c++) if (c != int'(pos_y) && !ag_got[c]) all = 1'b0;
          if (all) begin
            done <= 1'b1;
            ag_got <= '0;
            st <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy    = (st != S_IDLE);
  assign chunk_m = acc_m;
  assign chunk_l = acc_l;
  always_comb
    for (int c = 0; c < MESH; c++)
      for (int i = 0; i < CW; i++) a_x[c * CW + i] = ag_d[c][i];

endmodule
