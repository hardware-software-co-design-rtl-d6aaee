// noc_router: five-port router of a 2D mesh.
//
// Each PE holds two of these, one in the router NoC (KV cache and external
// traffic from the device router) and one in the inter-PE NoC (partial-sum
// exchange). Ports: 0 local, 1 north (row x-1), 2 south (row x+1),
// 3 west (column y-1), 4 east (column y+1); PE(x, y) sits in row x, column y.
// A flit is one DW-bit packet whose low 2*CW bits hold the destination
// (row in [CW-1:0], column in [2*CW-1:CW]).
// Routing is dimension order, X (rows) first, then Y (columns); each input
// has a two-entry FIFO and each output a round-robin arbiter. Handshake is
// valid/ready on every port; a flit moves when both are high. in_ready
// depends only on FIFO state, so routers can be chained without
// combinational loops. One cycle per hop when uncontended. The router's
// own position comes in on pos_x/pos_y (strap inputs).
// The paper specifies mesh topology and two independent NoCs only; flit
// format, routing and buffering are this design's choices.
module noc_router #(
  parameter int MESH = 4,
  parameter int DW   = 64,
  localparam int CW  = (MESH > 1) ? $clog2(MESH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] pos_x,     // this router's mesh row
  input  logic [CW-1:0] pos_y,     // this router's mesh column
  input  logic          in_valid  [5],
  input  logic [DW-1:0] in_data   [5],
  output logic          in_ready  [5],
  output logic          out_valid [5],
  output logic [DW-1:0] out_data  [5],
  input  logic          out_ready [5]
);

  // input FIFOs, two entries each
  logic [DW-1:0] fifo [5][2];
  logic [1:0]    cnt  [5];
  logic          rd_ptr [5];
  logic          wr_ptr [5];
  logic [DW-1:0] head [5];
  logic [2:0]    dir  [5];   // requested output port of each head
  logic          pop  [5];

  // round-robin state per output
  logic [2:0]    rr   [5];
  logic [2:0]    sel  [5];
  logic          gnt_v[5];

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      logic [CW-1:0] dx, dy;
      head[i]     = fifo[i][rd_ptr[i]];
      dx          = head[i][CW-1:0];
      dy          = head[i][2*CW-1:CW];
      if (dx < pos_x)      dir[i] = 3'd1;
      else if (dx > pos_x) dir[i] = 3'd2;
      else if (dy < pos_y) dir[i] = 3'd3;
      else if (dy > pos_y) dir[i] = 3'd4;
      else                   dir[i] = 3'd0;
    end
    for (int o = 0; o < 5; o++) begin
      gnt_v[o] = 1'b0;
      sel[o]   = '0;
      for (int k = 0; k < 5; k++) begin
        logic [2:0] i;
        i = 3'((int'(rr[o]) + k) % 5);
        if (!gnt_v[o] && cnt[i] != 2'd0 && dir[i] == 3'(o)) begin
          gnt_v[o] = 1'b1;
          sel[o]   = i;
        end
      end
      out_valid[o] = gnt_v[o];
      out_data[o]  = head[sel[o]];
    end
  end

  // ready toward upstream depends on FIFO state only
  for (genvar i = 0; i < 5; i++) begin : g_rdy
    assign in_ready[i] = (cnt[i] != 2'd2);
  end

  always_comb begin
    for (int i = 0; i < 5; i++) pop[i] = 1'b0;
    for (int o = 0; o < 5; o++)
      if (gnt_v[o] && out_ready[o]) pop[sel[o]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        cnt[i] <= '0; rd_ptr[i] <= 1'b0; wr_ptr[i] <= 1'b0; rr[i] <= '0;
      end
    end else begin
      for (int i = 0; i < 5; i++) begin
        logic push;
        push = in_valid[i] && in_ready[i];
        if (push) begin
          fifo[i][wr_ptr[i]] <= in_data[i];
          wr_ptr[i] <= ~wr_ptr[i];
        end
        if (pop[i]) rd_ptr[i] <= ~rd_ptr[i];
        cnt[i] <= cnt[i] + 2'(push) - 2'(pop[i]);
      end
      for (int o = 0; o < 5; o++)
        if (gnt_v[o] && out_ready[o]) rr[o] <= (sel[o] == 3'd4) ? 3'd0 : sel[o] + 3'd1;
    end
  end

  // a flit never leaves toward the port it would have to come back from
  // and FIFOs never overflow
  for (genvar i = 0; i < 5; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) cnt[i] <= 2'd2);
  end

endmodule
