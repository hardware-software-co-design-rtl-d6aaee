// device_router: entry of external KV cache traffic into the router NoC.
//
// When a request's prefill KV cache arrives (or a newly generated K/V vector
// is appended), the host names the destination PE chosen by the block
// allocator, the local block id, the token slot in the block and whether
// the row is a key or a value. The device router turns this into the DRAM
// word address inside that PE, base + block*B + slot (base = K or V tensor
// base, set by the global controller), and sends one router-NoC flit
// {dst x, dst y, address, row} into the mesh at PE(0,0)'s north port.
// One row per cycle; a one-entry output register decouples the host from
// NoC back-pressure (kv_ready low while the register is full and blocked).
// The paper names the device router and its role (external interconnect to
// router NoC, KV cache delivery); the address formation here follows the
// paper's fixed-base KV tensor layout, everything else is this design's.
// Tensor/pipeline/expert-parallel traffic is not modelled.
module device_router #(
  parameter int MESH  = 4,
  parameter int B     = 64,
  parameter int AW    = 32,
  parameter int ROW_W = 2048,
  localparam int CRD  = (MESH > 1) ? $clog2(MESH) : 1,
  localparam int RFW  = 2 * CRD + AW + ROW_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [AW-1:0]    k_base,
  input  logic [AW-1:0]    v_base,
  input  logic             kv_valid,
  input  logic [CRD-1:0]   kv_pe_x,
  input  logic [CRD-1:0]   kv_pe_y,
  input  logic [15:0]      kv_block,
  input  logic [15:0]      kv_slot,
  input  logic             kv_is_v,
  input  logic [ROW_W-1:0] kv_row,
  output logic             kv_ready,
  output logic             out_valid,
  output logic [RFW-1:0]   out_data,
  input  logic             out_ready,
  output logic [31:0]      rows_sent
);

  logic [AW-1:0] addr;
  assign addr     = (kv_is_v ? v_base : k_base) + AW'(kv_block) * AW'(B) + AW'(kv_slot);
  assign kv_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      rows_sent <= '0;
    end else begin
      if (out_valid && out_ready) rows_sent <= rows_sent + 1;
      if (kv_ready) begin
        out_valid <= kv_valid;
        if (kv_valid) out_data <= {kv_row, addr, kv_pe_y, kv_pe_x};
      end
    end
  end

endmodule
