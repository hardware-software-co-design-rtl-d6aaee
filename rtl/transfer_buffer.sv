// transfer_buffer: staging of incoming prefill KV cache into local DRAM.
//
// KV rows arriving from the router NoC (DRAM word address + one token row)
// are queued in an SRAM FIFO and written to the PE's DRAM port in one of two
// ways (the paper's fine- and coarse-grained cache store):
//   fine   (coarse = 0): a row is written whenever the DRAM port is idle,
//          using the slack between tile loads of the running computation;
//   coarse (coarse = 1): rows accumulate until the fill level reaches
//          threshold, then the whole content is written as one burst with
//          priority over the computation's loads (flushing = 1).
// drain forces a burst regardless of the threshold (used before the request
// joins the decoding batch). The paper adjusts mode and threshold at run
// time from arrival rate and bandwidth use without giving the rule; here
// both are inputs set by the global controller.
// Interface: in_* valid/ready from the NoC; mem_* is a write request toward
// the DRAM port, granted by mem_gnt in the same cycle; mem_idle says the
// computation does not need the port this cycle.
// Default depth is 2.5 MB of 256-byte rows, the paper's transfer buffer size.
module transfer_buffer #(
  parameter int DEPTH = 10240,
  parameter int ROW_W = 2048,
  parameter int AW    = 32,
  localparam int PW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             coarse,
  input  logic [PW:0]      threshold,
  input  logic             drain,
  input  logic             in_valid,
  input  logic [AW-1:0]    in_addr,
  input  logic [ROW_W-1:0] in_row,
  output logic             in_ready,
  input  logic             mem_idle,
  output logic             mem_req,
  output logic [AW-1:0]    mem_addr,
  output logic [ROW_W-1:0] mem_row,
  input  logic             mem_gnt,
  output logic             flushing,
  output logic             empty,
  output logic [PW:0]      count
);

  logic [AW-1:0] addr_q [DEPTH];
  logic [PW-1:0] wp, rp;
  logic          push, pop, rd_ok;
  logic [ROW_W-1:0] row_q;

  // row storage: registered-read SRAM, prefetched one entry ahead
  sram_buffer #(.WORDS(DEPTH), .SEG_W(ROW_W), .NSEG(1)) u_mem (
    .clk(clk), .we(push), .waddr(wp), .wseg(1'b0), .wdata(in_row),
    .re(1'b1), .raddr(pop ? ((rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1) : rp),
    .rdata(row_q));

  assign in_ready = (count != (PW+1)'(DEPTH));
  assign push     = in_valid && in_ready;
  assign empty    = (count == '0);
  // rd_ok: the SRAM output holds entry rp (not valid the cycle after a write
  // into an empty buffer)
  assign mem_req  = !empty && rd_ok && (flushing || (!coarse && mem_idle));
  assign mem_addr = addr_q[rp];
  assign mem_row  = row_q;
  assign pop      = mem_req && mem_gnt;

  always_ff @(posedge clk) if (push) addr_q[wp] <= in_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0; flushing <= 1'b0; rd_ok <= 1'b0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
      // the row read for the head is valid one cycle after it was written
      // or after the head moved
      rd_ok <= !(push && (count == '0 || (pop && count == 1)));
      if (!flushing && !empty && (drain || (coarse && count >= threshold)))
        flushing <= 1'b1;
      else if (flushing && (count == 1) && pop && !push)
        flushing <= 1'b0;
      else if (flushing && empty)
        flushing <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
