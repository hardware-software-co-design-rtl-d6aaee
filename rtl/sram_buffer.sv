// sram_buffer: on-PE SRAM (compute buffer / transfer buffer storage).
//
// A one-read, one-write synchronous memory written as an array. Each word is
// NSEG segments of SEG_W bits; a write fills one segment (for the compute
// buffer a segment is one token's K or V row, a word is a whole KV block
// tile, so the DRAM stream fills a tile row by row while the datapath reads
// whole tiles). The read is registered: rdata shows the word at raddr one
// cycle after re is asserted and holds until the next read. A write and a
// read of the same word in one cycle return the old contents.
// Default size is the paper's 2.5 MB compute buffer: 160 words of 64 rows of
// 128 16-bit elements (16 KB per word). The word organisation is this
// design's choice. Reset does not clear the array, as in an SRAM macro.
module sram_buffer #(
  parameter int WORDS = 160,
  parameter int SEG_W = 2048,
  parameter int NSEG  = 64,
  localparam int AW   = $clog2(WORDS),
  localparam int SW   = (NSEG > 1) ? $clog2(NSEG) : 1
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic [SW-1:0]         wseg,
  input  logic [SEG_W-1:0]      wdata,
  input  logic                  re,
  input  logic [AW-1:0]         raddr,
  output logic [NSEG*SEG_W-1:0] rdata
);

  logic [NSEG-1:0][SEG_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wseg] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
