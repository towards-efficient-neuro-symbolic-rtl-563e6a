// vsa_sram: local memory of one tile.
//
// Holds the seed folds of the codebooks and any vector written back by the
// pipeline. One write port and one read port, both synchronous: a read issued
// in cycle t (re=1) shows its word on rdata from cycle t+1 and holds it until
// the next read, so rdata is the tile's output register (REG). A write in
// cycle t is visible to a read issued in cycle t+1. A read and a write to the
// same address in the same cycle return the old word.
//
// Following the published architecture this is the per-tile SRAM; its size
// (1024 words of 512 bits, 64 KB, so 512 KB over 8 tiles) follows the
// published memory capacity. It is written as an array, which a memory
// compiler macro would replace; the port arrangement is this design's choice.
module vsa_sram #(
  parameter int unsigned W     = vsa_pkg::W_DEF,
  parameter int unsigned DEPTH = vsa_pkg::DEPTH_DEF,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
