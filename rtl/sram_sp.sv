// Wide single-port SRAM of the memory tile.
//
// DEPTH words of FETCH_W x DATA_W bits (512 x 64 bits by default, the size
// of the reference design's single-port macro). One access per cycle: a write
// when `cen && wen`, a read when `cen && !wen`. Read data appears on `rdata`
// one cycle after the read and holds until the next read, which is the
// one-cycle read delay that the tile's output path compensates for.
// Written as a plain array; a foundry macro with the same ports would replace
// it in an ASIC flow. Contents are not reset.
module sram_sp
  import ub_pkg::*;
#(
  parameter int unsigned DEPTH = SRAM_DEPTH
) (
  input  logic                     clk,
  input  logic                     cen,
  input  logic                     wen,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  vec_t                     wdata,
  output vec_t                     rdata
);

  vec_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (cen) begin
      if (wen) mem[addr] <= wdata;
      else     rdata     <= mem[addr];
    end
  end

endmodule
