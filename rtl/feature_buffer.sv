// feature_buffer -- the 16 KB feature buffer of a volume rendering core. It
// holds the depth-sorted Gaussian list of the tile being rendered: the sorting
// unit's stream is written in order, then the core reads it back one entry per
// cycle and broadcasts each entry to its rendering units.
//
// A simple dual-port SRAM: one synchronous write port and one synchronous read
// port (data valid the cycle after `rd_en`). Depth = bytes / record size,
// 16384 * 8 / 160 = 819 Gaussians with this design's 160-bit record. The
// capacity follows the published 16 KB; the record format is this design's.
module feature_buffer
  import nebula_pkg::*;
#(
  parameter int unsigned BYTES = FB_BYTES,
  parameter int unsigned DEPTH = BYTES * 8 / RAST_BITS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        wr_en,
  input  logic [AW-1:0] wr_addr,
  input  rast_gauss_t wr_data,
  input  logic        rd_en,
  input  logic [AW-1:0] rd_addr,
  output rast_gauss_t rd_data
);

  rast_gauss_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
