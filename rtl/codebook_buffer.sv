// codebook_buffer -- SRAM of vector-quantisation codewords used by the
// Gaussian decoder. The stream sent to the client codes each Gaussian's
// colour (view-independent spherical-harmonic band) as an index into this
// table; the table itself is loaded through the write port before a frame.
//
// One synchronous write port and one synchronous read port (data the cycle
// after `rd_en`). The published design names the buffer but not its size;
// 256 entries of 24-bit RGB are this design's choice.
module codebook_buffer
  import nebula_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  rgb_t          wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output rgb_t          rd_data
);

  rgb_t mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
