// global_double_buffer -- the 144 KB global double buffer between the
// projection stage and the sorting/rendering stage.
//
// Two halves of 72 KB each. While the projection units fill one half with the
// projected Gaussians of the next frame, the sorting units read the other half
// to build per-tile lists for the current frame; the top swaps the halves
// between frames. With this design's 168-bit projected record a half holds
// 73728 * 8 / 168 = 3510 Gaussians.
//
// Ports: one synchronous write port into half `wr_half`; N_RD independent
// synchronous read ports into half `rd_half` (data the cycle after the read
// enable), one per sorting unit. Reading and writing the same half at once is
// a protocol error (assertion). The published design gives the capacity and
// the double buffering; the port count and record are this design's choice.
module global_double_buffer
  import nebula_pkg::*;
#(
  parameter int unsigned BYTES = GBUF_BYTES,
  parameter int unsigned N_RD  = N_SU,
  parameter int unsigned DEPTH = BYTES / 2 * 8 / PROJ_BITS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_half,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  proj_gauss_t   wr_data,
  input  logic          rd_half,
  input  logic [N_RD-1:0] rd_en,
  input  logic [AW-1:0] rd_addr [N_RD],
  output proj_gauss_t   rd_data [N_RD]
);

  // both halves in one array: entry {half, addr} at half * DEPTH + addr
  localparam int unsigned MW = $clog2(2 * DEPTH);
  proj_gauss_t mem [2 * DEPTH];

  function automatic logic [MW-1:0] loc(input logic half, input logic [AW-1:0] a);
    return half ? MW'(DEPTH) + MW'(a) : MW'(a);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[loc(wr_half, wr_addr)] <= wr_data;
  end

  for (genvar p = 0; p < N_RD; p++) begin : g_rd
    always_ff @(posedge clk) begin
      if (rd_en[p]) rd_data[p] <= mem[loc(rd_half, rd_addr[p])];
    end
  end

  a_halves_apart: assert property (@(posedge clk) !(wr_en && (|rd_en) && (wr_half == rd_half)));

endmodule
