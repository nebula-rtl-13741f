// gauss_decoder -- decoder for the compressed Gaussians that the client
// receives (the lightweight decoder added next to the projection stage).
//
// The stream codes position and scale as 16-bit fixed point and the colour
// as a vector-quantisation index. The decoder widens position (signed Q10.6
// metres) and scale (unsigned Q6.10 metres) to Q16.16 and looks the colour
// index up in the codebook buffer, which it owns; opacity and id pass through.
//
// Interface: valid/ready stream in (comp_gauss_t) and out (dec_gauss_t); a
// codebook write port (`cb_wr_*`) loads codewords before use. Timing: one
// Gaussian per cycle, one cycle from acceptance to output (the codebook read);
// a stalled output holds the pipeline.
//
// Follows the published scheme (16-bit fixed point for position/scale,
// codebook look-up for the vector-quantised attribute). The formats and the
// choice of colour as the quantised attribute (the published scheme quantises
// spherical-harmonic coefficients; only the view-independent band is kept
// here) are this design's.
module gauss_decoder
  import nebula_pkg::*;
#(
  parameter int unsigned CB_ENTRIES = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  comp_gauss_t  in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output dec_gauss_t   out_data,
  input  logic         cb_wr_en,
  input  logic [$clog2(CB_ENTRIES)-1:0] cb_wr_addr,
  input  rgb_t         cb_wr_data
);

  logic       s1_valid;
  dec_gauss_t s1;
  rgb_t       cb_rd;
  logic       take;

  assign in_ready = !s1_valid || out_ready;
  assign take     = in_valid && in_ready;

  codebook_buffer #(.ENTRIES(CB_ENTRIES)) u_cb (
    .clk     (clk),
    .wr_en   (cb_wr_en),
    .wr_addr (cb_wr_addr),
    .wr_data (cb_wr_data),
    .rd_en   (take),
    .rd_addr (in_data.cb_idx[$clog2(CB_ENTRIES)-1:0]),
    .rd_data (cb_rd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1       <= '0;
    end else if (take) begin
      s1_valid   <= 1'b1;
      s1.id      <= in_data.id;
      s1.pos_x      <= 32'(in_data.pos_x) <<< 10;
      s1.pos_y      <= 32'(in_data.pos_y) <<< 10;
      s1.pos_z      <= 32'(in_data.pos_z) <<< 10;
      s1.sx      <= 32'(in_data.sx) << 6;
      s1.sy      <= 32'(in_data.sy) << 6;
      s1.sz      <= 32'(in_data.sz) << 6;
      s1.opacity <= in_data.opacity;
      s1.color   <= '0;
    end else if (out_ready) begin
      s1_valid <= 1'b0;
    end
  end

  always_comb begin
    out_valid      = s1_valid;
    out_data       = s1;
    out_data.color = cb_rd;
  end

endmodule
