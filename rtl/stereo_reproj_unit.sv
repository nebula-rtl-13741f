// stereo_reproj_unit -- stereo re-projection unit (SRU) of a VRC.
//
// While a left-eye tile T_N is rendered, every broadcast Gaussian produces 16
// alpha-check results, one per rendering unit. If any pixel of the tile
// blended the Gaussian, it will also contribute to the right-eye image, and
// the SRU re-projects it by triangulation: its disparity d = B*f/D (computed
// once per Gaussian by the projection unit, bounded below 16 px by the near
// plane) moves it k = floor(d / 4 px) tiles to the right, k in 0..3. The SRU
// writes it into stereo-buffer row 3-k, i.e. into list T_N - T_(N+k). When
// the tile's list is finished (`close_list`), it appends an end-of-list mark
// to every row, closing the four lists of T_N.
//
// Lists are only kept for right-eye tiles 3 .. tiles_w-1: the first three
// right-eye tiles of a tile row are rendered on their own, and tiles past the
// right edge do not exist, so entries and marks aimed at them are not written.
//
// Interface: `g_valid`/`g` is the Gaussian presented to the RUs, `used_vec`
// their alpha-check results in the same cycle, `stereo_en` enables the unit
// (left-eye tiles only). Writes leave one cycle later through `sb_wr_en` /
// `sb_wr_data`. When a row has only the room kept for end-of-list marks left,
// a Gaussian aimed at it is dropped and counted in `drop_count` (the list
// then misses it); end-of-list marks are never dropped.
//
// Follows the published SRU (OR of alpha checks, disparity, one of four
// lists) and the start of stereo rendering at the fourth tile. The
// floor-to-tile rule, the drop policy and the one-cycle write latency are
// this design's choices.
module stereo_reproj_unit
  import nebula_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               stereo_en,
  input  logic [15:0]        tile_x,      // N: column of the left-eye tile
  input  logic [15:0]        tiles_w,     // tiles per tile row
  input  logic               g_valid,
  input  rast_gauss_t        g,
  input  logic [M_RU-1:0]    used_vec,
  input  logic               close_list,  // pulse: tile T_N finished
  output logic [SB_ROWS-1:0] sb_wr_en,
  output sb_entry_t          sb_wr_data,
  input  logic [SB_ROWS-1:0] sb_full,
  input  logic [SB_ROWS-1:0] sb_near_full,
  output logic [31:0]        write_count, // Gaussians written
  output logic [31:0]        drop_count   // Gaussians dropped (row nearly full)
);

  logic [SB_ROWS-1:0] wr_q;
  sb_entry_t          data_q;

  function automatic logic target_ok(input logic [15:0] n, input logic [1:0] k,
                                     input logic [15:0] w);
    logic [16:0] tgt;
    tgt = 17'(n) + 17'(k);
    return (tgt >= 17'd3) && (tgt < 17'(w));
  endfunction

  logic [1:0] k;
  assign k = disp_tiles(g.disp);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q   <= '0;
      data_q <= '0;
    end else begin
      wr_q <= '0;
      if (stereo_en && close_list) begin
        data_q <= '{eol: 1'b1, g: '0};
        for (int r = 0; r < SB_ROWS; r++)
          wr_q[r] <= target_ok(tile_x, 2'(SB_ROWS - 1 - r), tiles_w);
      end else if (stereo_en && g_valid && (|used_vec)) begin
        data_q <= '{eol: 1'b0, g: g};
        if (target_ok(tile_x, k, tiles_w)) wr_q[2'(SB_ROWS - 1) - k] <= 1'b1;
      end
    end
  end

  // A Gaussian needs a free slot beyond the reserve kept for end-of-list marks.
  assign sb_wr_en   = data_q.eol ? (wr_q & ~sb_full) : (wr_q & ~sb_near_full);
  assign sb_wr_data = data_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      write_count <= '0;
      drop_count  <= '0;
    end else if (!data_q.eol && (|wr_q)) begin
      if (|(wr_q & sb_near_full)) drop_count  <= drop_count + 1;
      else                        write_count <= write_count + 1;
    end
  end

endmodule
