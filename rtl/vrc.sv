// vrc -- volume rendering core with stereo rasterisation.
//
// A VRC renders one tile row of both eyes. Its 16 rendering units (RUs) each
// own one pixel of a 4x4 tile; every Gaussian of the tile's sorted list is
// broadcast to all of them in one cycle. The stereo augmentation lets the
// right eye reuse the left eye's work:
//   * the stereo re-projection unit (SRU) watches the RUs' alpha checks while
//     a left-eye tile T_N is rendered and files every Gaussian that some pixel
//     blended into stereo-buffer list T_N - T_(N+k), k = floor(disparity/4 px);
//   * for right-eye tile T_N the merge unit merges lists T_(N-3)-T_N ..
//     T_N-T_N into one sorted list, which the "Left?" multiplexer feeds to the
//     RUs instead of the feature buffer, so the right eye skips sorting and
//     only sees Gaussians that already passed an alpha check.
//
// Tile order within a row of W tiles (W = TILES_W):
//   R_0, R_1, R_2        right-eye tiles rendered on their own, from lists the
//                        sorting unit builds for the right eye;
//   L_0, L_1, L_2        left-eye tiles (they already feed the stereo buffer);
//   L_3, R_3, L_4, R_4 ... L_(W-1), R_(W-1)
//                        every left tile from the fourth on is followed by the
//                        right tile of the same column, rendered from merged
//                        lists.
//
// Interface: a tile-row command (`row_*`, valid/ready); a request port to a
// sorting unit (`req_*`) and its list stream (`in_*`, closed by an
// end-of-list entry), written into the feature buffer; finished tiles leave
// on `tile_*` (valid/ready), 16 pixels, row-major inside the tile.
// Timing per tile: list length + 2 cycles to load (after the sorting unit's
// own time), list length + 2 to render, 1 to hand the tile out; a merged
// right tile takes one cycle per entry of the four lists plus 2.
//
// Follows the published VRC (M = 16 RUs, 16 KB feature buffer, SRU, merge
// unit, 16 KB stereo buffer in four 4 KB rows, "Left?" input mux, right tiles
// starting from the fourth tile, the first three rendered independently).
// Where the independent right tiles sit in the order, loading the whole list
// before rendering, and the counters are this design's choices.
module vrc
  import nebula_pkg::*;
#(
  parameter int unsigned TILES_W  = IMG_W / TILE,
  parameter int unsigned FB_DEPTH = FB_BYTES * 8 / RAST_BITS,
  parameter int unsigned SB_BANK  = SB_BANK_BYTES,
  localparam int unsigned FAW     = $clog2(FB_DEPTH + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [7:0]      alpha_th,
  // tile-row command
  input  logic            row_valid,
  output logic            row_ready,
  input  logic [15:0]     row_ty,
  output logic            row_done,
  // list request to a sorting unit and the returned list
  output logic            req_valid,
  input  logic            req_ready,
  output logic            req_right,
  output logic [15:0]     req_tx,
  output logic [15:0]     req_ty,
  input  logic            in_valid,
  output logic            in_ready,
  input  sb_entry_t       in_data,
  // finished tiles
  output logic            tile_valid,
  input  logic            tile_ready,
  output logic            tile_right,
  output logic [15:0]     tile_tx,
  output logic [15:0]     tile_ty,
  output rgb_t            tile_px [M_RU],
  // event counters
  output logic [31:0]     n_left_tiles,
  output logic [31:0]     n_indep_tiles,
  output logic [31:0]     n_stereo_tiles,
  output logic [31:0]     n_sru_writes,
  output logic [31:0]     n_sru_drops,
  output logic [31:0]     n_merge_dups,
  output logic [31:0]     n_left_bcast,     // Gaussians broadcast for left tiles
  output logic [31:0]     n_right_bcast     // Gaussians broadcast for merged right tiles
);

  typedef enum logic [1:0] {J_LEFT, J_INDEP, J_STEREO} job_t;
  typedef enum logic [2:0] {S_IDLE, S_REQ, S_LOAD, S_RENDER, S_CLOSE, S_MERGE, S_OUT} state_t;

  localparam int unsigned N_INDEP = (TILES_W < 3) ? TILES_W : 3;
  localparam bit          STEREO  = (TILES_W > 3);

  state_t         state;
  job_t           job;
  logic [15:0]    tx, ty;
  logic [FAW-1:0] n_list, wr_addr, rd_addr;
  logic           rd_v;

  // ---------------- feature buffer ----------------------------------------
  rast_gauss_t fb_rd;
  feature_buffer #(.DEPTH(FB_DEPTH)) u_fb (
    .clk     (clk),
    .wr_en   (state == S_LOAD && in_valid && !in_data.eol),
    .wr_addr (wr_addr[$clog2(FB_DEPTH)-1:0]),
    .wr_data (in_data.g),
    .rd_en   (state == S_RENDER && rd_addr < n_list),
    .rd_addr (rd_addr[$clog2(FB_DEPTH)-1:0]),
    .rd_data (fb_rd)
  );

  // ---------------- stereo buffer, SRU, merge unit --------------------------
  logic [SB_ROWS-1:0] sb_wr_en, sb_full, sb_near_full, sb_empty, sb_pop;
  sb_entry_t          sb_wr_data;
  sb_entry_t          sb_head [SB_ROWS];

  stereo_buffer #(.BANK_BYTES(SB_BANK)) u_sb (
    .clk       (clk),
    .rst_n     (rst_n),
    .wr_en     (sb_wr_en),
    .wr_data   (sb_wr_data),
    .full      (sb_full),
    .near_full (sb_near_full),
    .empty     (sb_empty),
    .head      (sb_head),
    .pop       (sb_pop)
  );

  logic        mg_start, mg_valid, mg_done, mg_busy;
  rast_gauss_t mg_g;
  merge_unit u_merge (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (mg_start),
    .head      (sb_head),
    .empty     (sb_empty),
    .pop       (sb_pop),
    .out_valid (mg_valid),
    .out_g     (mg_g),
    .done      (mg_done),
    .busy      (mg_busy),
    .dup_count (n_merge_dups)
  );

  // ---------------- "Left?" input multiplexer and RUs ----------------------
  logic              bc_valid;
  rast_gauss_t       bc_g;
  logic              right_eye;
  logic              ru_start;
  logic [M_RU-1:0]   used_vec;

  assign right_eye = (job != J_LEFT);
  assign bc_valid  = (job == J_STEREO) ? mg_valid : rd_v;
  assign bc_g      = (job == J_STEREO) ? mg_g     : fb_rd;

  for (genvar i = 0; i < M_RU; i++) begin : g_ru
    rendering_unit u_ru (
      .clk       (clk),
      .rst_n     (rst_n),
      .start     (ru_start),
      .pix_x     (16'((tx << 2) + 16'(i % TILE))),
      .pix_y     (16'((ty << 2) + 16'(i / TILE))),
      .right_eye (right_eye),
      .alpha_th  (alpha_th),
      .g_valid   (bc_valid),
      .g         (bc_g),
      .used      (used_vec[i]),
      .saturated (),
      .color     (tile_px[i])
    );
  end

  logic close_list;
  stereo_reproj_unit u_sru (
    .clk          (clk),
    .rst_n        (rst_n),
    .stereo_en    (STEREO && job == J_LEFT),
    .tile_x       (tx),
    .tiles_w      (16'(TILES_W)),
    .g_valid      (bc_valid),
    .g            (bc_g),
    .used_vec     (used_vec),
    .close_list   (close_list),
    .sb_wr_en     (sb_wr_en),
    .sb_wr_data   (sb_wr_data),
    .sb_full      (sb_full),
    .sb_near_full (sb_near_full),
    .write_count  (n_sru_writes),
    .drop_count   (n_sru_drops)
  );

  // ---------------- controller ---------------------------------------------
  assign row_ready  = (state == S_IDLE);
  assign req_valid  = (state == S_REQ);
  assign req_right  = (job == J_INDEP);
  assign req_tx     = tx;
  assign req_ty     = ty;
  assign in_ready   = (state == S_LOAD);
  assign tile_valid = (state == S_OUT);
  assign tile_right = right_eye;
  assign tile_tx    = tx;
  assign tile_ty    = ty;
  assign close_list = (state == S_CLOSE);
  assign ru_start   = (state == S_REQ && req_ready) || mg_start;
  assign mg_start   = (state == S_OUT && tile_ready && job == J_LEFT && STEREO && tx >= 16'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      job            <= J_LEFT;
      tx             <= '0;
      ty             <= '0;
      n_list         <= '0;
      wr_addr        <= '0;
      rd_addr        <= '0;
      rd_v           <= 1'b0;
      row_done       <= 1'b0;
      n_left_tiles   <= '0;
      n_indep_tiles  <= '0;
      n_stereo_tiles <= '0;
      n_left_bcast   <= '0;
      n_right_bcast  <= '0;
    end else begin
      row_done <= 1'b0;
      rd_v     <= (state == S_RENDER) && (rd_addr < n_list);
      if (mg_valid) n_right_bcast <= n_right_bcast + 1;
      if (job == J_LEFT && rd_v) n_left_bcast <= n_left_bcast + 1;
      unique case (state)
        S_IDLE: if (row_valid) begin
          ty    <= row_ty;
          tx    <= '0;
          job   <= (N_INDEP > 0) ? J_INDEP : J_LEFT;
          state <= S_REQ;
        end
        S_REQ: if (req_ready) begin
          wr_addr <= '0;
          state   <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          if (in_data.eol) begin
            n_list  <= wr_addr;
            rd_addr <= '0;
            state   <= S_RENDER;
          end else if (wr_addr < FAW'(FB_DEPTH)) begin
            wr_addr <= wr_addr + 1'b1;
          end
        end
        S_RENDER: begin
          if (rd_addr < n_list) rd_addr <= rd_addr + 1'b1;
          if (rd_addr >= n_list && !rd_v) state <= S_CLOSE;
        end
        S_CLOSE: state <= S_OUT;
        S_MERGE: if (mg_done) state <= S_OUT;
        S_OUT: if (tile_ready) begin
          unique case (job)
            J_INDEP: begin
              n_indep_tiles <= n_indep_tiles + 1;
              if (tx + 1 < 16'(N_INDEP)) begin
                tx <= tx + 1'b1;
              end else begin
                tx  <= '0;
                job <= J_LEFT;
              end
              state <= S_REQ;
            end
            J_LEFT: begin
              n_left_tiles <= n_left_tiles + 1;
              if (STEREO && tx >= 16'd3) begin
                job   <= J_STEREO;
                state <= S_MERGE;
              end else if (tx + 1 < 16'(TILES_W)) begin
                tx    <= tx + 1'b1;
                state <= S_REQ;
              end else begin
                row_done <= 1'b1;
                state    <= S_IDLE;
              end
            end
            default: begin  // J_STEREO
              n_stereo_tiles <= n_stereo_tiles + 1;
              if (tx + 1 < 16'(TILES_W)) begin
                tx    <= tx + 1'b1;
                job   <= J_LEFT;
                state <= S_REQ;
              end else begin
                row_done <= 1'b1;
                state    <= S_IDLE;
              end
            end
          endcase
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The SRU must never be asked to write a full row.
  a_sb_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(|(sb_wr_en & sb_full)));
  // The merge unit only runs for right-eye tiles that follow a left tile.
  a_merge_in_stereo: assert property (@(posedge clk) disable iff (!rst_n) mg_busy |-> job == J_STEREO);

endmodule
