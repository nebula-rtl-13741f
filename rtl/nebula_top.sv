// nebula_top -- client-side stereo 3D Gaussian splatting accelerator.
//
// The client receives, per frame, the Gaussians the cloud's level-of-detail
// search selected, compressed. This top renders them into a left-eye and a
// right-eye image, tile by tile, and re-uses the left eye's work for the right
// eye. Data flow:
//
//   compressed stream -> gauss_decoder (codebook look-up, fixed-point widening)
//     -> 4 x projection_unit (round-robin; view transform, projection, cull
//        against the widened two-eye field of view)
//     -> global_double_buffer, half "wr" (one frame being loaded)
//   global_double_buffer, half "rd" (the frame being rendered)
//     -> 4 x sorting_unit (per-tile depth-sorted lists; unit s serves VRCs
//        2s and 2s+1)
//     -> 8 x vrc (tile rows handed to idle cores in row-major order; inside a
//        core the left tile is followed by the right tile rendered from the
//        stereo buffer)
//     -> tile output stream (16 pixels, eye and tile coordinates), towards DRAM.
//
// Frames are double buffered: once a frame is fully loaded and the previous
// one has finished rendering, the halves swap, rendering starts and the
// loader accepts the next frame at once, so loading and rendering overlap.
//
// Interface: `cam` and `alpha_th` are constant over a frame; the codebook is
// written through `cb_wr_*`; the compressed Gaussians of a frame arrive on
// `g_*` (valid/ready, `g_last` on the final one; a frame with no Gaussians is
// not supported); finished tiles leave on `tile_*` (valid/ready);
// `frame_done` pulses when the last tile of a frame has been handed out.
// The counters report the events the pipeline went through.
//
// Follows the published organisation (decoder with codebook, four projection
// units, four sorting units, 144 KB global double buffer, eight VRCs of 4x4
// RUs with stereo augmentation, row-major tile order). The frame hand-shake,
// the VRC-to-sorter pairing, the row dispatch and the output arbitration are
// this design's choices. DRAM is outside: the two streams are its ports.
module nebula_top
  import nebula_pkg::*;
#(
  parameter int unsigned W_PX       = IMG_W,
  parameter int unsigned H_PX       = IMG_H,
  parameter int unsigned NVRC       = N_VRC,
  parameter int unsigned NSU        = N_SU,
  parameter int unsigned NPU        = N_PU,
  parameter int unsigned GB_BYTES   = GBUF_BYTES,
  parameter int unsigned FB_DEPTH   = FB_BYTES * 8 / RAST_BITS,
  parameter int unsigned CB_ENTRIES = 256,
  localparam int unsigned TILES_W   = W_PX / TILE,
  localparam int unsigned TILES_H   = H_PX / TILE,
  localparam int unsigned GB_DEPTH  = GB_BYTES / 2 * 8 / PROJ_BITS,
  localparam int unsigned GAW       = $clog2(GB_DEPTH),
  localparam int unsigned VPS       = NVRC / NSU
) (
  input  logic         clk,
  input  logic         rst_n,
  input  cam_t         cam,
  input  logic [7:0]   alpha_th,
  // codebook load
  input  logic         cb_wr_en,
  input  logic [$clog2(CB_ENTRIES)-1:0] cb_wr_addr,
  input  rgb_t         cb_wr_data,
  // compressed Gaussian stream (from DRAM)
  input  logic         g_valid,
  output logic         g_ready,
  input  comp_gauss_t  g_data,
  input  logic         g_last,
  // rendered tiles (to DRAM)
  output logic         tile_valid,
  input  logic         tile_ready,
  output logic         tile_right,
  output logic [15:0]  tile_tx,
  output logic [15:0]  tile_ty,
  output rgb_t         tile_px [M_RU],
  output logic         frame_done,
  // event counters
  output logic [31:0]  n_frames,
  output logic [31:0]  n_swaps,
  output logic [31:0]  n_overlap_cycles,   // loading while rendering
  output logic [31:0]  n_culled,
  output logic [31:0]  n_gbuf_drops,       // frame larger than a buffer half
  output logic [31:0]  n_sort_overflows,
  output logic [31:0]  n_left_tiles,
  output logic [31:0]  n_indep_tiles,
  output logic [31:0]  n_stereo_tiles,
  output logic [31:0]  n_sru_writes,
  output logic [31:0]  n_sru_drops,
  output logic [31:0]  n_merge_dups,
  output logic [31:0]  n_left_bcast,
  output logic [31:0]  n_right_bcast
);

  // =================== loader: decoder and projection =====================
  logic        last_seen, load_done;
  logic        dec_in_ready, dec_valid, dec_ready;
  dec_gauss_t  dec_data;
  logic        take_in;

  assign g_ready = dec_in_ready && !last_seen && !load_done;
  assign take_in = g_valid && g_ready;

  gauss_decoder #(.CB_ENTRIES(CB_ENTRIES)) u_dec (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (g_valid && !last_seen && !load_done),
    .in_ready   (dec_in_ready),
    .in_data    (g_data),
    .out_valid  (dec_valid),
    .out_ready  (dec_ready),
    .out_data   (dec_data),
    .cb_wr_en   (cb_wr_en),
    .cb_wr_addr (cb_wr_addr),
    .cb_wr_data (cb_wr_data)
  );

  logic [NPU-1:0]         pu_in_ready, pu_out_valid, pu_out_ready;
  proj_gauss_t            pu_out [NPU];
  logic [31:0]            pu_cull [NPU];
  logic [$clog2(NPU)-1:0] pu_rr, pu_wr_rr;

  assign dec_ready = pu_in_ready[pu_rr];

  for (genvar p = 0; p < NPU; p++) begin : g_pu
    projection_unit #(.W_PX(W_PX), .H_PX(H_PX)) u_pu (
      .clk        (clk),
      .rst_n      (rst_n),
      .cam        (cam),
      .in_valid   (dec_valid && pu_rr == p),
      .in_ready   (pu_in_ready[p]),
      .in_data    (dec_data),
      .out_valid  (pu_out_valid[p]),
      .out_ready  (pu_out_ready[p]),
      .out_data   (pu_out[p]),
      .cull_count (pu_cull[p])
    );
  end

  // one projected Gaussian per cycle into the buffer, round-robin
  logic                    wr_sel_v;
  logic [$clog2(NPU)-1:0]  wr_sel;
  always_comb begin
    wr_sel_v = 1'b0;
    wr_sel   = '0;
    for (int k = 0; k < NPU; k++) begin
      int unsigned c;
      c = (int'(pu_wr_rr) + k) % NPU;
      if (!wr_sel_v && pu_out_valid[c]) begin
        wr_sel_v = 1'b1;
        wr_sel   = c[$clog2(NPU)-1:0];
      end
    end
    pu_out_ready = '0;
    if (wr_sel_v) pu_out_ready[wr_sel] = 1'b1;
  end

  logic           wr_half, rd_half;
  logic [GAW:0]   wr_count, n_gauss_r;

  logic drained;
  assign drained = last_seen && !dec_valid && (&pu_in_ready);

  // =================== global double buffer ================================
  logic [NSU-1:0] gb_rd_en;
  logic [GAW-1:0] gb_rd_addr [NSU];
  proj_gauss_t    gb_rd_data [NSU];

  global_double_buffer #(.BYTES(GB_BYTES), .N_RD(NSU)) u_gbuf (
    .clk     (clk),
    .wr_half (wr_half),
    .wr_en   (wr_sel_v && wr_count < (GAW+1)'(GB_DEPTH)),
    .wr_addr (wr_count[GAW-1:0]),
    .wr_data (pu_out[wr_sel]),
    .rd_half (rd_half),
    .rd_en   (gb_rd_en),
    .rd_addr (gb_rd_addr),
    .rd_data (gb_rd_data)
  );

  // =================== frame control =======================================
  logic           render_busy, rows_all;
  logic [15:0]    next_row;
  logic [NVRC-1:0] v_row_ready, v_row_valid, v_row_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_seen        <= 1'b0;
      load_done        <= 1'b0;
      pu_rr            <= '0;
      pu_wr_rr         <= '0;
      wr_half          <= 1'b0;
      rd_half          <= 1'b1;
      wr_count         <= '0;
      n_gauss_r        <= '0;
      render_busy      <= 1'b0;
      rows_all         <= 1'b0;
      next_row         <= '0;
      frame_done       <= 1'b0;
      n_frames         <= '0;
      n_swaps          <= '0;
      n_overlap_cycles <= '0;
      n_gbuf_drops     <= '0;
    end else begin
      frame_done <= 1'b0;
      if (take_in && g_last) last_seen <= 1'b1;
      if (dec_valid && dec_ready) pu_rr <= (pu_rr == $clog2(NPU)'(NPU - 1)) ? '0 : pu_rr + 1'b1;
      if (wr_sel_v) begin
        pu_wr_rr <= (wr_sel == $clog2(NPU)'(NPU - 1)) ? '0 : wr_sel + 1'b1;
        if (wr_count < (GAW+1)'(GB_DEPTH)) wr_count <= wr_count + 1'b1;
        else                               n_gbuf_drops <= n_gbuf_drops + 1;
      end
      if (drained && !load_done) load_done <= 1'b1;
      if (render_busy && (last_seen || !g_ready)) n_overlap_cycles <= n_overlap_cycles + 1;
      // swap halves: frame loaded and renderer idle
      if (load_done && !render_busy) begin
        rd_half     <= wr_half;
        wr_half     <= ~wr_half;
        n_gauss_r   <= wr_count;
        wr_count    <= '0;
        load_done   <= 1'b0;
        last_seen   <= 1'b0;
        render_busy <= 1'b1;
        rows_all    <= 1'b0;
        next_row    <= '0;
        n_swaps     <= n_swaps + 1;
      end else if (render_busy) begin
        if (|v_row_valid) begin
          if (next_row == 16'(TILES_H - 1)) rows_all <= 1'b1;
          next_row <= next_row + 1'b1;
        end
        if (rows_all && (&v_row_ready) && !(|v_row_valid) && !tile_valid) begin
          render_busy <= 1'b0;
          frame_done  <= 1'b1;
          n_frames    <= n_frames + 1;
        end
      end
    end
  end

  // hand the next tile row to the lowest-numbered idle core
  always_comb begin
    v_row_valid = '0;
    if (render_busy && !rows_all) begin
      for (int v = NVRC - 1; v >= 0; v--)
        if (v_row_ready[v]) begin
          v_row_valid    = '0;
          v_row_valid[v] = 1'b1;
        end
    end
  end

  // =================== sorting units and VRCs ================================
  logic [NVRC-1:0] v_req_valid, v_req_ready, v_req_right, v_in_valid, v_in_ready;
  logic [15:0]     v_req_tx [NVRC];
  logic [15:0]     v_req_ty [NVRC];
  logic [NVRC-1:0] v_tile_valid, v_tile_ready, v_tile_right;
  logic [15:0]     v_tile_tx [NVRC];
  logic [15:0]     v_tile_ty [NVRC];
  rgb_t            v_tile_px [NVRC][M_RU];
  logic [31:0]     c_left [NVRC], c_indep [NVRC], c_stereo [NVRC], c_wr [NVRC],
                   c_drop [NVRC], c_dup [NVRC], c_lb [NVRC], c_rb [NVRC];
  logic [31:0]     s_ovf [NSU];
  sb_entry_t       s_out [NSU];

  for (genvar s = 0; s < NSU; s++) begin : g_su
    logic                    req_ready, out_valid, owner_busy;
    logic [$clog2(VPS+1)-1:0] owner, pick;
    logic                    pick_v;

    // choose one of the VPS cores of this group (lowest index first)
    always_comb begin
      pick_v = 1'b0;
      pick   = '0;
      for (int k = VPS - 1; k >= 0; k--)
        if (v_req_valid[s*VPS + k]) begin
          pick_v = 1'b1;
          pick   = k[$clog2(VPS+1)-1:0];
        end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        owner      <= '0;
        owner_busy <= 1'b0;
      end else begin
        if (req_ready && pick_v) begin
          owner      <= pick;
          owner_busy <= 1'b1;
        end else if (out_valid && v_in_ready[s*VPS + int'(owner)] && s_out[s].eol) begin
          owner_busy <= 1'b0;
        end
      end
    end

    for (genvar k = 0; k < VPS; k++) begin : g_route
      assign v_req_ready[s*VPS + k] = req_ready && pick_v && (pick == k);
      assign v_in_valid[s*VPS + k]  = out_valid && owner_busy && (owner == k);
    end

    sorting_unit #(.LIST_MAX(FB_DEPTH), .GB_DEPTH(GB_DEPTH)) u_su (
      .clk            (clk),
      .rst_n          (rst_n),
      .req_valid      (pick_v),
      .req_ready      (req_ready),
      .req_right      (v_req_right[s*VPS + int'(pick)]),
      .req_tx         (v_req_tx[s*VPS + int'(pick)]),
      .req_ty         (v_req_ty[s*VPS + int'(pick)]),
      .n_gauss        (n_gauss_r),
      .gb_rd_en       (gb_rd_en[s]),
      .gb_rd_addr     (gb_rd_addr[s]),
      .gb_rd_data     (gb_rd_data[s]),
      .out_valid      (out_valid),
      .out_ready      (owner_busy && v_in_ready[s*VPS + int'(owner)]),
      .out_data       (s_out[s]),
      .overflow_count (s_ovf[s])
    );
  end

  for (genvar v = 0; v < NVRC; v++) begin : g_vrc
    vrc #(.TILES_W(TILES_W), .FB_DEPTH(FB_DEPTH)) u_vrc (
      .clk            (clk),
      .rst_n          (rst_n),
      .alpha_th       (alpha_th),
      .row_valid      (v_row_valid[v]),
      .row_ready      (v_row_ready[v]),
      .row_ty         (next_row),
      .row_done       (v_row_done[v]),
      .req_valid      (v_req_valid[v]),
      .req_ready      (v_req_ready[v]),
      .req_right      (v_req_right[v]),
      .req_tx         (v_req_tx[v]),
      .req_ty         (v_req_ty[v]),
      .in_valid       (v_in_valid[v]),
      .in_ready       (v_in_ready[v]),
      .in_data        (s_out[v / VPS]),
      .tile_valid     (v_tile_valid[v]),
      .tile_ready     (v_tile_ready[v]),
      .tile_right     (v_tile_right[v]),
      .tile_tx        (v_tile_tx[v]),
      .tile_ty        (v_tile_ty[v]),
      .tile_px        (v_tile_px[v]),
      .n_left_tiles   (c_left[v]),
      .n_indep_tiles  (c_indep[v]),
      .n_stereo_tiles (c_stereo[v]),
      .n_sru_writes   (c_wr[v]),
      .n_sru_drops    (c_drop[v]),
      .n_merge_dups   (c_dup[v]),
      .n_left_bcast   (c_lb[v]),
      .n_right_bcast  (c_rb[v])
    );
  end

  // =================== tile output arbitration ===============================
  logic [$clog2(NVRC)-1:0] out_rr, out_sel;
  always_comb begin
    tile_valid = 1'b0;
    out_sel    = '0;
    for (int k = 0; k < NVRC; k++) begin
      int unsigned c;
      c = (int'(out_rr) + k) % NVRC;
      if (!tile_valid && v_tile_valid[c]) begin
        tile_valid = 1'b1;
        out_sel    = c[$clog2(NVRC)-1:0];
      end
    end
    v_tile_ready = '0;
    if (tile_valid) v_tile_ready[out_sel] = tile_ready;
    tile_right = v_tile_right[out_sel];
    tile_tx    = v_tile_tx[out_sel];
    tile_ty    = v_tile_ty[out_sel];
    tile_px    = v_tile_px[out_sel];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_rr <= '0;
    else if (tile_valid && tile_ready)
      out_rr <= (out_sel == $clog2(NVRC)'(NVRC - 1)) ? '0 : out_sel + 1'b1;
  end

  // =================== counters =============================================
  always_comb begin
    n_culled = '0; n_sort_overflows = '0;
    n_left_tiles = '0; n_indep_tiles = '0; n_stereo_tiles = '0; n_sru_writes = '0;
    n_sru_drops = '0; n_merge_dups = '0; n_left_bcast = '0; n_right_bcast = '0;
    for (int p = 0; p < NPU; p++) n_culled = n_culled + pu_cull[p];
    for (int s = 0; s < NSU; s++) n_sort_overflows = n_sort_overflows + s_ovf[s];
    for (int v = 0; v < NVRC; v++) begin
      n_left_tiles   = n_left_tiles   + c_left[v];
      n_indep_tiles  = n_indep_tiles  + c_indep[v];
      n_stereo_tiles = n_stereo_tiles + c_stereo[v];
      n_sru_writes   = n_sru_writes   + c_wr[v];
      n_sru_drops    = n_sru_drops    + c_drop[v];
      n_merge_dups   = n_merge_dups   + c_dup[v];
      n_left_bcast   = n_left_bcast   + c_lb[v];
      n_right_bcast  = n_right_bcast  + c_rb[v];
    end
  end

endmodule
