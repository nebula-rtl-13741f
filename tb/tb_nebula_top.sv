// tb_nebula_top -- end-to-end test of the accelerator on a reduced 32x16
// image (8x4 tiles per eye), three frames back to back.
//
// Each frame is a random set of compressed Gaussians: most in view at depths
// that give disparities across all four stereo-buffer rows, some behind the
// camera or outside the widened field of view. The codebook is loaded first.
// The reference decodes and projects every Gaussian, builds each tile's list
// and renders it (right tiles from the fourth on from the stereo list), and
// every tile of both eyes must come out exactly once per frame with the
// expected pixels. The feature buffer is cut to 12 entries so that lists
// overflow. The camera of a frame is set once the previous frame has been
// swapped in, while that frame is still rendering; the alpha threshold is
// read while rendering, so it stays fixed.
//
// Mechanisms counted (a failure for each that never happens): codebook
// decode, view-frustum culling, survival through the widened field of view
// only, sort-list overflow, independent right tiles, stereo right tiles,
// SRU writes, Gaussians the right eye skipped thanks to the stereo list,
// double-buffer swaps and loading overlapped with rendering.
module tb_nebula_top;
  import nebula_pkg::*;
  import tb_ref_pkg::*;
  import tb_cam_pkg::*;

  localparam int W = 32, H = 16, FBD = 12, NFR = 3;
  localparam int TW = W / TILE, TH = H / TILE;
  localparam real FOCAL = 32.0;

  logic clk = 0, rst_n = 0;
  cam_t cam;
  logic [7:0] alpha_th = 8'd3;
  logic cb_wr_en = 0;
  logic [7:0] cb_wr_addr = 0;
  rgb_t cb_wr_data = '0;
  logic g_valid = 0, g_ready, g_last = 0;
  comp_gauss_t g_data = '0;
  logic tile_valid, tile_ready = 1, tile_right, frame_done;
  logic [15:0] tile_tx, tile_ty;
  rgb_t tile_px [M_RU];
  logic [31:0] n_frames, n_swaps, n_overlap_cycles, n_culled, n_gbuf_drops, n_sort_overflows;
  logic [31:0] n_left_tiles, n_indep_tiles, n_stereo_tiles, n_sru_writes, n_sru_drops;
  logic [31:0] n_merge_dups, n_left_bcast, n_right_bcast;

  nebula_top #(.W_PX(W), .H_PX(H), .FB_DEPTH(FBD)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) tile_ready <= ($urandom_range(0, 5) != 0);

  rgb_t        cbk [256];
  proj_gauss_t vis [NFR][$];
  int          th_of [NFR];
  int          seen [NFR][2][TW][TH];
  int          frame_out = 0;
  int          checks = 0, failures = 0;
  int          m_decode = 0, m_cull = 0, m_widefov = 0, m_stereo_skip = 0;
  int          exp_cull = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tile checker
  always @(posedge clk) begin
    if (rst_n && tile_valid && tile_ready) begin
      automatic rgb_t px [M_RU];
      automatic int nl, ni;
      automatic int f = frame_out;
      checks++;
      if (f >= NFR || int'(tile_tx) >= TW || int'(tile_ty) >= TH) begin
        failures++;
        $display("FAIL stray tile (%0d,%0d,%0d) frame %0d", tile_right, tile_tx, tile_ty, f);
      end else begin
        seen[f][tile_right][tile_tx][tile_ty]++;
        ref_frame_tile(vis[f], tile_right, int'(tile_tx), int'(tile_ty), th_of[f], TW, FBD, px, nl, ni);
        if (tile_right && tile_tx >= 3) m_stereo_skip += ni - nl;
        for (int i = 0; i < M_RU; i++) begin
          checks++;
          if (tile_px[i] !== px[i]) begin
            failures++;
            $display("FAIL frame %0d tile (%0d,%0d,%0d) pixel %0d got %h expected %h",
                     f, tile_right, tile_tx, tile_ty, i, tile_px[i], px[i]);
          end
        end
      end
    end
    if (rst_n && frame_done) frame_out <= frame_out + 1;
  end

  task automatic send(input comp_gauss_t c, input bit last);
    @(negedge clk);
    while ($urandom_range(0, 7) == 0) @(negedge clk);
    g_valid = 1; g_data = c; g_last = last;
    @(posedge clk);
    while (!g_ready) @(posedge clk);
    @(negedge clk);
    g_valid = 0; g_last = 0;
  endtask

  initial begin
    for (int i = 0; i < 256; i++) cbk[i] = rgb_t'(24'($urandom));
    cam = make_cam(W, H, FOCAL, 0.06, 0.0, 0.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      cb_wr_en = 1; cb_wr_addr = 8'(i); cb_wr_data = cbk[i];
    end
    @(negedge clk);
    cb_wr_en = 0;
    for (int f = 0; f < NFR; f++) begin
      automatic int ng = 30 + $urandom_range(0, 30);
      if (f > 0) begin
        while (n_swaps != 32'(f)) @(posedge clk);
        @(negedge clk);
      end
      cam = make_cam(W, H, FOCAL, 0.06, (f == 2) ? 0.02 : 0.0, (f == 1) ? 0.05 : 0.0);
      th_of[f] = int'(alpha_th);
      for (int i = 0; i < ng; i++) begin
        automatic comp_gauss_t c;
        automatic proj_gauss_t p;
        automatic int kind = $urandom_range(0, 9);
        automatic real z = 0.15 + $urandom_range(0, 300) / 100.0;
        automatic real u = $urandom_range(0, W * 10) / 10.0;
        if (kind == 0) z = -1.0;                              // behind the camera
        if (kind == 1) u = (W + 40) * 1.0;                   // far right of view
        if (kind == 2) begin                                  // left of the left view
          z = 0.2;
          u = -4.0 - $urandom_range(0, 40) / 10.0;
        end
        c = make_comp(f * 1000 + i, u, $urandom_range(0, H * 10) / 10.0, z,
                      0.5 + $urandom_range(0, 25) / 10.0, W, H, FOCAL);
        if (ref_project(ref_decode(c, cbk), cam, W, H, p)) begin
          vis[f].push_back(p);
          if (p.g.color == cbk[c.cb_idx] && c.cb_idx != 0) m_decode++;
          if (int'(p.g.mx) + int'(p.radius) * 16 < 0) m_widefov++;
        end else exp_cull++;
        send(c, i == ng - 1);
      end
    end
    while (frame_out != NFR) @(posedge clk);
    repeat (5) @(posedge clk);
    for (int f = 0; f < NFR; f++)
      for (int e = 0; e < 2; e++)
        for (int x = 0; x < TW; x++)
          for (int y = 0; y < TH; y++) begin
            checks++;
            if (seen[f][e][x][y] != 1) begin
              failures++;
              $display("FAIL frame %0d tile (%0d,%0d,%0d) seen %0d times", f, e, x, y, seen[f][e][x][y]);
            end
          end
    checks++;
    if (n_culled != 32'(exp_cull)) begin
      failures++;
      $display("FAIL culled %0d expected %0d", n_culled, exp_cull);
    end
    checks++;
    if (n_frames != NFR || n_sru_drops != 0 || n_gbuf_drops != 0) begin
      failures++;
      $display("FAIL frames %0d sru drops %0d gbuf drops %0d", n_frames, n_sru_drops, n_gbuf_drops);
    end
    checks++;
    if (n_left_tiles != 32'(NFR * TW * TH) || n_indep_tiles != 32'(NFR * 3 * TH) ||
        n_stereo_tiles != 32'(NFR * (TW - 3) * TH)) begin
      failures++;
      $display("FAIL tile counts %0d %0d %0d", n_left_tiles, n_indep_tiles, n_stereo_tiles);
    end
    // mechanisms
    begin
      string nm [10] = '{"decode", "cull", "widened-fov", "sort-overflow", "independent-right",
                         "stereo-right", "sru-write", "stereo-skip", "swap", "load-render-overlap"};
      int cnt [10];
      cnt = '{m_decode, int'(n_culled), m_widefov, int'(n_sort_overflows), int'(n_indep_tiles),
              int'(n_stereo_tiles), int'(n_sru_writes), m_stereo_skip, int'(n_swaps),
              int'(n_overlap_cycles)};
      for (int i = 0; i < 10; i++) begin
        checks++;
        $display("mechanism %-20s %0d", nm[i], cnt[i]);
        if (cnt[i] == 0) begin
          failures++;
          $display("FAIL mechanism %s never happened", nm[i]);
        end
      end
    end
    $display("left bcast=%0d merged right bcast=%0d", n_left_bcast, n_right_bcast);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
