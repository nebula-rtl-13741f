// tb_nebula_top_full -- the accelerator at its published size, no parameter
// changed: 2064x2208 pixels per eye (516x552 tiles), 4 projection units,
// 4 sorting units, 8 VRCs, 144 KB global double buffer, 16 KB feature and
// stereo buffers. One frame of a few large Gaussians in front of a headset
// camera (1000 px focal length, 6 cm baseline); every tile of both eyes must
// come out exactly once with the reference pixels, and the stereo path must
// be taken (SRU writes, right tiles rendered from merged lists).
module tb_nebula_top_full;
  import nebula_pkg::*;
  import tb_ref_pkg::*;
  import tb_cam_pkg::*;

  localparam int TW = IMG_W / TILE, TH = IMG_H / TILE, NG = 24;
  localparam real FOCAL = 1000.0;

  logic clk = 0, rst_n = 0;
  cam_t cam;
  logic [7:0] alpha_th = 8'd2;
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

  nebula_top dut (.*);
  always #5 clk = ~clk;

  rgb_t        cbk [256];
  proj_gauss_t vis [$];
  byte         seen [2][TW][TH];
  int          checks = 0, failures = 0, nonblack = 0, n_tiles = 0;
  bit          done = 0;

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && tile_valid && tile_ready) begin
      automatic rgb_t px [M_RU];
      automatic int nl, ni;
      automatic bit bad = 0, lit = 0;
      n_tiles++;
      seen[tile_right][tile_tx][tile_ty]++;
      ref_frame_tile(vis, tile_right, int'(tile_tx), int'(tile_ty), int'(alpha_th), TW,
                     FB_BYTES * 8 / RAST_BITS, px, nl, ni);
      for (int i = 0; i < M_RU; i++) begin
        if (tile_px[i] !== px[i]) bad = 1;
        if (px[i] != '0) lit = 1;
      end
      if (lit) begin
        nonblack++;
        checks++;
      end
      if (bad) begin
        failures++;
        if (failures < 10)
          $display("FAIL tile (%0d,%0d,%0d) differs from the reference", tile_right, tile_tx, tile_ty);
      end
    end
    if (rst_n && frame_done) done <= 1;
  end

  initial begin
    for (int i = 0; i < 256; i++) cbk[i] = rgb_t'(24'($urandom));
    cam = make_cam(IMG_W, IMG_H, FOCAL, 0.06, 0.0, 0.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      cb_wr_en = 1; cb_wr_addr = 8'(i); cb_wr_data = cbk[i];
    end
    @(negedge clk);
    cb_wr_en = 0;
    for (int i = 0; i < NG; i++) begin
      automatic comp_gauss_t c;
      automatic proj_gauss_t p;
      automatic real z = 4.0 + $urandom_range(0, 400) / 10.0;
      c = make_comp(i, $urandom_range(0, IMG_W - 1), $urandom_range(0, IMG_H - 1),
                    (i == NG - 1) ? -2.0 : z, 2.0 + $urandom_range(0, 150) / 10.0, IMG_W, IMG_H, FOCAL);
      if (ref_project(ref_decode(c, cbk), cam, IMG_W, IMG_H, p)) vis.push_back(p);
      @(negedge clk);
      g_valid = 1; g_data = c; g_last = (i == NG - 1);
      @(posedge clk);
      while (!g_ready) @(posedge clk);
      @(negedge clk);
      g_valid = 0; g_last = 0;
    end
    while (!done) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (n_tiles != 2 * TW * TH) begin
      failures++;
      $display("FAIL %0d tiles out, expected %0d", n_tiles, 2 * TW * TH);
    end
    for (int e = 0; e < 2; e++)
      for (int x = 0; x < TW; x++)
        for (int y = 0; y < TH; y++)
          if (seen[e][x][y] != 1) begin
            failures++;
            if (failures < 20) $display("FAIL tile (%0d,%0d,%0d) seen %0d times", e, x, y, seen[e][x][y]);
          end
    checks++;
    if (n_stereo_tiles != 32'(TH * (TW - 3)) || n_indep_tiles != 32'(TH * 3) || n_sru_writes == 0 ||
        n_culled != 1 || n_sru_drops != 0 || n_frames != 1) begin
      failures++;
      $display("FAIL counters: stereo %0d indep %0d sru %0d culled %0d drops %0d frames %0d",
               n_stereo_tiles, n_indep_tiles, n_sru_writes, n_culled, n_sru_drops, n_frames);
    end
    $display("visible gaussians=%0d lit tiles=%0d sru writes=%0d left bcast=%0d right bcast=%0d cycles=%0t",
             vis.size(), nonblack, n_sru_writes, n_left_bcast, n_right_bcast, $time / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
