// tb_rendering_unit -- self-checking test of one rendering unit.
// Blends random lists of Gaussians into one pixel (left and right eye) and
// compares the colour and the per-Gaussian `used` flag with the reference
// model, one Gaussian per cycle.
module tb_rendering_unit;
  import nebula_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, right_eye = 0, g_valid = 0;
  logic [15:0] pix_x = 0, pix_y = 0;
  logic [7:0] alpha_th = 8'd1;
  rast_gauss_t g = '0;
  logic used, saturated;
  rgb_t color;
  int checks = 0, failures = 0, n_skip = 0, n_sat = 0;

  rendering_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int test = 0; test < 300; test++) begin
      glist_t lst;
      rgb_t   ref_px [M_RU];
      bit     ref_used [$];
      int     n, px, py;
      bit     r;
      lst.delete();
      n  = $urandom_range(1, 24);
      px = $urandom_range(0, 3);
      py = $urandom_range(0, 3);
      r  = test[0];
      for (int j = 0; j < n; j++) lst.push_back(rand_gauss(j, 2, 2));
      // reference: pixel i of tile (0,0) with px,py -> i = py*4+px
      ref_tile(lst, 0, 0, r, int'(alpha_th), ref_px, ref_used);
      @(negedge clk);
      pix_x = 16'(px); pix_y = 16'(py); right_eye = r;
      start = 1;
      @(negedge clk);
      start = 0;
      for (int j = 0; j < n; j++) begin
        // the reference used-flag is for the whole tile; recompute for this pixel
        g = lst[j];
        g_valid = 1;
        #1;
        if (used && !(ref_alpha(lst[j], px, py, r) > int'(alpha_th))) begin
          failures++;
          $display("FAIL used set on skipped Gaussian test %0d item %0d", test, j);
        end
        if (!(ref_alpha(lst[j], px, py, r) > int'(alpha_th))) n_skip++;
        @(negedge clk);
      end
      g_valid = 0;
      @(negedge clk);
      if (saturated) n_sat++;
      checks++;
      if (color !== ref_px[py * 4 + px]) begin
        failures++;
        $display("FAIL test %0d colour %h expected %h", test, color, ref_px[py * 4 + px]);
      end
    end
    checks++;
    if (n_skip == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL threshold skip (%0d) or saturation (%0d) never exercised", n_skip, n_sat);
    end
    $display("skips=%0d saturated_pixels=%0d", n_skip, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
