// tb_projection_unit -- self-checking test of a projection unit at the full
// 2064x2208 resolution. Random Gaussians in front of, beside and behind the
// camera, under a yawed and translated pose; every accepted Gaussian must
// come out with the reference mean, conic, radius, depth and disparity, or be
// culled when the reference culls it. Checks the 3-cycle latency too.
module tb_projection_unit;
  import nebula_pkg::*;
  import tb_ref_pkg::*;
  import tb_cam_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 1;
  logic in_ready, out_valid;
  cam_t cam;
  dec_gauss_t in_data = '0;
  proj_gauss_t out_data;
  logic [31:0] cull_count;
  rgb_t cbk [256];
  int checks = 0, failures = 0, n_cull = 0, n_vis = 0;

  projection_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) cbk[i] = rgb_t'(24'($urandom));
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      automatic comp_gauss_t c;
      automatic proj_gauss_t p;
      automatic bit vis;
      automatic int lat = 0;
      automatic real z = (i % 10 == 0) ? -5.0 : 1.0 + $urandom_range(0, 2000) / 10.0;
      cam = make_cam(IMG_W, IMG_H, 1000.0, 0.06, (i % 4) * 0.05, (i % 3) * 0.5);
      c = make_comp(i, $urandom_range(0, 2600) - 260.0, $urandom_range(0, 2700) - 250.0, z,
                    0.3 + $urandom_range(0, 80) / 10.0, IMG_W, IMG_H, 1000.0);
      in_data = ref_decode(c, cbk);
      vis = ref_project(in_data, cam, IMG_W, IMG_H, p);
      @(negedge clk);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      while (!out_valid && lat < 6) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (vis) begin
        n_vis++;
        if (!out_valid || out_data !== p || lat != 2) begin
          failures++;
          $display("FAIL gaussian %0d visible: valid=%b lat=%0d got %h exp %h", i, out_valid, lat, out_data, p);
        end
      end else begin
        n_cull++;
        if (out_valid) begin
          failures++;
          $display("FAIL gaussian %0d should be culled", i);
        end
      end
      @(negedge clk);
    end
    checks++;
    if (cull_count != 32'(n_cull) || n_cull == 0 || n_vis == 0) begin
      failures++;
      $display("FAIL cull count %0d expected %0d (visible %0d)", cull_count, n_cull, n_vis);
    end
    $display("visible=%0d culled=%0d", n_vis, n_cull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
