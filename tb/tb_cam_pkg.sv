// tb_cam_pkg -- camera set-up and random compressed Gaussians shared by the
// testbenches that run the projection stage. The stereo rig follows the
// evaluated headset: 6 cm baseline; a 1000 px focal length at 2064x2208
// pixels, and a near plane at B*f/16 px so that disparities stay below 16 px.
package tb_cam_pkg;
  import nebula_pkg::*;

  function automatic cam_t make_cam(input int w_px, input int h_px, input real focal_px,
                                    input real baseline_m, input real yaw_rad, input real tx_m);
    cam_t c;
    real cs, sn;
    cs = $cos(yaw_rad);
    sn = $sin(yaw_rad);
    c.rot = '0;
    c.rot[0][0] = 16'($rtoi(cs * 16384.0));
    c.rot[0][2] = 16'($rtoi(sn * 16384.0));
    c.rot[1][1] = 16'(16384);
    c.rot[2][0] = 16'($rtoi(-sn * 16384.0));
    c.rot[2][2] = 16'($rtoi(cs * 16384.0));
    c.trans[0] = 32'($rtoi(tx_m * 65536.0));
    c.trans[1] = '0;
    c.trans[2] = '0;
    c.focal = 16'($rtoi(focal_px * 16.0));
    c.cx = 16'(w_px * 8);
    c.cy = 16'(h_px * 8);
    c.bf = 32'($rtoi(baseline_m * focal_px * 65536.0));
    c.znear = 32'($rtoi(baseline_m * focal_px / 16.0 * 65536.0)) + 32'd4096;
    c.zfar = 32'(500 * 65536);
    return c;
  endfunction

  // A compressed Gaussian aimed at pixel (u, v) at depth z (identity camera),
  // with a footprint of about sig_px pixels.
  function automatic comp_gauss_t make_comp(input int id, input real u, input real v, input real z,
                                            input real sig_px, input int w_px, input int h_px,
                                            input real focal_px);
    comp_gauss_t c;
    real x, y, s;
    x = (u - w_px / 2.0) * z / focal_px;
    y = (v - h_px / 2.0) * z / focal_px;
    s = sig_px * z / focal_px;
    c.id = 16'(id);
    c.pos_x = 16'($rtoi(x * 64.0));
    c.pos_y = 16'($rtoi(y * 64.0));
    c.pos_z = 16'($rtoi(z * 64.0));
    c.sx = 16'($rtoi(s * 1024.0 * (0.7 + 0.6 * ($urandom_range(0, 100) / 100.0))));
    c.sy = 16'($rtoi(s * 1024.0 * (0.7 + 0.6 * ($urandom_range(0, 100) / 100.0))));
    c.sz = 16'($rtoi(s * 1024.0));
    c.opacity = 8'($urandom_range(80, 255));
    c.cb_idx = 8'($urandom);
    return c;
  endfunction

endpackage
