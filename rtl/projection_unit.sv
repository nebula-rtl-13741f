// projection_unit -- one of the four "projection, culling and conversion"
// units. It turns a decoded 3D Gaussian into the 2D record the rasteriser
// uses, or drops it when it cannot be seen by either eye.
//
// Three steps, one per cycle:
//   1. accept  : latch the decoded Gaussian.
//   2. view    : camera-space position p_c = R * p + t.
//   3. project : cull when z is outside [znear, zfar]; otherwise
//                  mean      u = f*x/z + cx,  v = f*y/z + cy      (Q16.4 px)
//                  footprint sigma_x = f*sx/z, sigma_y = f*sy/z (>= 0.5 px)
//                  conic     ca = 1/sigma_x^2, cc = 1/sigma_y^2, cb = 0
//                  radius    ceil(3 * max(sigma_x, sigma_y)) px
//                  depth     z (Q12.4 m, saturated)
//                  disparity d = B*f/z (Q4.4 px, saturated below 16 px)
//                and cull when the footprint misses the image. Culling uses the
//                widened field of view that covers both eyes: horizontally the
//                footprint spans [u - r, u + d + r], since the right-eye copy
//                of the Gaussian sits d pixels to the right.
// The result waits in the output register until taken.
//
// Interface: valid/ready in (dec_gauss_t) and out (proj_gauss_t); `cam` holds
// the pose and intrinsics of the frame. Timing: 3 cycles per Gaussian, not
// overlapped; four units side by side sustain more than one Gaussian per
// cycle. `cull_count` counts dropped Gaussians.
//
// The published design names this unit and the shared wider-FoV
// preprocessing for both eyes, and bounds the disparity by 16 px; it does not
// give the unit's insides. This design's simplification: each Gaussian is
// treated as axis-aligned in camera space (no rotation, no perspective
// Jacobian cross terms), so the conic is diagonal, and colour is
// view-independent.
module projection_unit
  import nebula_pkg::*;
#(
  parameter int unsigned W_PX = IMG_W,
  parameter int unsigned H_PX = IMG_H
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cam_t        cam,
  input  logic        in_valid,
  output logic        in_ready,
  input  dec_gauss_t  in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output proj_gauss_t out_data,
  output logic [31:0] cull_count
);

  typedef enum logic [1:0] {S_IDLE, S_VIEW, S_PROJ, S_OUT} state_t;
  state_t state;

  dec_gauss_t         g_q;
  logic signed [31:0] pc [3];

  // ---------------- step 2: view transform --------------------------------
  logic signed [31:0] pc_n [3];
  always_comb begin
    for (int i = 0; i < 3; i++) begin
      logic signed [63:0] acc;
      acc = 64'($signed(cam.rot[i][0])) * 64'(g_q.pos_x)
          + 64'($signed(cam.rot[i][1])) * 64'(g_q.pos_y)
          + 64'($signed(cam.rot[i][2])) * 64'(g_q.pos_z);
      pc_n[i] = 32'(acc >>> 14) + $signed(cam.trans[i]);
    end
  end

  // ---------------- step 3: projection and culling -------------------------
  logic               cull;
  proj_gauss_t        res;
  always_comb begin
    logic signed [63:0] z, rx, ry, u, v, lo_x, hi_x, lo_y, hi_y;
    logic        [63:0] sgx, sgy, smax, rad, dsp, dep;
    z    = 64'(pc[2]);
    cull = (pc[2] < $signed(cam.znear)) || (pc[2] > $signed(cam.zfar)) || (pc[2] <= 0);
    if (z <= 0) z = 64'sd1;
    rx   = (64'(pc[0]) <<< 16) / z;                           // Q16.16
    ry   = (64'(pc[1]) <<< 16) / z;
    u    = (($signed({48'd0, cam.focal}) * rx) >>> 16) + $signed({48'd0, cam.cx}); // Q.4
    v    = (($signed({48'd0, cam.focal}) * ry) >>> 16) + $signed({48'd0, cam.cy});
    sgx  = 64'($unsigned((64'($unsigned(cam.focal)) * 64'(g_q.sx)) / z));      // Q.4
    sgy  = 64'($unsigned((64'($unsigned(cam.focal)) * 64'(g_q.sy)) / z));
    if (sgx < 64'd8)     sgx = 64'd8;
    if (sgy < 64'd8)     sgy = 64'd8;
    if (sgx > 64'd16383) sgx = 64'd16383;
    if (sgy > 64'd16383) sgy = 64'd16383;
    smax = (sgx > sgy) ? sgx : sgy;
    rad  = (3 * smax + 15) >> 4;
    if (rad > 64'd255) rad = 64'd255;
    dsp  = 64'($unsigned((64'(cam.bf) <<< 4) / z));           // Q.4 px
    if (dsp > 64'(MAX_DISP_PX * 16 - 1)) dsp = 64'(MAX_DISP_PX * 16 - 1);
    dep  = 64'($unsigned(z)) >> 12;
    if (dep > 64'hFFFF) dep = 64'hFFFF;
    // widened field of view, Q.4 pixel units
    lo_x = u - $signed(rad << 4);
    hi_x = u + $signed(dsp) + $signed(rad << 4);
    lo_y = v - $signed(rad << 4);
    hi_y = v + $signed(rad << 4);
    if (hi_x < 0 || lo_x >= $signed(64'(W_PX * 16)) || hi_y < 0 || lo_y >= $signed(64'(H_PX * 16))) cull = 1'b1;

    res.g.id      = g_q.id;
    res.g.depth   = dep[15:0];
    res.g.mx      = u[19:0];
    res.g.my      = v[19:0];
    res.g.ca      = 16'((64'd1 << 20) / (sgx * sgx));
    res.g.cb      = '0;
    res.g.cc      = 16'((64'd1 << 20) / (sgy * sgy));
    res.g.opacity = g_q.opacity;
    res.g.color   = g_q.color;
    res.g.disp    = dsp[7:0];
    res.radius    = rad[7:0];
  end

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      g_q        <= '0;
      pc         <= '{default: '0};
      out_data   <= '0;
      cull_count <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          g_q   <= in_data;
          state <= S_VIEW;
        end
        S_VIEW: begin
          pc    <= pc_n;
          state <= S_PROJ;
        end
        S_PROJ: begin
          if (cull) begin
            cull_count <= cull_count + 1;
            state      <= S_IDLE;
          end else begin
            out_data <= res;
            state    <= S_OUT;
          end
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
