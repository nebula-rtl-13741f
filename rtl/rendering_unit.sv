// rendering_unit -- one rendering unit (RU) of a volume rendering core: it owns
// one pixel of the current 4x4 tile and blends the Gaussians broadcast to it,
// front to back.
//
// Per broadcast Gaussian, in the same cycle:
//   Gau. Sample : alpha = min(0.99, opacity * exp(-q/2)), with
//                 q = ca*dx^2 + 2*cb*dx*dy + cc*dy^2 and (dx, dy) the distance
//                 from the pixel centre to the 2D mean. For the right eye the
//                 mean is shifted right by the Gaussian's disparity B*f/D.
//   Th. compare : the sample is used only if alpha > alpha_th (else Skip?).
//   alpha-Check : the transmittance after this Gaussian, T*(1-alpha), must stay
//                 at or above T_MIN; once it would fall below, the pixel is
//                 saturated and ignores all further Gaussians.
//   Color Accum.: C += color * alpha * T, T *= (1-alpha) (registered).
// `used` reports, combinationally, that this Gaussian is blended into this
// pixel; the VRC ORs the 16 `used` bits for the stereo re-projection unit.
//
// Interface: `start` (one cycle) clears the pixel for a new tile; `g_valid`
// with `g` presents one Gaussian; `color` holds the blended colour.
// Timing: one Gaussian per cycle, result state updated at the clock edge.
//
// Follows the published structure (sample, threshold, alpha check, colour
// accumulation; Sec. 2.2 and the rendering unit of the architecture figure).
// The exponent is evaluated as a power of two with a 16-entry table; the
// fixed-point formats, the 0.99 clamp, T_MIN and the clamp of |dx|,|dy| to
// 255 px are this design's choices, taken from common 3DGS practice.
module rendering_unit
  import nebula_pkg::*;
#(
  parameter int unsigned T_MIN = 7          // ~1e-4 in Q.16 transmittance
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] pix_x,                // pixel column (integer)
  input  logic [15:0] pix_y,                // pixel row (integer)
  input  logic        right_eye,            // shift the mean by the disparity
  input  logic [7:0]  alpha_th,             // Th.: skip when alpha <= alpha_th
  input  logic        g_valid,
  input  rast_gauss_t g,
  output logic        used,                 // Gaussian blended into this pixel
  output logic        saturated,            // transmittance exhausted
  output rgb_t        color
);

  localparam logic signed [21:0] DMAX = 22'sd4095;        // 255.9375 px in Q.4

  logic [16:0] trans_q;                     // transmittance, Q1.16 (65536 = 1)
  logic [25:0] acc_r, acc_g, acc_b;         // colour * weight, Q8.16 + headroom

  // ---------------- Gaussian sample ----------------------------------------
  logic signed [21:0] mxe, dx, dy;
  logic               far_off;
  logic signed [47:0] q;
  logic        [63:0] t;
  logic        [27:0] ti;
  logic        [8:0]  e8;
  logic        [16:0] a_full;
  logic        [7:0]  alpha;
  logic               skip;
  logic        [16:0] t_next;
  logic        [24:0] wgt;

  always_comb begin
    mxe = 22'(g.mx) + (right_eye ? 22'($unsigned(g.disp)) : 22'sd0);
    dx  = $signed({2'b00, pix_x, 4'h8}) - mxe;
    dy  = $signed({2'b00, pix_y, 4'h8}) - 22'(g.my);
    far_off = (dx > DMAX) || (dx < -DMAX) || (dy > DMAX) || (dy < -DMAX);
    q = 48'($signed({1'b0, g.ca})) * 48'(dx) * 48'(dx)
      + 48'(g.cb) * 48'(dx) * 48'(dy) * 48'sd2
      + 48'($signed({1'b0, g.cc})) * 48'(dy) * 48'(dy);      // Q.20 px^2 * px^-2
    if (q < 0) q = '0;
    // exp(-q/2) = 2^(-t), t = q/2 * log2(e), log2(e) ~ 1477/1024
    t  = (64'($unsigned(q)) * 64'd1477) >> 11;
    ti = t[47:20];
    if (far_off || t[63:48] != 16'd0 || ti >= 28'd9) e8 = '0;
    else                        e8 = exp2_frac(t[19:16]) >> ti[3:0];
    a_full = 17'(g.opacity) * 17'(e8);
    alpha  = (a_full[16:8] > 9'd252) ? 8'd252 : a_full[15:8];
    skip   = !(alpha > alpha_th);
    t_next = trans_q - 17'((25'(trans_q) * 25'(alpha)) >> 8);
    used   = g_valid && !skip && !saturated && (t_next >= 17'(T_MIN));
    wgt    = (25'(trans_q) * 25'(alpha)) >> 8;              // alpha*T, Q.16
  end

  // ---------------- alpha check and colour accumulation ---------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trans_q   <= 17'h10000;
      saturated <= 1'b0;
      acc_r     <= '0;
      acc_g     <= '0;
      acc_b     <= '0;
    end else if (start) begin
      trans_q   <= 17'h10000;
      saturated <= 1'b0;
      acc_r     <= '0;
      acc_g     <= '0;
      acc_b     <= '0;
    end else if (g_valid && !skip && !saturated) begin
      if (t_next < 17'(T_MIN)) begin
        saturated <= 1'b1;
      end else begin
        trans_q <= t_next;
        acc_r   <= acc_r + 26'(g.color.r) * 26'(wgt[16:0]);
        acc_g   <= acc_g + 26'(g.color.g) * 26'(wgt[16:0]);
        acc_b   <= acc_b + 26'(g.color.b) * 26'(wgt[16:0]);
      end
    end
  end

  always_comb begin
    color.r = (acc_r[25:16] > 10'd255) ? 8'd255 : acc_r[23:16];
    color.g = (acc_g[25:16] > 10'd255) ? 8'd255 : acc_g[23:16];
    color.b = (acc_b[25:16] > 10'd255) ? 8'd255 : acc_b[23:16];
  end

endmodule
