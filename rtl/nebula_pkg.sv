// nebula_pkg -- types, sizes and fixed-point helpers shared by the stereo
// 3D Gaussian splatting client accelerator.
//
// The accelerator renders a VR stereo pair tile by tile. Gaussians arrive
// compressed (comp_gauss_t), are decoded (dec_gauss_t), projected
// (proj_gauss_t, which carries a footprint radius for tile binning) and
// rasterised from depth-sorted per-tile lists (rast_gauss_t). The right-eye
// image reuses the left-eye lists through the stereo buffer (sb_entry_t).
//
// Sizes that follow the published configuration: 4x4-pixel tiles, 16 rendering
// units per volume rendering core (VRC), 4 projection units, 4 sorting units,
// 8 VRCs, 16 KB feature buffer and 16 KB stereo buffer (4 banks of 4 KB) per
// VRC, a 144 KB global double buffer, a 16-pixel disparity bound and
// 2064x2208 pixels per eye. Every field width and fixed-point format below is
// this design's own choice; none is published.
package nebula_pkg;

  // ---------------- configuration (published numbers) -------------------
  localparam int unsigned TILE          = 4;       // tile edge in pixels
  localparam int unsigned M_RU          = TILE*TILE; // rendering units per VRC
  localparam int unsigned N_PU          = 4;       // projection units
  localparam int unsigned N_SU          = 4;       // sorting units
  localparam int unsigned N_VRC         = 8;       // volume rendering cores
  localparam int unsigned FB_BYTES      = 16384;   // feature buffer per VRC
  localparam int unsigned SB_BYTES      = 16384;   // stereo buffer per VRC
  localparam int unsigned SB_ROWS       = 4;       // disparity categories
  localparam int unsigned SB_BANK_BYTES = SB_BYTES / SB_ROWS; // 4 KB per row
  localparam int unsigned GBUF_BYTES    = 147456;  // 144 KB global double buffer
  localparam int unsigned MAX_DISP_PX   = 16;      // disparity bound in pixels
  localparam int unsigned IMG_W         = 2064;    // pixels per eye, horizontal
  localparam int unsigned IMG_H         = 2208;    // pixels per eye, vertical

  // ---------------- records --------------------------------------------
  typedef struct packed {
    logic [7:0] r;
    logic [7:0] g;
    logic [7:0] b;
  } rgb_t;

  // Compressed Gaussian as it arrives over the DRAM port: 128 bits.
  // Position: signed Q10.6 metres. Scale: unsigned Q6.10 metres.
  // Opacity: Q0.8. cb_idx: vector-quantisation index of the colour codeword.
  typedef struct packed {
    logic [15:0]        id;
    logic signed [15:0] pos_x, pos_y, pos_z;
    logic [15:0]        sx, sy, sz;
    logic [7:0]         opacity;
    logic [7:0]         cb_idx;
  } comp_gauss_t;

  // Decoded Gaussian: position and scale in Q16.16 metres.
  typedef struct packed {
    logic [15:0]        id;
    logic signed [31:0] pos_x, pos_y, pos_z;
    logic [31:0]        sx, sy, sz;
    logic [7:0]         opacity;
    rgb_t               color;
  } dec_gauss_t;

  // Rasterisation record (what a rendering unit consumes).
  //   depth : view depth, unsigned Q12.4 metres (sort key, with id as tie-break)
  //   mx,my : left-eye 2D mean, signed Q16.4 pixels
  //   ca,cc : conic diagonal, unsigned Q4.12 px^-2; cb: off-diagonal, signed Q4.12
  //   disp  : stereo disparity B*f/D, unsigned Q4.4 pixels (< 16 px)
  typedef struct packed {
    logic [15:0]        id;
    logic [15:0]        depth;
    logic signed [19:0] mx, my;
    logic [15:0]        ca;
    logic signed [15:0] cb;
    logic [15:0]        cc;
    logic [7:0]         opacity;
    rgb_t               color;
    logic [7:0]         disp;
  } rast_gauss_t;

  // Projected Gaussian as stored in the global double buffer.
  typedef struct packed {
    rast_gauss_t g;
    logic [7:0]  radius;   // footprint half-width in whole pixels (3 sigma)
  } proj_gauss_t;

  // Stereo-buffer / list-stream entry: a Gaussian or an end-of-list mark.
  typedef struct packed {
    logic        eol;
    rast_gauss_t g;
  } sb_entry_t;

  // Camera and stereo-rig parameters, constant over a frame.
  typedef struct packed {
    logic signed [2:0][2:0][15:0] rot;   // world-to-camera rotation, Q2.14
    logic signed [2:0][31:0]      trans; // world-to-camera translation, Q16.16 m
    logic [15:0]                  focal; // focal length, Q12.4 px
    logic [15:0]                  cx, cy;// principal point, Q12.4 px
    logic [31:0]                  bf;    // baseline * focal, Q16.16 px*m
    logic [31:0]                  znear; // near plane, Q16.16 m
    logic [31:0]                  zfar;  // far plane, Q16.16 m
  } cam_t;

  localparam int unsigned RAST_BITS  = $bits(rast_gauss_t);
  localparam int unsigned PROJ_BITS  = $bits(proj_gauss_t);
  localparam int unsigned SBE_BITS   = $bits(sb_entry_t);

  // ---------------- fixed-point helpers ----------------------------------
  // 256 * 2^(-i/16), rounded: fractional part of the exponential in the
  // Gaussian sample.
  function automatic logic [8:0] exp2_frac(input logic [3:0] i);
    case (i)
      4'd0:  return 9'd256; 4'd1:  return 9'd245; 4'd2:  return 9'd235; 4'd3:  return 9'd225;
      4'd4:  return 9'd215; 4'd5:  return 9'd206; 4'd6:  return 9'd197; 4'd7:  return 9'd189;
      4'd8:  return 9'd181; 4'd9:  return 9'd173; 4'd10: return 9'd166; 4'd11: return 9'd159;
      4'd12: return 9'd152; 4'd13: return 9'd146; 4'd14: return 9'd140; default: return 9'd134;
    endcase
  endfunction

  // Sort / merge key: depth first, Gaussian id breaks ties, so that the key
  // is unique and duplicates from different lists compare equal.
  function automatic logic [31:0] sort_key(input rast_gauss_t g);
    return {g.depth, g.id};
  endfunction

  // Right-eye tile offset (0..3) of a Gaussian with disparity d (Q4.4 px):
  // floor(d / TILE pixels), clamped to the last stereo-buffer category.
  function automatic logic [1:0] disp_tiles(input logic [7:0] d);
    logic [7:0] t;
    t = d >> 6;             // Q4.4 px / 4 px per tile
    return (t > 8'd3) ? 2'd3 : t[1:0];
  endfunction

endpackage
