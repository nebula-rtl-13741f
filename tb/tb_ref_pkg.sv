// tb_ref_pkg -- reference models used by the testbenches.
//
// Written independently of the RTL from the arithmetic the design documents:
// the Gaussian sample and front-to-back blend of a pixel, the projection of a
// decoded Gaussian, per-tile list construction (footprint overlap, sort by
// {depth, id}, keep the nearest LIST_MAX) and the stereo list of a right-eye
// tile (Gaussians that passed an alpha check in left tiles N-3..N, filed by
// floor(disparity / 4 px), merged without duplicates). Plain integer
// arithmetic on longint, no RTL functions.
package tb_ref_pkg;
  import nebula_pkg::*;

  typedef rast_gauss_t glist_t [$];

  function automatic longint tbl(input int i);
    int t [16] = '{256, 245, 235, 225, 215, 206, 197, 189, 181, 173, 166, 159, 152, 146, 140, 134};
    return longint'(t[i]);
  endfunction

  // alpha (0..252) of Gaussian g at integer pixel (px, py)
  function automatic int ref_alpha(input rast_gauss_t g, input int px, input int py, input bit right);
    longint mxe, dx, dy, q, t, ti, e, a;
    mxe = longint'(g.mx) + (right ? longint'(g.disp) : 0);
    dx  = longint'(px) * 16 + 8 - mxe;
    dy  = longint'(py) * 16 + 8 - longint'(g.my);
    if (dx > 4095 || dx < -4095 || dy > 4095 || dy < -4095) return 0;
    q = longint'(g.ca) * dx * dx + 2 * longint'(g.cb) * dx * dy + longint'(g.cc) * dy * dy;
    if (q < 0) q = 0;
    t  = (q * 1477) >>> 11;
    ti = t >>> 20;
    if (ti >= 9) e = 0;
    else e = tbl(int'((t >>> 16) & 15)) >>> ti;
    a = (longint'(g.opacity) * e) >>> 8;
    return (a > 252) ? 252 : int'(a);
  endfunction

  // Render one 4x4 tile from a sorted list. used[i] = some pixel blended list[i].
  function automatic void ref_tile(input glist_t lst, input int tx, input int ty, input bit right,
                                   input int th, output rgb_t px_out [M_RU], output bit used [$]);
    longint tr [M_RU], cr [M_RU], cg [M_RU], cb [M_RU];
    bit     sat [M_RU];
    used.delete();
    for (int i = 0; i < M_RU; i++) begin
      tr[i] = 65536; cr[i] = 0; cg[i] = 0; cb[i] = 0; sat[i] = 0;
    end
    foreach (lst[j]) begin
      bit any;
      any = 0;
      for (int i = 0; i < M_RU; i++) begin
        int a;
        longint tn, w;
        a = ref_alpha(lst[j], tx * 4 + i % 4, ty * 4 + i / 4, right);
        if (a > th && !sat[i]) begin
          w  = (tr[i] * a) >>> 8;
          tn = tr[i] - w;
          if (tn < 7) sat[i] = 1;
          else begin
            tr[i] = tn;
            cr[i] += longint'(lst[j].color.r) * w;
            cg[i] += longint'(lst[j].color.g) * w;
            cb[i] += longint'(lst[j].color.b) * w;
            any = 1;
          end
        end
      end
      used.push_back(any);
    end
    for (int i = 0; i < M_RU; i++) begin
      px_out[i].r = ((cr[i] >>> 16) > 255) ? 8'd255 : 8'(cr[i] >>> 16);
      px_out[i].g = ((cg[i] >>> 16) > 255) ? 8'd255 : 8'(cg[i] >>> 16);
      px_out[i].b = ((cb[i] >>> 16) > 255) ? 8'd255 : 8'(cb[i] >>> 16);
    end
  endfunction

  function automatic longint key_of(input rast_gauss_t g);
    return (longint'(g.depth) << 16) | longint'(g.id);
  endfunction

  // insert keeping ascending key order
  function automatic void insert_sorted(inout glist_t l, input rast_gauss_t g);
    int p;
    p = 0;
    while (p < l.size() && key_of(l[p]) < key_of(g)) p++;
    l.insert(p, g);
  endfunction

  // footprint-overlap list of a tile
  function automatic glist_t ref_list(input proj_gauss_t all [$], input int tx, input int ty,
                                      input bit right, input int list_max);
    glist_t l;
    foreach (all[i]) begin
      longint mxe, my, r16, x0, y0;
      mxe = longint'(all[i].g.mx) + (right ? longint'(all[i].g.disp) : 0);
      my  = longint'(all[i].g.my);
      r16 = longint'(all[i].radius) * 16;
      x0  = longint'(tx) * 64;
      y0  = longint'(ty) * 64;
      if (mxe + r16 >= x0 && mxe - r16 < x0 + 64 && my + r16 >= y0 && my - r16 < y0 + 64)
        insert_sorted(l, all[i].g);
    end
    while (l.size() > list_max) void'(l.pop_back());
    return l;
  endfunction

  function automatic int disp_tile(input rast_gauss_t g);
    int t;
    t = int'(g.disp) / 64;
    return (t > 3) ? 3 : t;
  endfunction

  // list of right-eye tile n (n >= 3) from the left lists of the same row
  function automatic glist_t ref_stereo_list(input proj_gauss_t all [$], input int n, input int ty,
                                             input int th, input int list_max,
                                             output int dups);
    glist_t out;
    dups = 0;
    for (int k = 0; k < 4; k++) begin
      glist_t ll;
      rgb_t   px [M_RU];
      bit     used [$];
      if (n - k < 0) continue;
      ll = ref_list(all, n - k, ty, 1'b0, list_max);
      ref_tile(ll, n - k, ty, 1'b0, th, px, used);
      foreach (ll[j]) if (used[j] && disp_tile(ll[j]) == k) begin
        bit dup;
        dup = 0;
        foreach (out[m]) if (key_of(out[m]) == key_of(ll[j])) dup = 1;
        if (dup) dups++;
        else insert_sorted(out, ll[j]);
      end
    end
    return out;
  endfunction

  // projection of a decoded Gaussian; returns 0 when culled
  function automatic bit ref_project(input dec_gauss_t d, input cam_t cam, input int w_px,
                                     input int h_px, output proj_gauss_t p);
    longint pc [3], z, rx, ry, u, v, sgx, sgy, smax, rad, dsp, dep;
    bit vis;
    for (int i = 0; i < 3; i++) begin
      longint acc;
      acc = longint'($signed(cam.rot[i][0])) * longint'(d.pos_x) + longint'($signed(cam.rot[i][1])) * longint'(d.pos_y)
          + longint'($signed(cam.rot[i][2])) * longint'(d.pos_z);
      pc[i] = longint'(int'(acc >>> 14)) + longint'($signed(cam.trans[i]));
      pc[i] = longint'(int'(pc[i]));
    end
    z = pc[2];
    vis = !(z < longint'(cam.znear) || z > longint'(cam.zfar) || z <= 0);
    if (z <= 0) z = 1;
    rx = (pc[0] * 65536) / z;
    ry = (pc[1] * 65536) / z;
    u  = ((longint'(cam.focal) * rx) >>> 16) + longint'(cam.cx);
    v  = ((longint'(cam.focal) * ry) >>> 16) + longint'(cam.cy);
    sgx = (longint'(cam.focal) * longint'(d.sx)) / z;
    sgy = (longint'(cam.focal) * longint'(d.sy)) / z;
    if (sgx < 8) sgx = 8;
    if (sgy < 8) sgy = 8;
    if (sgx > 16383) sgx = 16383;
    if (sgy > 16383) sgy = 16383;
    smax = (sgx > sgy) ? sgx : sgy;
    rad = (3 * smax + 15) / 16;
    if (rad > 255) rad = 255;
    dsp = (longint'(cam.bf) * 16) / z;
    if (dsp > 255) dsp = 255;
    dep = z / 4096;
    if (dep > 65535) dep = 65535;
    if (u + dsp + rad * 16 < 0 || u - rad * 16 >= longint'(w_px) * 16 ||
        v + rad * 16 < 0 || v - rad * 16 >= longint'(h_px) * 16) vis = 0;
    p.g.id = d.id;
    p.g.depth = 16'(dep);
    p.g.mx = 20'(u);
    p.g.my = 20'(v);
    p.g.ca = 16'((longint'(1) << 20) / (sgx * sgx));
    p.g.cb = '0;
    p.g.cc = 16'((longint'(1) << 20) / (sgy * sgy));
    p.g.opacity = d.opacity;
    p.g.color = d.color;
    p.g.disp = 8'(dsp);
    p.radius = 8'(rad);
    return vis;
  endfunction

  // decode of a compressed Gaussian with a codebook
  function automatic dec_gauss_t ref_decode(input comp_gauss_t c, input rgb_t cbk [256]);
    dec_gauss_t d;
    d.id = c.id;
    d.pos_x = 32'(longint'(c.pos_x) * 1024);
    d.pos_y = 32'(longint'(c.pos_y) * 1024);
    d.pos_z = 32'(longint'(c.pos_z) * 1024);
    d.sx = 32'(c.sx) * 64;
    d.sy = 32'(c.sy) * 64;
    d.sz = 32'(c.sz) * 64;
    d.opacity = c.opacity;
    d.color = cbk[c.cb_idx];
    return d;
  endfunction

  // a random, plausible rasterisation record around pixel (cx, cy)
  function automatic rast_gauss_t rand_gauss(input int id, input int cx, input int cy);
    rast_gauss_t g;
    int sig;
    g.id = 16'(id);
    g.depth = 16'($urandom_range(16, 2000));
    g.mx = 20'(cx * 16 + int'($urandom_range(0, 95)) - 48);
    g.my = 20'(cy * 16 + int'($urandom_range(0, 95)) - 48);
    sig = $urandom_range(12, 48);                 // sigma, Q.4 px
    g.ca = 16'((1 << 20) / (sig * sig));
    g.cc = 16'((1 << 20) / (sig * sig));
    g.cb = 16'($signed(int'($urandom_range(0, 64)) - 32));
    g.opacity = 8'($urandom_range(60, 255));
    g.color = '{r: 8'($urandom), g: 8'($urandom), b: 8'($urandom)};
    g.disp = 8'($urandom_range(0, 255));
    return g;
  endfunction

  // expected pixels of a finished tile as the accelerator orders its work:
  // right-eye tiles from the fourth on are rendered from the stereo list.
  function automatic void ref_frame_tile(input proj_gauss_t all [$], input bit right, input int tx,
                                         input int ty, input int th, input int tiles_w,
                                         input int list_max, output rgb_t px [M_RU],
                                         output int n_list, output int n_indep_list);
    glist_t l;
    bit used [$];
    int d;
    bit near;
    near = 0;
    foreach (all[i]) begin
      longint dx;
      dx = longint'(all[i].g.mx) / 64 - longint'(tx);
      if (dx > -8 - longint'(all[i].radius) / 4 && dx < 8 + longint'(all[i].radius) / 4) near = 1;
    end
    n_list = 0;
    n_indep_list = 0;
    if (!near) begin
      for (int i = 0; i < M_RU; i++) px[i] = '0;
      return;
    end
    l = ref_list(all, tx, ty, right, list_max);
    n_indep_list = l.size();
    if (right && tx >= 3 && tiles_w > 3) l = ref_stereo_list(all, tx, ty, th, list_max, d);
    n_list = l.size();
    ref_tile(l, tx, ty, right, th, px, used);
  endfunction

endpackage
