// sgs_ref_pkg: floating-point reference model of the accelerator's arithmetic,
// used by the testbenches to work out expected results independently of the
// fixed-point RTL: coarse test, full 3DGS projection with spherical-harmonics
// colour, and front-to-back alpha blending, all in double precision.
package sgs_ref_pkg;
  import sgs_pkg::*;

  function automatic real q2r(input q16_t v);
    return $itor(v) / 65536.0;
  endfunction

  function automatic q16_t r2q(input real r);
    return q16_t'($rtoi(r * 65536.0));
  endfunction

  // pinhole camera with identity rotation at position pos
  typedef struct {
    real pos [3];
    real fx, fy, cx, cy;
  } rcam_t;

  function automatic camera_t cam_hw(input rcam_t c);
    camera_t h;
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) h.r[i][j] = (i == j) ? r2q(1.0) : '0;
      h.t[i]   = r2q(-c.pos[i]);
      h.pos[i] = r2q(c.pos[i]);
    end
    h.fx = r2q(c.fx); h.fy = r2q(c.fy); h.cx = r2q(c.cx); h.cy = r2q(c.cy);
    return h;
  endfunction

  typedef struct {
    real p [3];
    real smax;
    real scale [3];
    real rot [4];
    real dc [3];
    real sh_rest [45];
    real opacity;
  } rgauss_t;

  typedef struct {
    bit  pass;
    real margin;      // distance of the decision from its threshold
    real depth, mx, my, ca, cb, cc, opacity;
    real rgb [3];
  } rsplat_t;

  function automatic real rmax(input real a, input real b);
    return (a > b) ? a : b;
  endfunction
  function automatic real rmin(input real a, input real b);
    return (a < b) ? a : b;
  endfunction

  // overlap margin of the square [u-r,u+r]x[v-r,v+r] with the tile's pixel centres
  function automatic real box_margin(input real u, input real v, input real r, input int x0, input int y0);
    real m;
    m = rmin(rmin(u + r - x0, x0 + TILE_W - 1 - (u - r)), rmin(v + r - y0, y0 + TILE_W - 1 - (v - r)));
    return m;
  endfunction

  function automatic rsplat_t coarse_ref(input rcam_t c, input rgauss_t g, input int x0, input int y0);
    rsplat_t s;
    real t [3];
    real u, v, r;
    for (int i = 0; i < 3; i++) t[i] = g.p[i] - c.pos[i];
    u = c.fx * t[0] / t[2] + c.cx;
    v = c.fy * t[1] / t[2] + c.cy;
    r = 3.0 * (g.smax * rmax(c.fx, c.fy) / t[2] * (1.0 + ((t[0] < 0) ? -t[0] : t[0]) / t[2]
                                                      + ((t[1] < 0) ? -t[1] : t[1]) / t[2]) + 0.8);
    s.margin = box_margin(u, v, r, x0, y0);
    s.pass   = (t[2] > 0.2) && (s.margin >= 0.0);
    if (t[2] > 0.2 && t[2] < 0.21) s.margin = 0.0;
    s.depth = t[2]; s.mx = u; s.my = v;
    return s;
  endfunction

  function automatic rsplat_t fine_ref(input rcam_t c, input rgauss_t g, input int x0, input int y0);
    rsplat_t s;
    real t [3], R [3][3], S3 [3][3], T2 [2][3];
    real w, x, y, z, a, b, cc, det, mid, lam, rad, u, v, j00, j02, j11, j12, n;
    real d [3], bs [16];
    w = g.rot[0]; x = g.rot[1]; y = g.rot[2]; z = g.rot[3];
    R[0][0] = 1 - 2*(y*y + z*z); R[0][1] = 2*(x*y - w*z);     R[0][2] = 2*(x*z + w*y);
    R[1][0] = 2*(x*y + w*z);     R[1][1] = 1 - 2*(x*x + z*z); R[1][2] = 2*(y*z - w*x);
    R[2][0] = 2*(x*z - w*y);     R[2][1] = 2*(y*z + w*x);     R[2][2] = 1 - 2*(x*x + y*y);
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        S3[i][j] = 0;
        for (int k = 0; k < 3; k++) S3[i][j] += R[i][k] * R[j][k] * g.scale[k] * g.scale[k];
      end
    for (int i = 0; i < 3; i++) t[i] = g.p[i] - c.pos[i];
    j00 = c.fx / t[2]; j11 = c.fy / t[2];
    j02 = -c.fx * t[0] / (t[2]*t[2]); j12 = -c.fy * t[1] / (t[2]*t[2]);
    for (int j = 0; j < 3; j++) begin
      T2[0][j] = ((j == 0) ? j00 : 0.0) + ((j == 2) ? j02 : 0.0);
      T2[1][j] = ((j == 1) ? j11 : 0.0) + ((j == 2) ? j12 : 0.0);
    end
    a = 0; b = 0; cc = 0;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        a  += T2[0][i] * S3[i][j] * T2[0][j];
        b  += T2[0][i] * S3[i][j] * T2[1][j];
        cc += T2[1][i] * S3[i][j] * T2[1][j];
      end
    a += 0.3; cc += 0.3;
    det = a*cc - b*b;
    mid = 0.5 * (a + cc);
    lam = mid + $sqrt(rmax(0.1, mid*mid - det));
    rad = 3.0 * $sqrt(lam);
    u = c.fx * t[0] / t[2] + c.cx;
    v = c.fy * t[1] / t[2] + c.cy;
    s.margin = box_margin(u, v, rad, x0, y0);
    s.pass   = (t[2] > 0.2) && (det > 0) && (s.margin >= 0.0);
    s.depth = t[2]; s.mx = u; s.my = v;
    s.ca = cc / det; s.cb = -b / det; s.cc = a / det;
    s.opacity = g.opacity;
    for (int i = 0; i < 3; i++) d[i] = g.p[i] - c.pos[i];
    n = $sqrt(d[0]*d[0] + d[1]*d[1] + d[2]*d[2]);
    x = d[0]/n; y = d[1]/n; z = d[2]/n;
    bs[0] = 0.28209479177387814;
    bs[1] = -0.4886025119029199 * y; bs[2] = 0.4886025119029199 * z; bs[3] = -0.4886025119029199 * x;
    bs[4] = 1.0925484305920792 * x*y; bs[5] = -1.0925484305920792 * y*z;
    bs[6] = 0.31539156525252005 * (2*z*z - x*x - y*y);
    bs[7] = -1.0925484305920792 * x*z; bs[8] = 0.5462742152960396 * (x*x - y*y);
    bs[9]  = -0.5900435899266435 * y * (3*x*x - y*y);
    bs[10] = 2.890611442640554 * x*y*z;
    bs[11] = -0.4570457994644658 * y * (4*z*z - x*x - y*y);
    bs[12] = 0.3731763325901154 * z * (2*z*z - 3*x*x - 3*y*y);
    bs[13] = -0.4570457994644658 * x * (4*z*z - x*x - y*y);
    bs[14] = 1.445305721320277 * z * (x*x - y*y);
    bs[15] = -0.5900435899266435 * x * (x*x - 3*y*y);
    for (int ch = 0; ch < 3; ch++) begin
      s.rgb[ch] = bs[0] * g.dc[ch] + 0.5;
      for (int k = 1; k < 16; k++) s.rgb[ch] += bs[k] * g.sh_rest[3*(k-1) + ch];
      if (s.rgb[ch] < 0) s.rgb[ch] = 0;
    end
    return s;
  endfunction

  typedef struct {
    real c [3];
    real t;
    bit  done;
  } rpix_t;

  function automatic rpix_t pix_init();
    rpix_t p;
    p.c[0] = 0; p.c[1] = 0; p.c[2] = 0; p.t = 1.0; p.done = 0;
    return p;
  endfunction

  // blend one splat into the pixel at (px, py)
  function automatic rpix_t blend_ref(input rpix_t p, input rsplat_t s, input real px, input real py);
    real dx, dy, power, alpha, tn;
    if (p.done) return p;
    dx = s.mx - px; dy = s.my - py;
    power = -0.5 * (s.ca*dx*dx + s.cc*dy*dy) - s.cb*dx*dy;
    if (power > 0) return p;
    alpha = rmin(0.99, s.opacity * $exp(power));
    if (alpha < 1.0/255.0) return p;
    tn = p.t * (1 - alpha);
    if (tn < 0.0001) begin p.done = 1; return p; end
    for (int ch = 0; ch < 3; ch++) p.c[ch] += s.rgb[ch] * alpha * p.t;
    p.t = tn;
    return p;
  endfunction

  // random real in [lo, hi)
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * ($itor($urandom) / 4294967296.0);
  endfunction

  // a random Gaussian around centre p with isotropic-ish scales
  function automatic rgauss_t rand_gauss(input real px, input real py, input real pz,
                                         input real smin, input real smax_);
    rgauss_t g;
    real qn;
    g.p[0] = px; g.p[1] = py; g.p[2] = pz;
    for (int i = 0; i < 3; i++) g.scale[i] = urand(smin, smax_);
    g.smax = rmax(g.scale[0], rmax(g.scale[1], g.scale[2]));
    for (int i = 0; i < 4; i++) g.rot[i] = urand(-1.0, 1.0);
    qn = $sqrt(g.rot[0]*g.rot[0] + g.rot[1]*g.rot[1] + g.rot[2]*g.rot[2] + g.rot[3]*g.rot[3]);
    for (int i = 0; i < 4; i++) g.rot[i] = g.rot[i] / qn;
    for (int i = 0; i < 3; i++) g.dc[i] = urand(-1.0, 1.5);
    for (int i = 0; i < 45; i++) g.sh_rest[i] = urand(-0.2, 0.2);
    g.opacity = urand(0.2, 0.99);
    return g;
  endfunction

  // quantise a Gaussian to what the hardware stores, so reference and RTL see the same inputs
  function automatic rgauss_t quantise(input rgauss_t g);
    rgauss_t q;
    q = g;
    for (int i = 0; i < 3; i++) begin q.p[i] = q2r(r2q(g.p[i])); q.scale[i] = q2r(r2q(g.scale[i])); q.dc[i] = q2r(r2q(g.dc[i])); end
    q.smax = q2r(r2q(g.smax));
    for (int i = 0; i < 4; i++) q.rot[i] = q2r(r2q(g.rot[i]));
    for (int i = 0; i < 45; i++) q.sh_rest[i] = q2r(r2q(g.sh_rest[i]));
    q.opacity = q2r(r2q(g.opacity));
    return q;
  endfunction

  function automatic gauss_fh_t fh_hw(input rgauss_t g);
    gauss_fh_t f;
    f.x = r2q(g.p[0]); f.y = r2q(g.p[1]); f.z = r2q(g.p[2]); f.s = r2q(g.smax);
    return f;
  endfunction

  function automatic gauss_dec_t dec_hw(input rgauss_t g);
    gauss_dec_t d;
    for (int i = 0; i < 3; i++) begin d.scale[i] = r2q(g.scale[i]); d.dc[i] = r2q(g.dc[i]); end
    for (int i = 0; i < 4; i++) d.rot[i] = r2q(g.rot[i]);
    for (int i = 0; i < 45; i++) d.sh_rest[i] = r2q(g.sh_rest[i]);
    return d;
  endfunction
endpackage
