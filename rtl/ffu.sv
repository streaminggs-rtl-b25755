// ffu: fine-grained filter unit of the hierarchical filtering unit ("Precise
// Radius Comp.", second "Intersect Test" and "RGB&Conic Comp.").
//
// For a Gaussian that passed the coarse filter and whose second half has been
// decoded from the codebooks, it does the exact 3D-Gaussian-splatting
// projection and keeps the Gaussian only if it really touches the tile:
//   R from the quaternion, 3D covariance S3 = R diag(s^2) R^T
//   t = W p + T, Jacobian J of the perspective projection at t,
//   2D covariance S2 = (J W) S3 (J W)^T + 0.3 I  ->  a, b, c
//   det = ac - b^2 (culled if <= 0), conic = (c, -b, a) / det
//   lambda = (a+c)/2 + sqrt(max(0.1, ((a+c)/2)^2 - det)), radius = 3 sqrt(lambda)
//   pass if tz > NEAR and the radius square around (u,v) overlaps the tile.
// In parallel it evaluates the view-dependent colour from the degree-3
// spherical harmonics (DC coefficient and 15 higher-order coefficients per
// colour) along the normalised view direction p - campos, adds 0.5 and clamps
// at 0, as the reference 3DGS renderer does.
//
// Timing: one Gaussian per cycle, one register stage; in_ready =
// !out_valid || out_ready. Only passing Gaussians appear on out_valid (as a
// splat_t with depth, centre, conic, opacity and RGB); culled ones pulse
// cull. The computations named are the design's; the exact 3DGS formulas and
// the single-stage fixed-point implementation are this implementation's.
module ffu
  import sgs_pkg::*;
#(
  parameter q16_t NEAR = 32'sh0000_3333    // 0.2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  camera_t     cam,
  input  logic [15:0] tile_x0,
  input  logic [15:0] tile_y0,
  input  logic        in_valid,
  input  ffu_in_t     in_g,
  output logic        in_ready,
  output logic        out_valid,
  output splat_t      out_s,
  input  logic        out_ready,
  output logic        cull
);
  localparam fx_t SH_C0   = fx_t'($rtoi(0.28209479177387814 * 16777216.0));
  localparam fx_t SH_C1   = fx_t'($rtoi(0.4886025119029199 * 16777216.0));
  localparam fx_t SH_C2_0 = fx_t'($rtoi(1.0925484305920792 * 16777216.0));
  localparam fx_t SH_C2_2 = fx_t'($rtoi(0.31539156525252005 * 16777216.0));
  localparam fx_t SH_C2_4 = fx_t'($rtoi(0.5462742152960396 * 16777216.0));
  localparam fx_t SH_C3_0 = fx_t'($rtoi(0.5900435899266435 * 16777216.0));
  localparam fx_t SH_C3_1 = fx_t'($rtoi(2.890611442640554 * 16777216.0));
  localparam fx_t SH_C3_2 = fx_t'($rtoi(0.4570457994644658 * 16777216.0));
  localparam fx_t SH_C3_3 = fx_t'($rtoi(0.3731763325901154 * 16777216.0));
  localparam fx_t SH_C3_5 = fx_t'($rtoi(1.445305721320277 * 16777216.0));
  localparam fx_t DILATE  = fx_t'($rtoi(0.3 * 16777216.0));
  localparam fx_t EIG_MIN = fx_t'($rtoi(0.1 * 16777216.0));

  fx_t  p [3], t [3], s2 [3], W [3][3], R [3][3], S3 [3][3], T2 [2][3];
  fx_t  qw, qx, qy, qz, inv_z, inv_z2, j00, j02, j11, j12;
  fx_t  a, b, c, det, mid, lam, rad, u, v;
  fx_t  d [3], dn, inv_dn, x, y, z, xx, yy, zz, xy, yz, xz;
  fx_t  basis [16], col [3];
  logic pass;
  splat_t res;

  // matrix helpers
  function automatic fx_t dot3(input fx_t a0, input fx_t a1, input fx_t a2,
                               input fx_t b0, input fx_t b1, input fx_t b2);
    return fx_mul(a0, b0) + fx_mul(a1, b1) + fx_mul(a2, b2);
  endfunction

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      p[i]  = fx_from_q16((i == 0) ? in_g.fh.x : (i == 1) ? in_g.fh.y : in_g.fh.z);
      s2[i] = fx_mul(fx_from_q16(in_g.dec.scale[i]), fx_from_q16(in_g.dec.scale[i]));
      for (int j = 0; j < 3; j++) W[i][j] = fx_from_q16(cam.r[i][j]);
    end
    // rotation matrix from the normalised quaternion (w, x, y, z)
    qw = fx_from_q16(in_g.dec.rot[0]); qx = fx_from_q16(in_g.dec.rot[1]);
    qy = fx_from_q16(in_g.dec.rot[2]); qz = fx_from_q16(in_g.dec.rot[3]);
    R[0][0] = FX_ONE - 2 * (fx_mul(qy, qy) + fx_mul(qz, qz));
    R[0][1] = 2 * (fx_mul(qx, qy) - fx_mul(qw, qz));
    R[0][2] = 2 * (fx_mul(qx, qz) + fx_mul(qw, qy));
    R[1][0] = 2 * (fx_mul(qx, qy) + fx_mul(qw, qz));
    R[1][1] = FX_ONE - 2 * (fx_mul(qx, qx) + fx_mul(qz, qz));
    R[1][2] = 2 * (fx_mul(qy, qz) - fx_mul(qw, qx));
    R[2][0] = 2 * (fx_mul(qx, qz) - fx_mul(qw, qy));
    R[2][1] = 2 * (fx_mul(qy, qz) + fx_mul(qw, qx));
    R[2][2] = FX_ONE - 2 * (fx_mul(qx, qx) + fx_mul(qy, qy));
    // 3D covariance R diag(s^2) R^T
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        S3[i][j] = fx_mul(fx_mul(R[i][0], R[j][0]), s2[0]) + fx_mul(fx_mul(R[i][1], R[j][1]), s2[1])
                 + fx_mul(fx_mul(R[i][2], R[j][2]), s2[2]);
    // camera space point and projection Jacobian
    for (int i = 0; i < 3; i++)
      t[i] = dot3(W[i][0], W[i][1], W[i][2], p[0], p[1], p[2]) + fx_from_q16(cam.t[i]);
    inv_z  = fx_div(FX_ONE, t[2]);
    inv_z2 = fx_mul(inv_z, inv_z);
    j00 = fx_mul(fx_from_q16(cam.fx), inv_z);
    j11 = fx_mul(fx_from_q16(cam.fy), inv_z);
    j02 = -fx_mul(fx_mul(fx_from_q16(cam.fx), t[0]), inv_z2);
    j12 = -fx_mul(fx_mul(fx_from_q16(cam.fy), t[1]), inv_z2);
    u   = fx_mul(fx_mul(fx_from_q16(cam.fx), t[0]), inv_z) + fx_from_q16(cam.cx);
    v   = fx_mul(fx_mul(fx_from_q16(cam.fy), t[1]), inv_z) + fx_from_q16(cam.cy);
    // T2 = J W
    for (int j = 0; j < 3; j++) begin
      T2[0][j] = fx_mul(j00, W[0][j]) + fx_mul(j02, W[2][j]);
      T2[1][j] = fx_mul(j11, W[1][j]) + fx_mul(j12, W[2][j]);
    end
    // 2D covariance T2 S3 T2^T
    a = '0; b = '0; c = '0;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        a = a + fx_mul(fx_mul(T2[0][i], S3[i][j]), T2[0][j]);
        b = b + fx_mul(fx_mul(T2[0][i], S3[i][j]), T2[1][j]);
        c = c + fx_mul(fx_mul(T2[1][i], S3[i][j]), T2[1][j]);
      end
    a   = a + DILATE;
    c   = c + DILATE;
    det = fx_mul(a, c) - fx_mul(b, b);
    mid = (a + c) >>> 1;
    lam = mid + fx_sqrt(fx_max(EIG_MIN, fx_mul(mid, mid) - det));
    rad = fx_mul(fx_from_int(3), fx_sqrt(lam));
    pass = (t[2] > fx_from_q16(NEAR)) && (det > 0) &&
           (u + rad >= fx_from_int(int'(tile_x0))) && (u - rad <= fx_from_int(int'(tile_x0) + TILE_W - 1)) &&
           (v + rad >= fx_from_int(int'(tile_y0))) && (v - rad <= fx_from_int(int'(tile_y0) + TILE_W - 1));
    // view direction and SH colour
    for (int i = 0; i < 3; i++) d[i] = p[i] - fx_from_q16(cam.pos[i]);
    dn     = fx_sqrt(dot3(d[0], d[1], d[2], d[0], d[1], d[2]));
    inv_dn = fx_div(FX_ONE, dn);
    x = fx_mul(d[0], inv_dn); y = fx_mul(d[1], inv_dn); z = fx_mul(d[2], inv_dn);
    xx = fx_mul(x, x); yy = fx_mul(y, y); zz = fx_mul(z, z);
    xy = fx_mul(x, y); yz = fx_mul(y, z); xz = fx_mul(x, z);
    basis[0]  = SH_C0;
    basis[1]  = -fx_mul(SH_C1, y);
    basis[2]  = fx_mul(SH_C1, z);
    basis[3]  = -fx_mul(SH_C1, x);
    basis[4]  = fx_mul(SH_C2_0, xy);
    basis[5]  = -fx_mul(SH_C2_0, yz);
    basis[6]  = fx_mul(SH_C2_2, 2 * zz - xx - yy);
    basis[7]  = -fx_mul(SH_C2_0, xz);
    basis[8]  = fx_mul(SH_C2_4, xx - yy);
    basis[9]  = -fx_mul(SH_C3_0, fx_mul(y, 3 * xx - yy));
    basis[10] = fx_mul(SH_C3_1, fx_mul(xy, z));
    basis[11] = -fx_mul(SH_C3_2, fx_mul(y, 4 * zz - xx - yy));
    basis[12] = fx_mul(SH_C3_3, fx_mul(z, 2 * zz - 3 * xx - 3 * yy));
    basis[13] = -fx_mul(SH_C3_2, fx_mul(x, 4 * zz - xx - yy));
    basis[14] = fx_mul(SH_C3_5, fx_mul(z, xx - yy));
    basis[15] = -fx_mul(SH_C3_0, fx_mul(x, xx - 3 * yy));
    for (int ch = 0; ch < 3; ch++) begin
      col[ch] = fx_mul(basis[0], fx_from_q16(in_g.dec.dc[ch])) + FX_HALF;
      for (int k = 1; k < 16; k++)
        col[ch] = col[ch] + fx_mul(basis[k], fx_from_q16(in_g.dec.sh_rest[3*(k-1) + ch]));
      if (col[ch] < 0) col[ch] = '0;
    end
    // result
    res.depth   = fx_to_q16(t[2]);
    res.mx      = fx_to_q16(u);
    res.my      = fx_to_q16(v);
    res.ca      = fx_to_q16(fx_div(c, det));
    res.cb      = fx_to_q16(fx_div(-b, det));
    res.cc      = fx_to_q16(fx_div(a, det));
    res.opacity = in_g.opacity;
    for (int ch = 0; ch < 3; ch++) res.rgb[ch] = fx_to_q16(col[ch]);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_s     <= '0;
      cull      <= 1'b0;
    end else begin
      cull <= 1'b0;
      if (in_ready) begin
        out_valid <= in_valid && pass;
        cull      <= in_valid && !pass;
        if (in_valid) out_s <= res;
      end
    end
  end
endmodule
