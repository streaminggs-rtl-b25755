// cfu: coarse-grained filter unit of the hierarchical filtering unit (the
// "Proj. Unit", "Coarse Radius Comp." and first "Intersect Test" of the HFU).
//
// From only the first half of a Gaussian, its centre (x,y,z) and its largest
// scale s, it decides whether the Gaussian can touch the current tile:
//   camera point  t = R*p + T
//   centre        u = fx*tx/tz + cx,  v = fy*ty/tz + cy
//   sigma         = s*max(fx,fy)/tz * (1 + |tx/tz| + |ty/tz|)
//   coarse radius r = 3*(sigma + 0.8)
// and passes it when tz > NEAR and the square [u-r,u+r] x [v-r,v+r]
// overlaps the tile's pixel centres [x0, x0+TILE_W-1] x [y0, y0+TILE_W-1].
// sigma bounds the projected standard deviation of the largest axis including
// the off-axis stretch of the perspective Jacobian, and 0.8 covers the 0.3
// pixel^2 dilation and the eigenvalue floor of the exact radius, so r bounds
// the exact radius from above and the test never drops a Gaussian the fine
// filter would keep.
//
// Timing: one Gaussian per cycle, result registered one cycle after the input
// when en is high (en low holds the output register). The inputs, outputs and
// purpose are the design's; the bound and the square test are this
// implementation's reading of "projected center and maximum projected radius".
module cfu
  import sgs_pkg::*;
#(
  parameter q16_t NEAR = 32'sh0000_3333    // 0.2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  camera_t     cam,
  input  logic [15:0] tile_x0,
  input  logic [15:0] tile_y0,
  input  logic        in_valid,
  input  fh_rec_t     in_rec,
  output logic        out_valid,
  output fh_rec_t     out_rec,
  output logic        out_pass
);
  localparam fx_t COARSE_PAD = fx_t'($rtoi(0.8 * 16777216.0));
  fx_t p [3];
  fx_t t [3];
  fx_t inv_z, u, v, r, fmax, x0, y0, x1, y1, stretch;
  logic pass;

  always_comb begin
    p[0] = fx_from_q16(in_rec.fh.x);
    p[1] = fx_from_q16(in_rec.fh.y);
    p[2] = fx_from_q16(in_rec.fh.z);
    for (int i = 0; i < 3; i++)
      t[i] = fx_mul(fx_from_q16(cam.r[i][0]), p[0]) + fx_mul(fx_from_q16(cam.r[i][1]), p[1])
           + fx_mul(fx_from_q16(cam.r[i][2]), p[2]) + fx_from_q16(cam.t[i]);
    inv_z = fx_div(FX_ONE, t[2]);
    u     = fx_mul(fx_mul(fx_from_q16(cam.fx), t[0]), inv_z) + fx_from_q16(cam.cx);
    v     = fx_mul(fx_mul(fx_from_q16(cam.fy), t[1]), inv_z) + fx_from_q16(cam.cy);
    fmax  = fx_max(fx_from_q16(cam.fx), fx_from_q16(cam.fy));
    stretch = FX_ONE + fx_mul((t[0] < 0) ? -t[0] : t[0], inv_z) + fx_mul((t[1] < 0) ? -t[1] : t[1], inv_z);
    r     = fx_mul(fx_from_int(3), fx_mul(fx_mul(fx_mul(fx_from_q16(in_rec.fh.s), fmax), inv_z), stretch)
                                   + COARSE_PAD);
    x0    = fx_from_int(int'(tile_x0));
    y0    = fx_from_int(int'(tile_y0));
    x1    = fx_from_int(int'(tile_x0) + TILE_W - 1);
    y1    = fx_from_int(int'(tile_y0) + TILE_W - 1);
    pass  = (t[2] > fx_from_q16(NEAR)) &&
            (u + r >= x0) && (u - r <= x1) && (v + r >= y0) && (v - r <= y1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_rec   <= '0;
      out_pass  <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid;
      out_rec   <= in_rec;
      out_pass  <= in_valid && pass;
    end
  end
endmodule
