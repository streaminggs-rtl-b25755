// render_unit: one volume rendering unit. It owns one pixel of the tile and
// alpha-blends into it, front to back, every Gaussian broadcast to it; the
// colour and transmittance it keeps carry over from voxel to voxel, so the
// pixel accumulates the partial results of all voxels of the tile.
//
// For a splat with centre m, conic (a, b, c), opacity o and colour rgb, at the
// pixel p (d = m - p):
//   power = -(a dx^2 + c dy^2)/2 - b dx dy     (skipped if power > 0)
//   alpha = min(0.99, o * exp(power))          (skipped if alpha < 1/255)
//   T'    = T (1 - alpha); if T' < 1e-4 the pixel is finished (terminated)
//   else  C += rgb * alpha * T, T = T'
// which is the reference 3DGS blending rule. exp is evaluated as 2^(-y) with
// y = -power*log2(e): a 17-entry table of 2^(-i/16), linear interpolation
// between entries and a right shift by the integer part of y.
//
// clear resets C = 0, T = 1 (start of a tile). A splat on in_valid is
// absorbed in one cycle (one Gaussian per cycle). terminated pulses on the
// cycle a pixel reaches the transmittance cut-off. The blending rule is the
// standard one the design adopts; the fixed-point exp is this implementation's.
module render_unit
  import sgs_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic [15:0] px,
  input  logic [15:0] py,
  input  logic        in_valid,
  input  splat_t      in_s,
  output q16_t [2:0]  rgb,
  output q16_t        trans,
  output logic        done,
  output logic        terminated
);
  localparam fx_t LOG2E     = 64'sd24204406;
  localparam fx_t ALPHA_MAX = fx_t'($rtoi(0.99 * 16777216.0));
  localparam fx_t ALPHA_MIN = fx_t'($rtoi(16777216.0 / 255.0));
  localparam fx_t T_MIN     = fx_t'($rtoi(0.0001 * 16777216.0));
  localparam logic [63:0] EXP2_TBL [17] = '{
    64'd16777216, 64'd16065917, 64'd15384775, 64'd14732511, 64'd14107901, 64'd13509772,
    64'd12937002, 64'd12388516, 64'd11863283, 64'd11360319, 64'd10878679, 64'd10417458,
    64'd9975792, 64'd9552851, 64'd9147842, 64'd8760003, 64'd8388608};

  // exp(x) for x <= 0
  function automatic fx_t fx_exp_neg(input fx_t x);
    fx_t y, e0, e1, fr;
    int  n, i;
    y  = fx_mul(-x, LOG2E);
    n  = int'(y >>> FX_FRAC);
    if (n >= 40) return '0;
    i  = int'(y[FX_FRAC-1 -: 4]);
    fr = fx_t'({y[FX_FRAC-5:0], 4'b0});     // fraction between table entries
    e0 = fx_t'(EXP2_TBL[i]);
    e1 = fx_t'(EXP2_TBL[i+1]);
    return (e0 - fx_mul(e0 - e1, fr)) >>> n;
  endfunction

  fx_t C [3];
  fx_t T;
  fx_t dx, dy, power, alpha, tn, wgt;
  logic blend, term;

  always_comb begin
    dx    = fx_from_q16(in_s.mx) - fx_from_int(int'(px));
    dy    = fx_from_q16(in_s.my) - fx_from_int(int'(py));
    power = -((fx_mul(fx_from_q16(in_s.ca), fx_mul(dx, dx)) + fx_mul(fx_from_q16(in_s.cc), fx_mul(dy, dy))) >>> 1)
            - fx_mul(fx_from_q16(in_s.cb), fx_mul(dx, dy));
    alpha = fx_min(ALPHA_MAX, fx_mul(fx_from_q16(in_s.opacity), fx_exp_neg(power)));
    tn    = fx_mul(T, FX_ONE - alpha);
    wgt   = fx_mul(alpha, T);
    blend = in_valid && !done && (power <= 0) && (alpha >= ALPHA_MIN);
    term  = blend && (tn < T_MIN);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int ch = 0; ch < 3; ch++) C[ch] <= '0;
      T          <= FX_ONE;
      done       <= 1'b0;
      terminated <= 1'b0;
    end else begin
      terminated <= term;
      if (term) done <= 1'b1;
      else if (blend) begin
        for (int ch = 0; ch < 3; ch++) C[ch] <= C[ch] + fx_mul(fx_from_q16(in_s.rgb[ch]), wgt);
        T <= tn;
      end
    end
  end

  always_comb begin
    for (int ch = 0; ch < 3; ch++) rgb[ch] = fx_to_q16(C[ch]);
    trans = fx_to_q16(T);
  end
endmodule
