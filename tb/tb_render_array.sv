// tb_render_array: streams random depth-ordered splats through the render
// queue into the 64 rendering units of an 8x8 tile, then reads the tile out
// and compares every pixel with the double-precision blending reference.
// Also checks the one-splat-per-cycle rate, the raster read-out order and
// that clear starts a fresh tile.
module tb_render_array;
  import sgs_pkg::*;
  import sgs_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, in_valid, in_ready, flush, pix_valid, flush_done, idle;
  splat_t in_s;
  logic [$clog2(NUM_PIX)-1:0] pix_idx;
  q16_t [2:0] pix_rgb;
  q16_t pix_trans;
  logic [$clog2(NUM_PIX+1)-1:0] ev_term;
  logic [15:0] x0, y0;
  int checks = 0, failures = 0;

  render_array dut (.clk, .rst_n, .tile_x0(x0), .tile_y0(y0), .clear, .in_valid, .in_s, .in_ready,
    .flush, .pix_valid, .pix_idx, .pix_rgb, .pix_trans, .flush_done, .idle, .ev_term);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  function automatic bit near(input real a, input real b, input real tol);
    return (a - b <= tol) && (b - a <= tol);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tile(input int n);
    rpix_t p [NUM_PIX];
    int c, k;
    for (int i = 0; i < NUM_PIX; i++) p[i] = pix_init();
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    c = 0;
    for (int s = 0; s < n; s++) begin
      rsplat_t r;
      r.mx = q2r(r2q(urand(x0 - 2.0, x0 + 10.0))); r.my = q2r(r2q(urand(y0 - 2.0, y0 + 10.0)));
      r.ca = q2r(r2q(urand(0.02, 0.5))); r.cc = q2r(r2q(urand(0.02, 0.5))); r.cb = q2r(r2q(urand(-0.05, 0.05)));
      r.opacity = q2r(r2q(urand(0.3, 1.0)));
      for (int ch = 0; ch < 3; ch++) r.rgb[ch] = q2r(r2q(urand(0.0, 1.0)));
      for (int i = 0; i < NUM_PIX; i++) p[i] = blend_ref(p[i], r, x0 + i % TILE_W, y0 + i / TILE_W);
      in_s = '0;
      in_s.mx = r2q(r.mx); in_s.my = r2q(r.my); in_s.ca = r2q(r.ca); in_s.cb = r2q(r.cb); in_s.cc = r2q(r.cc);
      in_s.opacity = r2q(r.opacity);
      for (int ch = 0; ch < 3; ch++) in_s.rgb[ch] = r2q(r.rgb[ch]);
      in_valid = 1;
      #1;
      while (!in_ready) begin @(negedge clk); c++; #1; end
      @(negedge clk);
      c++;
      in_valid = 0;
    end
    while (!idle) begin @(negedge clk); c++; end
    check(c <= n + 2, $sformatf("%0d splats rendered in %0d cycles", n, c));
    flush = 1;
    @(negedge clk);
    flush = 0;
    k = 0;
    while (!flush_done) begin
      if (pix_valid) begin
        check(int'(pix_idx) == k, "raster order");
        for (int ch = 0; ch < 3; ch++)
          check(near(q2r(pix_rgb[ch]), p[k].c[ch], 0.01), $sformatf("pixel %0d colour %f vs %f", k, q2r(pix_rgb[ch]), p[k].c[ch]));
        check(near(q2r(pix_trans), p[k].t, 0.005), "pixel transmittance");
        k++;
      end
      @(negedge clk);
    end
    check(k == NUM_PIX, "all pixels read out");
  endtask

  initial begin
    clear = 0; in_valid = 0; in_s = '0; flush = 0; x0 = 32; y0 = 16;
    repeat (3) @(posedge clk);
    rst_n = 1;
    tile(40);
    tile(0);
    x0 = 8; y0 = 40;
    tile(120);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
