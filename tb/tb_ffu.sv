// tb_ffu: random Gaussians (already decoded) go through the fine filter unit;
// the pass/cull decision is compared with the floating-point 3DGS projection
// (decisions within 0.05 pixel of the threshold are not judged) and, for
// passing ones, the depth, centre, conic, opacity and SH colour are compared
// with tolerances. Also checks one Gaussian per cycle with back-pressure.
module tb_ffu;
  import sgs_pkg::*;
  import sgs_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, cull;
  ffu_in_t in_g;
  splat_t out_s;
  camera_t cam;
  logic [15:0] x0, y0;
  int checks = 0, failures = 0;

  ffu dut (.clk, .rst_n, .cam, .tile_x0(x0), .tile_y0(y0), .in_valid, .in_g, .in_ready,
    .out_valid, .out_s, .out_ready, .cull);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic bit near(input real a, input real b, input real tol);
    real d;
    d = a - b;
    if (d < 0) d = -d;
    return d <= tol * (1.0 + ((b < 0) ? -b : b));
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rcam_t c;
    int npass, ncull, ncycles;
    c.pos = '{8.0, 8.0, 0.0}; c.fx = 64.0; c.fy = 64.0; c.cx = 20.0; c.cy = 12.0;
    cam = cam_hw(c); x0 = 16; y0 = 8;
    in_valid = 0; in_g = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    npass = 0; ncull = 0;
    for (int n = 0; n < 2000; n++) begin
      rgauss_t g;
      rsplat_t e;
      g = quantise(rand_gauss(urand(6.0, 10.0), urand(6.0, 10.0), urand(1.0, 12.0), 0.01, 0.4));
      e = fine_ref(c, g, int'(x0), int'(y0));
      @(negedge clk);
      in_valid = 1; in_g.fh = fh_hw(g); in_g.dec = dec_hw(g); in_g.opacity = r2q(g.opacity);
      @(negedge clk);
      in_valid = 0;
      if (e.margin > 0.05 || e.margin < -0.05) begin
        check(out_valid == e.pass && cull == !e.pass, $sformatf("gaussian %0d pass %0d vs %0d", n, out_valid, e.pass));
        if (e.pass) npass++; else ncull++;
      end
      if (out_valid && e.pass) begin
        check(near(q2r(out_s.depth), e.depth, 1e-3), "depth");
        check(near(q2r(out_s.mx), e.mx, 1e-3) && near(q2r(out_s.my), e.my, 1e-3), "centre");
        check(near(q2r(out_s.ca), e.ca, 2e-2) && near(q2r(out_s.cb), e.cb, 2e-2) && near(q2r(out_s.cc), e.cc, 2e-2),
              $sformatf("conic %f %f %f vs %f %f %f", q2r(out_s.ca), q2r(out_s.cb), q2r(out_s.cc), e.ca, e.cb, e.cc));
        check(out_s.opacity == r2q(g.opacity), "opacity");
        for (int ch = 0; ch < 3; ch++)
          check(near(q2r(out_s.rgb[ch]), e.rgb[ch], 2e-3), $sformatf("rgb %f vs %f", q2r(out_s.rgb[ch]), e.rgb[ch]));
      end
    end
    check(npass > 100 && ncull > 100, $sformatf("both outcomes exercised (%0d/%0d)", npass, ncull));
    // throughput with back-pressure: 40 passing Gaussians, ready half the time
    begin
      rgauss_t g;
      int got, sent;
      got = 0; sent = 0; ncycles = 0;
      g = quantise(rand_gauss(8.0, 8.0, 6.0, 0.1, 0.2));
      g.p[0] = 8.0 + (20.0 - 20.0) / 64.0; g.p[1] = 8.0 + (12.0 - 12.0) / 64.0;  // projects to (20, 12)
      in_g.fh = fh_hw(g); in_g.dec = dec_hw(g); in_g.opacity = r2q(g.opacity);
      while (got < 40) begin
        @(negedge clk);
        in_valid = (sent < 40);
        out_ready = (ncycles % 2) == 0;
        #1;
        if (out_valid && out_ready) got++;
        if (in_valid && in_ready) sent++;
        ncycles++;
      end
      in_valid = 0; out_ready = 1;
      check(ncycles <= 82, $sformatf("40 results in %0d cycles at half ready", ncycles));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
