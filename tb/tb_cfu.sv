// tb_cfu: random Gaussians around a camera are pushed through the coarse
// filter unit one per cycle; each pass/cull decision is compared with the
// floating-point coarse test (decisions within 0.05 pixel of the threshold
// are not judged), and the one-cycle latency and enable hold are checked.
// The coarse test must also never drop a Gaussian that the exact
// (fine) reference keeps.
module tb_cfu;
  import sgs_pkg::*;
  import sgs_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, in_valid, out_valid, out_pass;
  fh_rec_t in_rec, out_rec;
  camera_t cam;
  logic [15:0] x0, y0;
  int checks = 0, failures = 0;

  cfu dut (.clk, .rst_n, .en, .cam, .tile_x0(x0), .tile_y0(y0),
    .in_valid, .in_rec, .out_valid, .out_rec, .out_pass);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rcam_t c;
    int npass, ncull;
    c.pos = '{8.0, 8.0, 0.0}; c.fx = 64.0; c.fy = 48.0; c.cx = 20.0; c.cy = 12.0;
    cam = cam_hw(c); x0 = 16; y0 = 8;
    en = 1; in_valid = 0; in_rec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    npass = 0; ncull = 0;
    for (int n = 0; n < 3000; n++) begin
      rgauss_t g;
      rsplat_t e, f;
      g = quantise(rand_gauss(urand(4.0, 12.0), urand(4.0, 12.0), urand(-0.5, 12.0), 0.01, 0.4));
      e = coarse_ref(c, g, int'(x0), int'(y0));
      f = fine_ref(c, g, int'(x0), int'(y0));
      @(negedge clk);
      in_valid = 1; in_rec.gid = GID_W'(n); in_rec.fh = fh_hw(g);
      @(negedge clk);
      in_valid = 0;
      check(out_valid && out_rec.gid == GID_W'(n), "registered output after one cycle");
      if (e.margin > 0.05 || e.margin < -0.05) begin
        check(out_pass == e.pass, $sformatf("gaussian %0d pass %0d vs %0d (margin %f)", n, out_pass, e.pass, e.margin));
        if (e.pass) npass++; else ncull++;
      end
      if (f.pass && f.margin > 0.05) check(out_pass, "coarse never drops what the exact test keeps");
    end
    // en low holds the output
    @(negedge clk);
    en = 0; in_valid = 1; in_rec.gid = GID_W'(77);
    @(negedge clk);
    check(out_rec.gid != GID_W'(77), "hold while en is low");
    en = 1;
    @(negedge clk);
    check(out_rec.gid == GID_W'(77), "load when en returns");
    check(npass > 100 && ncull > 100, $sformatf("both outcomes exercised (%0d/%0d)", npass, ncull));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
