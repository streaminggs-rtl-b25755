// tb_render_unit: blends sequences of random splats into one pixel and
// compares colour and transmittance after every splat with the double-
// precision 3DGS blending reference; also checks the transmittance
// cut-off (termination) and clear.
module tb_render_unit;
  import sgs_pkg::*;
  import sgs_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, in_valid, done, term;
  splat_t in_s;
  q16_t [2:0] rgb;
  q16_t trans;
  logic [15:0] px, py;
  int checks = 0, failures = 0, nterm = 0;

  render_unit dut (.clk, .rst_n, .clear, .px, .py, .in_valid, .in_s, .rgb, .trans, .done, .terminated(term));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  always @(posedge clk) if (rst_n && term) nterm++;

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

  initial begin
    int exp_term;
    clear = 0; in_valid = 0; in_s = '0; px = 21; py = 13;
    repeat (3) @(posedge clk);
    rst_n = 1;
    exp_term = 0;
    for (int seq = 0; seq < 60; seq++) begin
      rpix_t p;
      p = pix_init();
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      for (int n = 0; n < 30; n++) begin
        rsplat_t s;
        bit was_done;
        if (seq % 3 == 0) begin s.mx = q2r(r2q(urand(20.7, 21.3))); s.my = q2r(r2q(urand(12.7, 13.3))); end
        else begin s.mx = q2r(r2q(urand(17.0, 25.0))); s.my = q2r(r2q(urand(9.0, 17.0))); end
        s.ca = q2r(r2q(urand(0.05, 1.5))); s.cc = q2r(r2q(urand(0.05, 1.5)));
        s.cb = q2r(r2q(urand(-0.2, 0.2) * $sqrt(s.ca * s.cc)));
        s.opacity = q2r(r2q((seq % 3 == 0) ? urand(0.9, 1.0) : urand(0.05, 0.6)));
        for (int ch = 0; ch < 3; ch++) s.rgb[ch] = q2r(r2q(urand(0.0, 1.2)));
        was_done = p.done;
        p = blend_ref(p, s, 21.0, 13.0);
        if (p.done && !was_done) exp_term++;
        in_valid = 1;
        in_s = '0;
        in_s.mx = r2q(s.mx); in_s.my = r2q(s.my); in_s.ca = r2q(s.ca); in_s.cb = r2q(s.cb); in_s.cc = r2q(s.cc);
        in_s.opacity = r2q(s.opacity);
        for (int ch = 0; ch < 3; ch++) in_s.rgb[ch] = r2q(s.rgb[ch]);
        @(negedge clk);
        in_valid = 0;
        for (int ch = 0; ch < 3; ch++) check(near(q2r(rgb[ch]), p.c[ch], 0.01), $sformatf("colour %f vs %f", q2r(rgb[ch]), p.c[ch]));
        check(near(q2r(trans), p.t, 0.005), $sformatf("transmittance %f vs %f", q2r(trans), p.t));
        check(done == p.done, "done flag");
      end
    end
    check(nterm == exp_term && exp_term > 0, $sformatf("terminations %0d vs %0d", nterm, exp_term));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
