// tb_vsu_ray_sampler: drives rays through the ray sampler and compares the
// emitted voxel-ID sequence with one computed in floating point from the
// same samples (p_k = org + k*0.5*dir, de-duplicated), plus the ray/group end
// markers, the duplicate-drop count and the one-sample-per-cycle rate.
module tb_vsu_ray_sampler;
  import sgs_pkg::*;
  import sgs_ref_pkg::*;

  localparam int NS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_last, in_ready, out_valid, out_has, out_rend, out_gend, out_ready, dup;
  ray_t in_ray;
  logic [VID_W-1:0] out_vid;
  int checks = 0, failures = 0;

  vsu_ray_sampler #(.NUM_SAMPLES(NS)) dut (
    .clk, .rst_n, .in_valid, .in_ray, .in_last, .in_ready,
    .out_valid, .out_vid, .out_has_vid(out_has), .out_ray_end(out_rend),
    .out_group_end(out_gend), .out_ready, .dup_drop(dup));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int dup_count = 0;
  always @(posedge clk) if (rst_n && dup) dup_count++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_ray(input real o [3], input real d [3], input bit last, input bit stall);
    int exp_vids [$];
    int got_vids [$];
    int prev, nin, exp_dup, cyc, t0;
    bit saw_end, saw_gend;
    prev = -1; nin = 0;
    for (int k = 0; k < NS; k++) begin
      real p [3];
      bit inb;
      int v;
      inb = 1;
      for (int a = 0; a < 3; a++) begin
        p[a] = o[a] + k * 0.5 * d[a];
        if (p[a] < 0 || p[a] >= 16) inb = 0;
      end
      if (inb) begin
        v = ($rtoi($floor(p[2])) << 8) | ($rtoi($floor(p[1])) << 4) | $rtoi($floor(p[0]));
        nin++;
        if (v != prev) begin exp_vids.push_back(v); prev = v; end
      end
    end
    exp_dup = nin - exp_vids.size();
    dup_count = 0;
    @(negedge clk);
    for (int a = 0; a < 3; a++) begin in_ray.org[a] = r2q(o[a]); in_ray.dir[a] = r2q(d[a]); end
    in_last = last; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    saw_end = 0; saw_gend = 0; cyc = 0; t0 = $time;
    while (!saw_end) begin
      out_ready = stall ? ($urandom % 2) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        if (out_has) got_vids.push_back(int'(out_vid));
        if (out_rend) begin saw_end = 1; saw_gend = out_gend; end
      end
      @(negedge clk);
      cyc++;
    end
    check(got_vids.size() == exp_vids.size(), $sformatf("vid count %0d vs %0d", got_vids.size(), exp_vids.size()));
    for (int i = 0; i < exp_vids.size() && i < got_vids.size(); i++)
      check(got_vids[i] == exp_vids[i], $sformatf("vid[%0d] %h vs %h", i, got_vids[i], exp_vids[i]));
    check(saw_gend == last, "group end marker");
    check(dup_count == exp_dup, $sformatf("dup drops %0d vs %0d", dup_count, exp_dup));
    if (!stall) check(cyc == NS, $sformatf("one sample per cycle: %0d cycles", cyc));
  endtask

  initial begin
    real o [3], d [3];
    in_valid = 0; in_last = 0; out_ready = 1; in_ray = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    o = '{0.25, 3.5, 5.5};  d = '{1.0, 0.0, 0.0};   run_ray(o, d, 0, 0);
    o = '{8.25, 8.25, 0.25}; d = '{0.25, -0.125, 0.5}; run_ray(o, d, 0, 0);
    o = '{-2.0, 1.0, 1.0};  d = '{0.5, 0.375, 0.25}; run_ray(o, d, 0, 1);
    o = '{20.0, 1.0, 1.0};  d = '{1.0, 0.0, 0.0};   run_ray(o, d, 1, 0);  // never enters the grid
    for (int r = 0; r < 6; r++) begin
      for (int a = 0; a < 3; a++) begin
        o[a] = $itor($urandom % 64) / 4.0;
        d[a] = ($itor($urandom % 17) - 8.0) / 8.0;
      end
      run_ray(o, d, r == 5, r % 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
