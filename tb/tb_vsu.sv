// tb_vsu: end-to-end test of the voxel sorting unit. A random renaming table
// (some voxels empty) is loaded, then groups of rays with random origins and
// directions are streamed in. For every ray the expected front-to-back list
// of non-empty voxels is worked out in floating point; the unit's output
// order must contain exactly the union of those voxels, once each, and
// respect the order of every ray. A last group of two opposite rays forms a
// dependency cycle, which must be broken and still output both voxels.
module tb_vsu;
  import sgs_pkg::*;
  import sgs_ref_pkg::*;
  localparam int NS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rn_wr_en, rn_wr_valid, in_valid, in_last, in_ready, out_valid, out_last, out_none, out_ready, busy;
  logic ev_dup, ev_empty, ev_ovf, ev_cyc;
  logic [VID_W-1:0] rn_wr_vid;
  logic [VIDR_W-1:0] rn_wr_vidr, out_vidr;
  ray_t in_ray;
  int checks = 0, failures = 0, n_cyc = 0, n_empty = 0;

  vsu #(.NUM_SAMPLES(NS)) dut (
    .clk, .rst_n, .rn_wr_en, .rn_wr_vid, .rn_wr_valid, .rn_wr_vidr,
    .in_valid, .in_ray, .in_last, .in_ready, .out_valid, .out_vidr, .out_last, .out_none,
    .out_ready, .busy, .ev_dup, .ev_empty, .ev_adj_overflow(ev_ovf), .ev_cycle_break(ev_cyc));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  always @(posedge clk) if (rst_n && ev_cyc) n_cyc++;
  always @(posedge clk) if (rst_n && ev_empty) n_empty++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit rvalid [1 << VID_W];
  int rvidr  [1 << VID_W];
  int lists [$][$];

  function automatic void ray_list(input real o [3], input real d [3], ref int l [$]);
    int prev;
    prev = -1;
    l.delete();
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
        if (v != prev) begin
          prev = v;
          if (rvalid[v]) l.push_back(rvidr[v]);
        end
      end
    end
  endfunction

  task automatic send_ray(input real o [3], input real d [3], input bit last);
    @(negedge clk);
    for (int a = 0; a < 3; a++) begin in_ray.org[a] = r2q(o[a]); in_ray.dir[a] = r2q(d[a]); end
    in_last = last; in_valid = 1;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk) in_valid = 0;
  endtask

  int got [$];
  bit got_last;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      if (!out_none) got.push_back(int'(out_vidr));
      if (out_last || out_none) got_last = 1;
    end
  end

  function automatic int pos_of(input int v);
    foreach (got[i]) if (got[i] == v) return i;
    return -1;
  endfunction

  task automatic check_group();
    bit uni [int];
    int t;
    t = 0;
    while (!got_last && t < 20000) begin @(negedge clk); t++; end
    foreach (lists[r]) foreach (lists[r][i]) uni[lists[r][i]] = 1;
    check(got.size() == uni.num(), $sformatf("order has %0d voxels, expected %0d", got.size(), uni.num()));
    foreach (uni[v]) check(pos_of(v) >= 0, $sformatf("voxel %0d missing", v));
    foreach (lists[r]) for (int i = 1; i < lists[r].size(); i++)
      check(pos_of(lists[r][i-1]) < pos_of(lists[r][i]), "ray order respected");
  endtask

  initial begin
    real o [3], d [3];
    rn_wr_en = 0; rn_wr_valid = 0; rn_wr_vid = '0; rn_wr_vidr = '0;
    in_valid = 0; in_last = 0; in_ray = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // renaming: 3 of 4 voxels occupied, VIDr numbered in VID order
    begin
      int nv;
      nv = 0;
      for (int v = 0; v < (1 << VID_W); v++) begin
        @(negedge clk);
        rvalid[v] = ($urandom % 4) != 0;
        rvidr[v]  = nv;
        if (rvalid[v]) nv++;
        rn_wr_en = 1; rn_wr_vid = VID_W'(v); rn_wr_valid = rvalid[v]; rn_wr_vidr = VIDR_W'(rvidr[v]);
      end
      @(negedge clk) rn_wr_en = 0;
    end
    // groups of 8 rays from a common camera point, like the rays of one tile
    for (int g = 0; g < 6; g++) begin
      real cx, cy;
      cx = 4.0 + $itor($urandom % 32) / 4.0; cy = 4.0 + $itor($urandom % 32) / 4.0;
      lists.delete(); got.delete(); got_last = 0;
      for (int r = 0; r < 8; r++) begin
        int l [$];
        o = '{cx, cy, 0.125};
        d = '{($itor(r % 4) - 1.5) / 64.0, ($itor(r / 4) - 0.5) / 64.0, 0.5};
        ray_list(o, d, l);
        lists.push_back(l);
        send_ray(o, d, r == 7);
      end
      check_group();
    end
    check(n_cyc == 0, "no cycle break for rays from one camera");
    check(n_empty > 0, "empty voxels were dropped");
    // a cycle: two rays crossing the same two voxels in opposite directions
    lists.delete(); got.delete(); got_last = 0;
    begin
      int l [$];
      int a, b;
      for (int v = 0; v < 16; v++) begin rvalid[v] = 1; end
      o = '{0.5, 0.5, 0.5}; d = '{0.25, 0.0, 0.0};
      send_ray(o, d, 0);
      o = '{3.75, 0.5, 0.5}; d = '{-0.25, 0.0, 0.0};
      send_ray(o, d, 1);
      while (!got_last) @(negedge clk);
      check(n_cyc >= 1, $sformatf("cycle broken (%0d)", n_cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
