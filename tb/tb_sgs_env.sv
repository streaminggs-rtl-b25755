// tb_sgs_env: end-to-end test environment of the whole accelerator, shared by
// the reduced-size test (FULL = 0: small sorting buffers, input-buffer banks and
// adjacency lists, so that every overflow path is taken) and the full-size test
// (FULL = 1: the accelerator with all its default sizes).
//
// Scene: a 16^3 voxel grid of unit voxels, a pinhole camera at (8.5, 8.5, 0)
// looking along +z, and Gaussians in a handful of voxels: a column of voxels
// straight ahead, four neighbours around it, one large voxel (more Gaussians
// than an input-buffer bank and a sorting buffer hold), a voxel of nearly
// opaque Gaussians in front of pixel (1,1) (early termination) and small Gaussians just left of the tile's edge (coarse pass, fine cull). The
// host side loads the renaming table, voxel directory, codebooks and DRAM
// (first halves, codebook indices and opacity), then renders two tiles: the
// first with its 64 pixel rays plus one reversed ray that closes cycles in the
// voxel graph, the second looking past every occupied voxel (empty order).
//
// Checks: the set of splats reaching the rendering units equals the
// Gaussians of the visited voxels that the floating-point reference keeps,
// with matching projected values; within each sorted batch depth never
// decreases; every pixel equals the reference blend of the splats in the order
// they were rendered; the statistics counters agree with the reference
// (coarse passes and culls, fine culls, voxels, chunks); and every mechanism
// (duplicate samples, empty voxels, adjacency overflow, cycle break, chunking,
// load/process overlap, sort split, HFU back-pressure, early termination)
// happened at least once. The reduced test must see all of them; the full-size
// test, whose lists do not overflow, checks the rest.
module tb_sgs_env #(
  parameter bit FULL = 1'b0
);
  import sgs_pkg::*;
  import sgs_ref_pkg::*;

  localparam int FH_BASE  = 0;
  localparam int IDX_BASE = 4096;
  localparam int NV       = 13;
  localparam int BIG      = FULL ? 600 : 80;  // Gaussians in the large voxel
  localparam int NG_MAX   = 800;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  camera_t cam;
  logic [15:0] tile_x0, tile_y0;
  logic rn_wr_en, rn_wr_valid, dir_wr_en, cb_wr_en, tile_start, ray_valid, ray_last, ray_ready;
  logic [VID_W-1:0] rn_wr_vid;
  logic [VIDR_W-1:0] rn_wr_vidr, dir_wr_vidr;
  logic [GID_W-1:0] dir_wr_base;
  logic [CNT_W-1:0] dir_wr_count;
  logic [1:0] cb_wr_sel;
  logic [CB_IDX_W-1:0] cb_wr_addr;
  logic [5:0] cb_wr_elem;
  q16_t cb_wr_data;
  ray_t ray;
  logic tile_busy, tile_done, m_valid, m_ready, m_rsp_valid, pix_valid;
  logic [MADDR_W-1:0] m_addr;
  logic [MEM_W-1:0] m_rsp;
  logic [$clog2(NUM_PIX)-1:0] pix_idx;
  q16_t [2:0] pix_rgb;
  q16_t pix_trans;
  stats_t stats;

  if (FULL) begin : g_dut
    sgs_top dut (.clk, .rst_n, .cam, .tile_x0, .tile_y0,
      .fh_base(MADDR_W'(FH_BASE)), .idx_base(MADDR_W'(IDX_BASE)),
      .rn_wr_en, .rn_wr_vid, .rn_wr_valid, .rn_wr_vidr,
      .dir_wr_en, .dir_wr_vidr, .dir_wr_base, .dir_wr_count,
      .cb_wr_en, .cb_wr_sel, .cb_wr_addr, .cb_wr_elem, .cb_wr_data,
      .tile_start, .ray_valid, .ray, .ray_last, .ray_ready, .tile_busy, .tile_done,
      .mem_req_valid(m_valid), .mem_req_addr(m_addr), .mem_req_ready(m_ready),
      .mem_rsp_valid(m_rsp_valid), .mem_rsp_data(m_rsp),
      .pix_valid, .pix_idx, .pix_rgb, .pix_trans, .stats);
  end else begin : g_dut
    sgs_top #(.DST_SLOTS(2), .BANK_RECS(32), .SORT_CAP(16)) dut (.clk, .rst_n, .cam, .tile_x0, .tile_y0,
      .fh_base(MADDR_W'(FH_BASE)), .idx_base(MADDR_W'(IDX_BASE)),
      .rn_wr_en, .rn_wr_vid, .rn_wr_valid, .rn_wr_vidr,
      .dir_wr_en, .dir_wr_vidr, .dir_wr_base, .dir_wr_count,
      .cb_wr_en, .cb_wr_sel, .cb_wr_addr, .cb_wr_elem, .cb_wr_data,
      .tile_start, .ray_valid, .ray, .ray_last, .ray_ready, .tile_busy, .tile_done,
      .mem_req_valid(m_valid), .mem_req_addr(m_addr), .mem_req_ready(m_ready),
      .mem_rsp_valid(m_rsp_valid), .mem_rsp_data(m_rsp),
      .pix_valid, .pix_idx, .pix_rgb, .pix_trans, .stats);
  end

  dram_model #(.AW(13), .LATENCY(20), .STALL_PCT(10)) u_mem (.clk, .rst_n, .req_valid(m_valid),
    .req_addr(m_addr), .req_ready(m_ready), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (FULL ? 200000 : 100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- observe the stream into the rendering units ----------------
  splat_t rs [$];
  int     rs_batch [$];
  int     batch_no = 0;
  q16_t   pix_c [NUM_PIX][3];
  q16_t   pix_t [NUM_PIX];
  int     n_pix = 0;
  always @(posedge clk) if (rst_n) begin
    if (g_dut.dut.u_render.in_valid && g_dut.dut.u_render.in_ready) begin
      rs.push_back(g_dut.dut.u_render.in_s);
      rs_batch.push_back(batch_no);
      if (g_dut.dut.s_out_last[g_dut.dut.rd_sel]) batch_no++;
    end
    if (pix_valid) begin
      for (int ch = 0; ch < 3; ch++) pix_c[pix_idx][ch] = pix_rgb[ch];
      pix_t[pix_idx] = pix_trans;
      n_pix++;
    end
  end

  // ---------------- scene ----------------
  rcam_t   c;
  rgauss_t g [NG_MAX];
  int      vx [NV], vy [NV], vz [NV], vbase [NV], vcnt [NV];
  int      ng;

  task automatic cbw(input int sel, input int addr, input int elem, input real v);
    @(negedge clk);
    cb_wr_en = 1; cb_wr_sel = 2'(sel); cb_wr_addr = CB_IDX_W'(addr); cb_wr_elem = 6'(elem); cb_wr_data = r2q(v);
  endtask

  function automatic int vid_of(input int x, input int y, input int z);
    return (z << (2 * GRID_BITS)) | (y << GRID_BITS) | x;
  endfunction

  // reference ray walk, as the sampler does it (64 samples, half-voxel step)
  function automatic void walk(input real o [3], input real d [3], inout bit vis [NV]);
    for (int k = 0; k < 64; k++) begin
      real p [3];
      int  q [3];
      bit  ok;
      ok = 1;
      for (int a = 0; a < 3; a++) begin
        p[a] = q2r(r2q(o[a])) + k * 0.5 * q2r(r2q(d[a]));
        q[a] = $rtoi($floor(p[a]));
        if (p[a] < 0 || q[a] >= (1 << GRID_BITS)) ok = 0;
      end
      if (ok) for (int v = 0; v < NV; v++) if (vx[v] == q[0] && vy[v] == q[1] && vz[v] == q[2]) vis[v] = 1;
    end
  endfunction

  task automatic send_ray(input real o [3], input real d [3], input bit last);
    @(negedge clk);
    ray_valid = 1; ray_last = last;
    for (int a = 0; a < 3; a++) begin ray.org[a] = r2q(o[a]); ray.dir[a] = r2q(d[a]); end
    #1;
    while (!ray_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    ray_valid = 0; ray_last = 0;
  endtask

  // one tile: rays, wait, compare
  task automatic run_tile(input int x0, input int y0, input bit reversed_ray, input bit expect_empty);
    bit vis [NV];
    rsplat_t cr [NG_MAX], fr [NG_MAX];
    int exp_cpass, exp_ccull, exp_fcull, exp_keep, exp_vox, exp_chunks, used [NG_MAX], desc;
    stats_t s0;
    rpix_t px [NUM_PIX];
    int cyc0, cyc;
    foreach (vis[v]) vis[v] = 0;
    tile_x0 = 16'(x0); tile_y0 = 16'(y0);
    s0 = stats;
    rs.delete(); rs_batch.delete(); batch_no = 0; n_pix = 0;
    @(negedge clk) tile_start = 1;
    @(negedge clk) tile_start = 0;
    cyc0 = $time / 10;
    for (int p = 0; p < NUM_PIX; p++) begin
      real o [3], d [3];
      o = '{8.5, 8.5, 0.0};
      d = '{(x0 + p % TILE_W - c.cx) / c.fx, (y0 + p / TILE_W - c.cy) / c.fy, 1.0};
      walk(o, d, vis);
      send_ray(o, d, !reversed_ray && p == NUM_PIX - 1);
    end
    if (reversed_ray) begin
      real o [3], d [3];
      o = '{8.5, 8.5, 15.75}; d = '{0.0, 0.0, -1.0};
      walk(o, d, vis);
      send_ray(o, d, 1);
    end
    while (!tile_done) @(negedge clk);
    cyc = $time / 10 - cyc0;
    repeat (3) @(negedge clk);
    // reference
    exp_cpass = 0; exp_ccull = 0; exp_fcull = 0; exp_keep = 0; exp_vox = 0; exp_chunks = 0;
    for (int v = 0; v < NV; v++) if (vis[v]) begin
      exp_vox++;
      exp_chunks += (vcnt[v] + (FULL ? 512 : 32) - 1) / (FULL ? 512 : 32);
      for (int i = vbase[v]; i < vbase[v] + vcnt[v]; i++) begin
        cr[i] = coarse_ref(c, g[i], x0, y0);
        fr[i] = fine_ref(c, g[i], x0, y0);
        if (!cr[i].pass) exp_ccull++;
        else if (!fr[i].pass) begin exp_cpass++; exp_fcull++; end
        else begin exp_cpass++; exp_keep++; end
      end
    end else for (int i = vbase[v]; i < vbase[v] + vcnt[v]; i++) begin cr[i].pass = 0; fr[i].pass = 0; end
    $display("tile (%0d,%0d): %0d voxels, %0d kept of %0d coarse passes, %0d cycles",
             x0, y0, exp_vox, exp_keep, exp_cpass, cyc);
    check(expect_empty == (exp_vox == 0), "scene covers the intended voxels");
    check(stats.voxels - s0.voxels == 32'(exp_vox), $sformatf("voxels streamed %0d vs %0d", stats.voxels - s0.voxels, exp_vox));
    check(stats.chunks - s0.chunks == 32'(exp_chunks), $sformatf("chunks %0d vs %0d", stats.chunks - s0.chunks, exp_chunks));
    check(stats.coarse_pass - s0.coarse_pass == 32'(exp_cpass), $sformatf("coarse passes %0d vs %0d", stats.coarse_pass - s0.coarse_pass, exp_cpass));
    check(stats.coarse_cull - s0.coarse_cull == 32'(exp_ccull), $sformatf("coarse culls %0d vs %0d", stats.coarse_cull - s0.coarse_cull, exp_ccull));
    check(stats.fine_cull - s0.fine_cull == 32'(exp_fcull), $sformatf("fine culls %0d vs %0d", stats.fine_cull - s0.fine_cull, exp_fcull));
    check(rs.size() == exp_keep, $sformatf("splats rendered %0d vs %0d", rs.size(), exp_keep));
    check(stats.sort_batches - s0.sort_batches == 32'(batch_no), "one sort per drained batch");
    check(n_pix == NUM_PIX, "whole tile read out");
    // match rendered splats to the reference, in render order
    for (int i = 0; i < ng; i++) used[i] = 0;
    foreach (px[p]) px[p] = pix_init();
    desc = 0;
    foreach (rs[k]) begin
      int best;
      real bd;
      best = -1; bd = 1e9;
      for (int i = 0; i < ng; i++) if (cr[i].pass && fr[i].pass && !used[i]) begin
        real dd;
        dd = (q2r(rs[k].depth) - fr[i].depth) ** 2 + (q2r(rs[k].mx) - fr[i].mx) ** 2 + (q2r(rs[k].my) - fr[i].my) ** 2;
        if (dd < bd) begin bd = dd; best = i; end
      end
      check(best >= 0 && bd < 1e-4, $sformatf("rendered splat %0d matches a kept Gaussian (%f)", k, bd));
      if (best >= 0) begin
        used[best] = 1;
        check(rs[k].opacity == r2q(g[best].opacity), "opacity");
        for (int ch = 0; ch < 3; ch++)
          check(q2r(rs[k].rgb[ch]) - fr[best].rgb[ch] < 0.01 && fr[best].rgb[ch] - q2r(rs[k].rgb[ch]) < 0.01, "colour");
        for (int p = 0; p < NUM_PIX; p++) px[p] = blend_ref(px[p], fr[best], real'(x0 + p % TILE_W), real'(y0 + p / TILE_W));
      end
      if (k > 0 && rs_batch[k] == rs_batch[k-1] && rs[k].depth < rs[k-1].depth) desc++;
    end
    check(desc == 0, $sformatf("%0d depth inversions inside sorted batches", desc));
    for (int p = 0; p < NUM_PIX; p++) begin
      real e;
      e = q2r(pix_t[p]) - px[p].t;
      if (px[p].done) check(q2r(pix_t[p]) < 0.001, $sformatf("pixel %0d terminated", p));
      else check(e < 0.02 && e > -0.02, $sformatf("pixel %0d transmittance %f vs %f", p, q2r(pix_t[p]), px[p].t));
      for (int ch = 0; ch < 3; ch++) begin
        e = q2r(pix_c[p][ch]) - px[p].c[ch];
        check(e < 0.03 && e > -0.03, $sformatf("pixel %0d colour %0d: %f vs %f", p, ch, q2r(pix_c[p][ch]), px[p].c[ch]));
      end
    end
  endtask

  initial begin
    stats_t s_end;
    cam = '0; tile_x0 = 0; tile_y0 = 0;
    rn_wr_en = 0; rn_wr_valid = 0; rn_wr_vid = 0; rn_wr_vidr = 0;
    dir_wr_en = 0; dir_wr_vidr = 0; dir_wr_base = 0; dir_wr_count = 0;
    cb_wr_en = 0; cb_wr_sel = 0; cb_wr_addr = 0; cb_wr_elem = 0; cb_wr_data = 0;
    tile_start = 0; ray_valid = 0; ray_last = 0; ray = '0;
    c.pos = '{8.5, 8.5, 0.0}; c.fx = 16.0; c.fy = 16.0; c.cx = 3.5; c.cy = 3.5;
    cam = cam_hw(c);
    for (int a = 0; a < (1 << 13); a++) u_mem.mem[a] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // occupied voxels and their Gaussian counts
    vx = '{8, 7, 8, 8, 8, 7, 9, 8, 8, 8, 8, 8, 7};
    vy = '{8, 7, 8, 8, 8, 8, 8, 7, 9, 8, 8, 8, 8};
    vz = '{2, 3, 3, 5, 7, 9, 9, 9, 9, 9, 11, 13, 3};
    vcnt = '{6, 5, 8, BIG, 10, 6, 6, 6, 6, 10, 10, 10, 12};
    ng = 0;
    for (int v = 0; v < NV; v++) begin
      vbase[v] = ng;
      for (int k = 0; k < vcnt[v]; k++) begin
        rsplat_t a, b;
        if (v == 1) begin
          // nearly opaque, centred on pixel (1,1) at depths 3.3 .. 3.7
          real z;
          z = 3.3 + 0.1 * k;
          g[ng] = rand_gauss(8.5 + (1 - 3.5) * z / 16.0, 8.5 + (1 - 3.5) * z / 16.0, z, 0.1, 0.1);
          g[ng].rot = '{1.0, 0.0, 0.0, 0.0};
          g[ng].opacity = 0.95;
          g[ng] = quantise(g[ng]);
        end else begin
          do begin
            g[ng] = quantise(rand_gauss(vx[v] + urand(0.1, 0.9), vy[v] + urand(0.1, 0.9), vz[v] + urand(0.1, 0.9), 0.03, 0.3));
            if (v == NV - 1) begin
              // left of the tile: odd ones fail the coarse test, even ones lie between
              // the coarse bound and the exact footprint (pass coarse, fail fine)
              if (k % 2) g[ng] = quantise(rand_gauss(urand(7.0, 7.15), vy[v] + urand(0.1, 0.9), urand(3.0, 3.15), 0.01, 0.02));
              else       g[ng] = quantise(rand_gauss(urand(7.325, 7.331), vy[v] + urand(0.1, 0.9), urand(3.095, 3.105), 0.015, 0.015));
            end
            a = coarse_ref(c, g[ng], 0, 0);
            b = fine_ref(c, g[ng], 0, 0);
          end while ((a.margin < 0.05 && a.margin > -0.05) || (b.margin < 0.05 && b.margin > -0.05));
        end
        // codebook entry ng (SH entries shared modulo the SH codebook size)
        if (ng >= CB_SH_ENTRIES) g[ng].sh_rest = g[ng % CB_SH_ENTRIES].sh_rest;
        ng++;
      end
    end
    // renaming table (every entry written: the table has no reset), directory
    for (int a = 0; a < (1 << VID_W); a++) begin
      @(negedge clk);
      rn_wr_en = 1; rn_wr_vid = VID_W'(a); rn_wr_valid = 0; rn_wr_vidr = '0;
    end
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      rn_wr_en = 1; rn_wr_vid = VID_W'(vid_of(vx[v], vy[v], vz[v])); rn_wr_valid = 1; rn_wr_vidr = VIDR_W'(v);
      dir_wr_en = 1; dir_wr_vidr = VIDR_W'(v); dir_wr_base = GID_W'(vbase[v]); dir_wr_count = CNT_W'(vcnt[v]);
    end
    @(negedge clk) begin rn_wr_en = 0; dir_wr_en = 0; end
    // DRAM and codebooks
    for (int i = 0; i < ng; i++) begin
      gauss_idx_t ix;
      ix = '0;
      ix.scale_idx = CB_IDX_W'(i); ix.rot_idx = CB_IDX_W'(i); ix.dc_idx = CB_IDX_W'(i);
      ix.sh_idx = CB_SH_IDX_W'(i % CB_SH_ENTRIES); ix.opacity = r2q(g[i].opacity);
      u_mem.mem[FH_BASE + i] = MEM_W'(fh_hw(g[i]));
      u_mem.mem[IDX_BASE + i] = ix;
      for (int e = 0; e < 3; e++) cbw(0, i, e, g[i].scale[e]);
      for (int e = 0; e < 4; e++) cbw(1, i, e, g[i].rot[e]);
      for (int e = 0; e < 3; e++) cbw(2, i, e, g[i].dc[e]);
      if (i < CB_SH_ENTRIES) for (int e = 0; e < 45; e++) cbw(3, i, e, g[i].sh_rest[e]);
    end
    @(negedge clk) cb_wr_en = 0;

    run_tile(0, 0, 1'b1, 1'b0);
    run_tile(40, 0, 1'b0, 1'b1);
    s_end = stats;
    $display("stats: dup %0d empty %0d adj_ovf %0d cyc %0d vox %0d chunks %0d overlap %0d cpass %0d ccull %0d fcull %0d batches %0d splits %0d stalls %0d term %0d",
      s_end.dup_samples, s_end.empty_voxels, s_end.adj_overflow, s_end.cycle_breaks, s_end.voxels, s_end.chunks,
      s_end.overlap_loads, s_end.coarse_pass, s_end.coarse_cull, s_end.fine_cull, s_end.sort_batches,
      s_end.sort_splits, s_end.hfu_stalls, s_end.early_term);
    check(s_end.dup_samples   > 0, "mechanism: duplicate sample dropped");
    check(s_end.empty_voxels  > 0, "mechanism: empty voxel dropped by renaming");
    if (!FULL) check(s_end.adj_overflow > 0, "mechanism: adjacent table overflow");
    check(s_end.cycle_breaks  > 0, "mechanism: cycle broken in the topological sort");
    check(s_end.chunks > s_end.voxels, "mechanism: voxel split into input-buffer chunks");
    check(s_end.overlap_loads > 0, "mechanism: loading overlapped processing (double buffer)");
    check(s_end.coarse_cull   > 0, "mechanism: coarse cull");
    check(s_end.fine_cull     > 0, "mechanism: fine cull after coarse pass");
    check(s_end.sort_splits   > 0, "mechanism: sorting batch split on a full buffer");
    check(s_end.hfu_stalls    > 0, "mechanism: HFU output back-pressure");
    check(s_end.early_term    > 0, "mechanism: early termination of a pixel");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
