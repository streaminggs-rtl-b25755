// tb_hfu: one hierarchical filtering unit with its codebook and a DRAM model.
// Random Gaussians (many outside the tile, some thin ones that only the fine
// test removes) are stored compressed: first halves given to the unit, codebook
// indices and opacity in DRAM, parameter values in the codebooks. The test
// checks that exactly the Gaussians the floating-point reference keeps come
// out, with the right projected values; that a second-half fetch is made only
// for Gaussians that pass the coarse test; and the coarse/fine event counts.
module tb_hfu;
  import sgs_pkg::*;
  import sgs_ref_pkg::*;
  localparam int N = 400;
  localparam int IDX_BASE = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  camera_t cam;
  logic [15:0] x0, y0;
  logic [NUM_CFU-1:0] in_valid;
  fh_rec_t [NUM_CFU-1:0] in_rec;
  logic in_ready, m_valid, m_ready, m_rsp_valid, cb_rd_valid, cb_out_valid, out_valid, out_ready, idle, fcull;
  logic [MADDR_W-1:0] m_addr;
  logic [MEM_W-1:0] m_rsp;
  gauss_idx_t cb_idx;
  gauss_dec_t cb_out;
  splat_t out_s;
  logic [2:0] cpass, ccull;
  logic cb_wr_en;
  logic [1:0] cb_wr_sel;
  logic [CB_IDX_W-1:0] cb_wr_addr;
  logic [5:0] cb_wr_elem;
  q16_t cb_wr_data;
  int checks = 0, failures = 0;

  hfu dut (.clk, .rst_n, .cam, .tile_x0(x0), .tile_y0(y0), .idx_base(MADDR_W'(IDX_BASE)),
    .in_valid, .in_rec, .in_ready, .mem_req_valid(m_valid), .mem_req_addr(m_addr), .mem_req_ready(m_ready),
    .mem_rsp_valid(m_rsp_valid), .mem_rsp_data(m_rsp), .cb_rd_valid, .cb_rd_idx(cb_idx),
    .cb_rd_out_valid(cb_out_valid), .cb_rd_out(cb_out), .out_valid, .out_s, .out_ready, .idle,
    .ev_coarse_pass(cpass), .ev_coarse_cull(ccull), .ev_fine_cull(fcull));
  codebook #(.NPORTS(1)) u_cb (.clk, .rst_n, .wr_en(cb_wr_en), .wr_sel(cb_wr_sel), .wr_addr(cb_wr_addr),
    .wr_elem(cb_wr_elem), .wr_data(cb_wr_data), .rd_valid(cb_rd_valid), .rd_idx(cb_idx),
    .rd_out_valid(cb_out_valid), .rd_out(cb_out));
  dram_model #(.AW(13), .LATENCY(10), .STALL_PCT(10)) u_mem (.clk, .rst_n, .req_valid(m_valid), .req_addr(m_addr),
    .req_ready(m_ready), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_req = 0, n_cpass = 0, n_ccull = 0, n_fcull = 0;
  splat_t got [$];
  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      n_req++;
      check(m_addr >= MADDR_W'(IDX_BASE) && m_addr < MADDR_W'(IDX_BASE + N), "fetch address in index region");
    end
    n_cpass += int'(cpass); n_ccull += int'(ccull); n_fcull += int'(fcull);
    if (out_valid && out_ready) got.push_back(out_s);
  end
  always @(negedge clk) out_ready = ($urandom % 5) != 0;

  task automatic cbw(input int sel, input int addr, input int elem, input real v);
    @(negedge clk);
    cb_wr_en = 1; cb_wr_sel = 2'(sel); cb_wr_addr = CB_IDX_W'(addr); cb_wr_elem = 6'(elem); cb_wr_data = r2q(v);
  endtask

  initial begin
    rcam_t c;
    rgauss_t g [N];
    rsplat_t cr [N], fr [N];
    int exp_cpass, exp_fpass, sent;
    c.pos = '{8.0, 8.0, 0.0}; c.fx = 64.0; c.fy = 64.0; c.cx = 20.0; c.cy = 12.0;
    cam = cam_hw(c); x0 = 16; y0 = 8;
    in_valid = '0; in_rec = '0; cb_wr_en = 0; cb_wr_sel = 0; cb_wr_addr = 0; cb_wr_elem = 0; cb_wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    exp_cpass = 0; exp_fpass = 0;
    for (int i = 0; i < N; i++) begin
      do begin
        g[i] = quantise(rand_gauss(urand(5.0, 11.0), urand(5.0, 11.0), urand(2.0, 10.0), 0.02, 0.3));
        if (i % 4 == 0) begin   // thin along the view axis: wide coarse bound, small footprint
          g[i].scale[0] = 0.02; g[i].scale[1] = 0.02; g[i].scale[2] = 0.6; g[i].smax = 0.6;
          g[i].rot = '{1.0, 0.0, 0.0, 0.0};
        end
        cr[i] = coarse_ref(c, g[i], int'(x0), int'(y0));
        fr[i] = fine_ref(c, g[i], int'(x0), int'(y0));
      end while ((cr[i].margin < 0.05 && cr[i].margin > -0.05) || (fr[i].margin < 0.05 && fr[i].margin > -0.05));
      if (cr[i].pass) exp_cpass++;
      if (cr[i].pass && fr[i].pass) exp_fpass++;
      // compressed second half: entry i of every codebook (SH entry i as N <= 512)
      u_mem.mem[IDX_BASE + i] = '0;
      u_mem.mem[IDX_BASE + i][CB_IDX_W-1:0] = CB_IDX_W'(i);
      u_mem.mem[IDX_BASE + i][2*CB_IDX_W-1 -: CB_IDX_W] = CB_IDX_W'(i);
      u_mem.mem[IDX_BASE + i][3*CB_IDX_W-1 -: CB_IDX_W] = CB_IDX_W'(i);
      u_mem.mem[IDX_BASE + i][3*CB_IDX_W + CB_SH_IDX_W - 1 -: CB_SH_IDX_W] = CB_SH_IDX_W'(i);
      u_mem.mem[IDX_BASE + i][95:64] = r2q(g[i].opacity);
      for (int e = 0; e < 3; e++) cbw(0, i, e, g[i].scale[e]);
      for (int e = 0; e < 4; e++) cbw(1, i, e, g[i].rot[e]);
      for (int e = 0; e < 3; e++) cbw(2, i, e, g[i].dc[e]);
      for (int e = 0; e < 45; e++) cbw(3, i, e, g[i].sh_rest[e]);
    end
    @(negedge clk) cb_wr_en = 0;
    check(exp_fpass < exp_cpass && exp_cpass < N, $sformatf("scene exercises both filters (%0d/%0d/%0d)", exp_fpass, exp_cpass, N));
    // feed NUM_CFU records per cycle
    sent = 0;
    while (sent < N) begin
      @(negedge clk);
      in_valid = '0;
      for (int k = 0; k < NUM_CFU; k++)
        if (sent + k < N && ($urandom % 5) != 0) begin
          in_valid[k] = 1; in_rec[k].gid = GID_W'(sent + k); in_rec[k].fh = fh_hw(g[sent + k]);
        end else if (sent + k < N) begin
          in_valid[k] = 0;
        end
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      // only advance over the lanes that were valid; invalid lanes are re-sent next time
      begin
        int adv;
        adv = 0;
        while (adv < NUM_CFU && sent + adv < N && in_valid[adv]) adv++;
        for (int k = adv; k < NUM_CFU; k++) in_valid[k] = 0;
        sent += adv;
      end
    end
    @(negedge clk) in_valid = '0;
    repeat (5) @(negedge clk);
    while (!idle) @(negedge clk);
    check(n_req == exp_cpass, $sformatf("second-half fetches %0d, coarse passes %0d", n_req, exp_cpass));
    check(n_cpass == exp_cpass && n_ccull == N - exp_cpass, $sformatf("coarse events %0d/%0d", n_cpass, n_ccull));
    check(n_fcull == exp_cpass - exp_fpass, $sformatf("fine culls %0d vs %0d", n_fcull, exp_cpass - exp_fpass));
    check(got.size() == exp_fpass, $sformatf("outputs %0d vs %0d", got.size(), exp_fpass));
    // every output matches a kept Gaussian
    foreach (got[k]) begin
      int best;
      real bd;
      best = -1; bd = 1e9;
      for (int i = 0; i < N; i++) if (cr[i].pass && fr[i].pass) begin
        real d;
        d = (q2r(got[k].depth) - fr[i].depth) ** 2 + (q2r(got[k].mx) - fr[i].mx) ** 2 + (q2r(got[k].my) - fr[i].my) ** 2;
        if (d < bd) begin bd = d; best = i; end
      end
      check(best >= 0 && bd < 1e-4, $sformatf("output %0d matches a kept Gaussian (%f)", k, bd));
      if (best >= 0) check(got[k].opacity == r2q(g[best].opacity), "opacity from DRAM");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
