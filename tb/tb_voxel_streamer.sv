// tb_voxel_streamer: the voxel streamer with a DRAM model and stand-in HFUs
// (random ready, busy for a few cycles after taking records). A sequence of
// voxels of various sizes, one larger than an input-buffer bank, is pushed
// through the voxel queue. Checks: every Gaussian of every voxel reaches an
// HFU exactly once, in voxel order, with its first half as stored in DRAM;
// one batch end per chunk, issued only after the HFUs went idle; the large
// voxel is split into chunks; loading overlaps processing; a "none" marker
// loads nothing.
module tb_voxel_streamer;
  import sgs_pkg::*;
  localparam int BR = 512;
  localparam int FH_BASE = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic dir_wr_en, vq_valid, vq_none, vq_pop, m_valid, m_ready, m_rsp_valid, batch_end, idle, ev_voxel, ev_chunk, ev_overlap;
  logic [VIDR_W-1:0] dir_wr_vidr, vq_vidr;
  logic [GID_W-1:0] dir_wr_base;
  logic [CNT_W-1:0] dir_wr_count;
  logic [MADDR_W-1:0] m_addr;
  logic [MEM_W-1:0] m_rsp;
  logic    [NUM_HFU-1:0][NUM_CFU-1:0] hv;
  fh_rec_t [NUM_HFU-1:0][NUM_CFU-1:0] hr;
  logic [NUM_HFU-1:0] hready, hidle;
  int checks = 0, failures = 0;

  voxel_streamer #(.BANK_RECS(BR)) dut (.clk, .rst_n, .fh_base(MADDR_W'(FH_BASE)),
    .dir_wr_en, .dir_wr_vidr, .dir_wr_base, .dir_wr_count,
    .vq_valid, .vq_vidr, .vq_none, .vq_pop,
    .mem_req_valid(m_valid), .mem_req_addr(m_addr), .mem_req_ready(m_ready),
    .mem_rsp_valid(m_rsp_valid), .mem_rsp_data(m_rsp),
    .hfu_valid(hv), .hfu_rec(hr), .hfu_ready(hready), .hfu_idle(hidle),
    .batch_end, .idle, .ev_voxel, .ev_chunk, .ev_overlap);
  dram_model #(.AW(14), .LATENCY(12), .STALL_PCT(15)) u_mem (.clk, .rst_n, .req_valid(m_valid), .req_addr(m_addr),
    .req_ready(m_ready), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic gauss_fh_t word(input int gid);
    gauss_fh_t f;
    f.x = q16_t'(gid * 3); f.y = q16_t'(gid ^ 32'h1234); f.z = q16_t'(~gid); f.s = q16_t'(gid + 77);
    return f;
  endfunction

  // stand-in HFUs
  int busy_cnt [NUM_HFU];
  int got [$];
  int n_batch = 0, n_chunk = 0, n_overlap = 0, n_voxel = 0, bad_batch = 0;
  always @(negedge clk) for (int h = 0; h < NUM_HFU; h++) hready[h] = ($urandom % 4) != 0;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int h = 0; h < NUM_HFU; h++) begin
        if (busy_cnt[h] > 0) busy_cnt[h]--;
        for (int c = 0; c < NUM_CFU; c++) if (hv[h][c]) begin
          check(hready[h], "records only offered with ready");
          check(hr[h][c].fh == word(int'(hr[h][c].gid)), "first half data");
          got.push_back(int'(hr[h][c].gid));
          busy_cnt[h] = 3;
        end
      end
      if (batch_end) begin
        n_batch++;
        for (int h = 0; h < NUM_HFU; h++) if (busy_cnt[h] != 0) bad_batch++;
      end
      if (ev_chunk) n_chunk++;
      if (ev_overlap) n_overlap++;
      if (ev_voxel) n_voxel++;
    end
  end
  always_comb for (int h = 0; h < NUM_HFU; h++) hidle[h] = (busy_cnt[h] == 0);

  initial begin
    int vbase [8], vcnt [8], order [$], exp_gids [$], exp_chunks;
    dir_wr_en = 0; dir_wr_vidr = 0; dir_wr_base = 0; dir_wr_count = 0; vq_valid = 0; vq_vidr = 0; vq_none = 0;
    for (int h = 0; h < NUM_HFU; h++) busy_cnt[h] = 0;
    for (int a = 0; a < 8192; a++) u_mem.mem[FH_BASE + a] = MEM_W'(word(a));
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directory: voxel v holds vcnt[v] Gaussians from vbase[v]
    vcnt = '{5, 16, 17, 1200, 64, 300, 1, 33};
    begin
      int b;
      b = 0;
      for (int v = 0; v < 8; v++) begin
        vbase[v] = b; b += vcnt[v] + 7;
        @(negedge clk);
        dir_wr_en = 1; dir_wr_vidr = VIDR_W'(100 + v); dir_wr_base = GID_W'(vbase[v]); dir_wr_count = CNT_W'(vcnt[v]);
      end
      @(negedge clk) dir_wr_en = 0;
    end
    order = '{2, 0, 3, 7, 5, 1, 4, 6};
    exp_chunks = 0;
    foreach (order[i]) begin
      for (int k = 0; k < vcnt[order[i]]; k++) exp_gids.push_back(vbase[order[i]] + k);
      exp_chunks += (vcnt[order[i]] + BR - 1) / BR;
    end
    // push the order, then a none marker
    for (int i = 0; i <= order.size(); i++) begin
      @(negedge clk);
      vq_valid = 1;
      vq_none  = (i == order.size());
      vq_vidr  = VIDR_W'((i < order.size()) ? 100 + order[i] : 0);
      #1;
      while (!vq_pop) begin @(negedge clk); #1; end
      @(negedge clk);
      vq_valid = 0;
    end
    repeat (5) @(negedge clk);
    while (!idle || (busy_cnt[0] | busy_cnt[1] | busy_cnt[2] | busy_cnt[3]) != 0) @(negedge clk);
    repeat (5) @(negedge clk);
    check(got.size() == exp_gids.size(), $sformatf("delivered %0d of %0d", got.size(), exp_gids.size()));
    begin
      int mism;
      mism = 0;
      for (int i = 0; i < exp_gids.size() && i < got.size(); i++) if (got[i] != exp_gids[i]) mism++;
      check(mism == 0, $sformatf("%0d records out of order", mism));
    end
    check(n_batch == exp_chunks && n_chunk == exp_chunks, $sformatf("batches %0d chunks %0d expected %0d", n_batch, n_chunk, exp_chunks));
    check(bad_batch == 0, "batch end only when HFUs idle");
    check(n_voxel == order.size(), "voxel events");
    check(n_overlap > 0, "loading overlapped processing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
