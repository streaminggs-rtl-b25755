// sgs_top: the voxel-streaming 3D Gaussian splatting accelerator.
//
// A frame is rendered tile by tile. For each tile the host pulses tile_start
// and streams the tile's pixel rays (in voxel-grid units) into the voxel
// sorting unit (VSU), which finds the voxels they cross and emits one global
// front-to-back voxel order into the voxel queue. The voxel streamer loads the
// voxels in that order from DRAM into the double-buffered input buffer; four
// hierarchical filtering units (HFUs, each 4 coarse + 1 fine filter unit)
// drop the Gaussians that miss the tile, fetching and decoding (shared
// codebook buffer) the compressed second half only for Gaussians that pass
// the coarse filter. The survivors of one voxel are collected by one of two
// bitonic sorting units, sorted by depth and drained, in voxel order, into the
// render queue of 64 rendering units that blend them into the tile's pixels.
// Only the codebook indices and first halves are read from DRAM; no
// intermediate data leaves the chip. When the last voxel is rendered the tile
// is read out on pix_* and tile_done pulses.
//
// Sorting-buffer control: the HFU outputs go to the "target" sorting unit.
// When a voxel's batch ends (voxel_streamer batch_end) or the target's buffer
// fills up while Gaussians are waiting, the target is started and the other
// sorting unit becomes the target; sorting units start and drain strictly in
// turn, so the render queue sees the voxels in order.
//
// Interfaces: host write ports for the renaming table, the voxel directory
// and the codebooks (loaded once per scene); the camera and the tile origin
// must stay stable during a tile; one in-order DRAM read port of 128-bit
// words (first halves at fh_base + gid, second halves at idx_base + gid);
// stats gives running event counts. Block structure and sizes are the
// design's; interfaces, handshakes and the sorting-buffer control are this
// implementation's.
module sgs_top
  import sgs_pkg::*;
#(
  parameter int NUM_SAMPLES = 64,
  parameter int ADJ_ENTRIES = 64,
  parameter int DST_SLOTS   = 8,
  parameter int BANK_RECS   = 512,
  parameter int SORT_CAP    = 256,
  parameter int CB_N        = CB_ENTRIES,
  parameter int CB_SH_N     = CB_SH_ENTRIES
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  camera_t            cam,
  input  logic [15:0]        tile_x0,
  input  logic [15:0]        tile_y0,
  input  logic [MADDR_W-1:0] fh_base,
  input  logic [MADDR_W-1:0] idx_base,
  // host table loading
  input  logic               rn_wr_en,
  input  logic [VID_W-1:0]   rn_wr_vid,
  input  logic               rn_wr_valid,
  input  logic [VIDR_W-1:0]  rn_wr_vidr,
  input  logic               dir_wr_en,
  input  logic [VIDR_W-1:0]  dir_wr_vidr,
  input  logic [GID_W-1:0]   dir_wr_base,
  input  logic [CNT_W-1:0]   dir_wr_count,
  input  logic               cb_wr_en,
  input  logic [1:0]         cb_wr_sel,
  input  logic [CB_IDX_W-1:0] cb_wr_addr,
  input  logic [5:0]         cb_wr_elem,
  input  q16_t               cb_wr_data,
  // tile control and rays
  input  logic               tile_start,
  input  logic               ray_valid,
  input  ray_t               ray,
  input  logic               ray_last,
  output logic               ray_ready,
  output logic               tile_busy,
  output logic               tile_done,
  // DRAM
  output logic               mem_req_valid,
  output logic [MADDR_W-1:0] mem_req_addr,
  input  logic               mem_req_ready,
  input  logic               mem_rsp_valid,
  input  logic [MEM_W-1:0]   mem_rsp_data,
  // pixels
  output logic               pix_valid,
  output logic [$clog2(NUM_PIX)-1:0] pix_idx,
  output q16_t [2:0]         pix_rgb,
  output q16_t               pix_trans,
  output stats_t             stats
);
  // ---------------- VSU and voxel queue ----------------
  typedef struct packed {
    logic [VIDR_W-1:0] vidr;
    logic              last;
    logic              none;
  } vq_t;

  logic              v_valid, v_last, v_none, v_busy;
  logic [VIDR_W-1:0] v_vidr;
  logic              ev_dup, ev_empty, ev_adj_ovf, ev_cyc;
  vq_t               vq_head;
  logic              vq_full, vq_empty, vq_pop;
  logic [4:0]        vq_count;

  vsu #(.NUM_SAMPLES(NUM_SAMPLES), .ADJ_ENTRIES(ADJ_ENTRIES), .DST_SLOTS(DST_SLOTS)) u_vsu (
    .clk, .rst_n,
    .rn_wr_en, .rn_wr_vid, .rn_wr_valid, .rn_wr_vidr,
    .in_valid(ray_valid), .in_ray(ray), .in_last(ray_last), .in_ready(ray_ready),
    .out_valid(v_valid), .out_vidr(v_vidr), .out_last(v_last), .out_none(v_none),
    .out_ready(!vq_full), .busy(v_busy),
    .ev_dup, .ev_empty, .ev_adj_overflow(ev_adj_ovf), .ev_cycle_break(ev_cyc));

  sync_fifo #(.T(vq_t), .DEPTH(16)) u_voxel_queue (
    .clk, .rst_n, .push(v_valid && !vq_full),
    .wr_data('{vidr: v_vidr, last: v_last, none: v_none}),
    .pop(vq_pop), .rd_data(vq_head), .full(vq_full), .empty(vq_empty), .count(vq_count));

  // ---------------- streamer, DRAM arbiter, HFUs, codebook ----------------
  logic    [NUM_HFU-1:0][NUM_CFU-1:0] h_in_valid;
  fh_rec_t [NUM_HFU-1:0][NUM_CFU-1:0] h_in_rec;
  logic    [NUM_HFU-1:0] h_in_ready, h_idle;
  logic                  batch_end, s_idle, ev_voxel, ev_chunk, ev_overlap;

  logic [NUM_HFU:0]               a_req_valid, a_req_ready, a_rsp_valid;
  logic [NUM_HFU:0][MADDR_W-1:0]  a_req_addr;
  logic [MEM_W-1:0]               a_rsp_data;

  voxel_streamer #(.BANK_RECS(BANK_RECS)) u_streamer (
    .clk, .rst_n, .fh_base,
    .dir_wr_en, .dir_wr_vidr, .dir_wr_base, .dir_wr_count,
    .vq_valid(!vq_empty), .vq_vidr(vq_head.vidr), .vq_none(vq_head.none), .vq_pop,
    .mem_req_valid(a_req_valid[0]), .mem_req_addr(a_req_addr[0]), .mem_req_ready(a_req_ready[0]),
    .mem_rsp_valid(a_rsp_valid[0]), .mem_rsp_data(a_rsp_data),
    .hfu_valid(h_in_valid), .hfu_rec(h_in_rec), .hfu_ready(h_in_ready), .hfu_idle(h_idle),
    .batch_end, .idle(s_idle), .ev_voxel, .ev_chunk, .ev_overlap);

  dram_arbiter #(.NREQ(NUM_HFU + 1)) u_arb (
    .clk, .rst_n,
    .req_valid(a_req_valid), .req_addr(a_req_addr), .req_ready(a_req_ready),
    .rsp_valid(a_rsp_valid), .rsp_data(a_rsp_data),
    .mem_req_valid, .mem_req_addr, .mem_req_ready, .mem_rsp_valid, .mem_rsp_data);

  logic       [NUM_HFU-1:0] cb_rd_valid, cb_out_valid;
  gauss_idx_t [NUM_HFU-1:0] cb_rd_idx;
  gauss_dec_t [NUM_HFU-1:0] cb_out;

  codebook #(.NPORTS(NUM_HFU), .ENTRIES(CB_N), .SH_ENTRIES(CB_SH_N)) u_codebook (
    .clk, .rst_n,
    .wr_en(cb_wr_en), .wr_sel(cb_wr_sel), .wr_addr(cb_wr_addr), .wr_elem(cb_wr_elem), .wr_data(cb_wr_data),
    .rd_valid(cb_rd_valid), .rd_idx(cb_rd_idx), .rd_out_valid(cb_out_valid), .rd_out(cb_out));

  logic   [NUM_HFU-1:0] h_out_valid, h_fine_cull;
  splat_t [NUM_HFU-1:0] h_out;
  logic                 h_out_ready;
  logic   [NUM_HFU-1:0][2:0] h_cpass, h_ccull;

  for (genvar h = 0; h < NUM_HFU; h++) begin : g_hfu
    hfu u_hfu (
      .clk, .rst_n, .cam, .tile_x0, .tile_y0, .idx_base,
      .in_valid(h_in_valid[h]), .in_rec(h_in_rec[h]), .in_ready(h_in_ready[h]),
      .mem_req_valid(a_req_valid[h+1]), .mem_req_addr(a_req_addr[h+1]), .mem_req_ready(a_req_ready[h+1]),
      .mem_rsp_valid(a_rsp_valid[h+1]), .mem_rsp_data(a_rsp_data),
      .cb_rd_valid(cb_rd_valid[h]), .cb_rd_idx(cb_rd_idx[h]),
      .cb_rd_out_valid(cb_out_valid[h]), .cb_rd_out(cb_out[h]),
      .out_valid(h_out_valid[h]), .out_s(h_out[h]), .out_ready(h_out_ready),
      .idle(h_idle[h]), .ev_coarse_pass(h_cpass[h]), .ev_coarse_cull(h_ccull[h]),
      .ev_fine_cull(h_fine_cull[h]));
  end

  // ---------------- sorting units ----------------
  logic tgt, rd_sel;
  logic [NUM_SORTER-1:0] s_in_ready, s_full, s_start, s_out_valid, s_out_last, s_out_ready;
  logic [NUM_SORTER-1:0] s_filling, s_empty, s_done;
  splat_t [NUM_SORTER-1:0] s_out;
  logic split, start_tgt;

  assign split     = s_full[tgt] && (h_out_valid != '0);
  assign start_tgt = s_filling[tgt] && !s_empty[tgt] && (batch_end || split);
  assign h_out_ready = s_in_ready[tgt];

  logic r_in_ready;
  for (genvar s = 0; s < NUM_SORTER; s++) begin : g_sort
    assign s_start[s]     = start_tgt && (tgt == s);
    assign s_out_ready[s] = (rd_sel == s) && r_in_ready;
    bitonic_sorter #(.CAP(SORT_CAP), .LANES(NUM_HFU)) u_sorter (
      .clk, .rst_n,
      .in_valid((tgt == s) ? h_out_valid : '0), .in_s(h_out), .in_ready(s_in_ready[s]),
      .full(s_full[s]), .start(s_start[s]),
      .out_valid(s_out_valid[s]), .out_s(s_out[s]), .out_last(s_out_last[s]),
      .out_ready(s_out_ready[s]),
      .filling(s_filling[s]), .empty(s_empty[s]), .sorting_done(s_done[s]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tgt    <= 1'b0;
      rd_sel <= 1'b0;
    end else begin
      if (start_tgt) tgt <= !tgt;
      if (s_out_valid[rd_sel] && s_out_ready[rd_sel] && s_out_last[rd_sel]) rd_sel <= !rd_sel;
    end
  end

  // ---------------- render queue and rendering units ----------------
  logic r_idle, flush, flush_done;
  logic [$clog2(NUM_PIX+1)-1:0] ev_term;

  render_array u_render (
    .clk, .rst_n, .tile_x0, .tile_y0, .clear(tile_start),
    .in_valid(s_out_valid[rd_sel]), .in_s(s_out[rd_sel]), .in_ready(r_in_ready),
    .flush, .pix_valid, .pix_idx, .pix_rgb, .pix_trans, .flush_done,
    .idle(r_idle), .ev_term);

  // ---------------- tile control ----------------
  typedef enum logic [1:0] {T_IDLE, T_RUN, T_FLUSH} tstate_t;
  tstate_t tstate;
  logic    order_seen;     // the tile's last voxel entered the voxel queue
  logic    drained;

  assign drained = order_seen && vq_empty && s_idle && (&h_idle) &&
                   (&s_empty) && r_idle && !v_busy;
  assign flush     = (tstate == T_RUN) && drained;
  assign tile_busy = (tstate != T_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tstate     <= T_IDLE;
      order_seen <= 1'b0;
      tile_done  <= 1'b0;
    end else begin
      tile_done <= 1'b0;
      if (v_valid && !vq_full && (v_last || v_none)) order_seen <= 1'b1;
      case (tstate)
        T_IDLE:  if (tile_start) begin tstate <= T_RUN; order_seen <= 1'b0; end
        T_RUN:   if (drained) tstate <= T_FLUSH;
        T_FLUSH: if (flush_done) begin tstate <= T_IDLE; tile_done <= 1'b1; end
        default: tstate <= T_IDLE;
      endcase
    end
  end

  // ---------------- statistics ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) stats <= '0;
    else begin
      logic [31:0] cp, cc, fc;
      cp = '0; cc = '0; fc = '0;
      for (int h = 0; h < NUM_HFU; h++) begin
        cp = cp + 32'(h_cpass[h]);
        cc = cc + 32'(h_ccull[h]);
        fc = fc + 32'(h_fine_cull[h]);
      end
      stats.dup_samples   <= stats.dup_samples   + 32'(ev_dup);
      stats.empty_voxels  <= stats.empty_voxels  + 32'(ev_empty);
      stats.adj_overflow  <= stats.adj_overflow  + 32'(ev_adj_ovf);
      stats.cycle_breaks  <= stats.cycle_breaks  + 32'(ev_cyc);
      stats.voxels        <= stats.voxels        + 32'(ev_voxel);
      stats.chunks        <= stats.chunks        + 32'(ev_chunk);
      stats.overlap_loads <= stats.overlap_loads + 32'(ev_overlap);
      stats.coarse_pass   <= stats.coarse_pass   + cp;
      stats.coarse_cull   <= stats.coarse_cull   + cc;
      stats.fine_cull     <= stats.fine_cull     + fc;
      stats.sort_batches  <= stats.sort_batches  + 32'(start_tgt);
      stats.sort_splits   <= stats.sort_splits   + 32'(start_tgt && !batch_end);
      stats.hfu_stalls    <= stats.hfu_stalls    + 32'((h_out_valid != '0) && !h_out_ready);
      stats.early_term    <= stats.early_term    + 32'(ev_term);
    end
  end
endmodule
