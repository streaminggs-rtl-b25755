// hfu: hierarchical filtering unit. Filters the Gaussians of the current voxel
// in two steps so that only Gaussians touching the tile reach sorting, and
// only those passing the cheap first step cost a second DRAM fetch.
//
// Frontend (coarse): NUM_CFU coarse filter units take NUM_CFU first-half
// records per cycle (in_valid/in_rec, accepted together when in_ready). For
// every Gaussian that passes, the HFU fetches its second half (codebook
// indices and opacity, one DRAM word at idx_base + gid) through the DRAM
// arbiter, one request per cycle; the frontend holds while more than one
// passing Gaussian waits. Culled Gaussians cost no fetch.
// Middle: the returned indices are sent to this HFU's codebook read port
// (one cycle), and the decoded parameters, together with the uncompressed
// first half and opacity, are pushed into a FIFO of FIFO_DEPTH entries. A
// request is issued only when the FIFO, the decode stage and the requests in
// flight leave room for its answer, so responses are never refused.
// Backend (fine): one fine filter unit pops the FIFO and outputs the
// Gaussians that pass as splats (out_valid/out_ready, one per cycle).
//
// idle is high when nothing is held anywhere inside. ev_* give per-cycle
// event counts for statistics. The frontend/codebook/FIFO/backend structure
// and 4 CFU + 1 FFU are the design's; the credit scheme and the FIFO depth
// are this implementation's.
module hfu
  import sgs_pkg::*;
#(
  parameter int N_CFU      = NUM_CFU,
  parameter int FIFO_DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  camera_t     cam,
  input  logic [15:0] tile_x0,
  input  logic [15:0] tile_y0,
  input  logic [MADDR_W-1:0] idx_base,
  // first-half records
  input  logic    [N_CFU-1:0] in_valid,
  input  fh_rec_t [N_CFU-1:0] in_rec,
  output logic                in_ready,
  // DRAM (through the arbiter)
  output logic                mem_req_valid,
  output logic [MADDR_W-1:0]  mem_req_addr,
  input  logic                mem_req_ready,
  input  logic                mem_rsp_valid,
  input  logic [MEM_W-1:0]    mem_rsp_data,
  // codebook read port
  output logic                cb_rd_valid,
  output gauss_idx_t          cb_rd_idx,
  input  logic                cb_rd_out_valid,
  input  gauss_dec_t          cb_rd_out,
  // filtered Gaussians
  output logic                out_valid,
  output splat_t              out_s,
  input  logic                out_ready,
  output logic                idle,
  output logic [2:0]          ev_coarse_pass,
  output logic [2:0]          ev_coarse_cull,
  output logic                ev_fine_cull
);
  localparam int CW = $clog2(FIFO_DEPTH + 1);
  localparam int LW = (N_CFU > 1) ? $clog2(N_CFU) : 1;

  // ---------------- coarse frontend ----------------
  logic    [N_CFU-1:0] c_valid, c_pass, issued, todo;
  fh_rec_t [N_CFU-1:0] c_rec;
  logic                en;

  for (genvar i = 0; i < N_CFU; i++) begin : g_cfu
    cfu u_cfu (
      .clk, .rst_n, .en, .cam, .tile_x0, .tile_y0,
      .in_valid(in_valid[i]), .in_rec(in_rec[i]),
      .out_valid(c_valid[i]), .out_rec(c_rec[i]), .out_pass(c_pass[i]));
  end

  // pick the lowest passing Gaussian not yet fetched
  logic          have, can_issue, issue;
  logic [LW-1:0] pick;
  logic [N_CFU-1:0] pick_mask;
  always_comb begin
    todo = c_pass & ~issued;
    have = 1'b0; pick = '0;
    for (int i = N_CFU-1; i >= 0; i--) if (todo[i]) begin have = 1'b1; pick = LW'(i); end
    pick_mask = '0;
    pick_mask[pick] = have;
  end

  // credit: in-flight + decode stage + FIFO must stay within FIFO_DEPTH
  logic          meta_full, meta_empty, dec_valid, f_full, f_empty, f_pop;
  logic [$clog2(FIFO_DEPTH+1)-1:0] meta_count, f_count;
  fh_rec_t       meta_head, dec_meta;
  gauss_idx_t    rsp_idx;

  assign can_issue     = (int'(meta_count) + int'(f_count) + int'(dec_valid)) < FIFO_DEPTH;
  assign mem_req_valid = have && can_issue;
  assign mem_req_addr  = idx_base + MADDR_W'(c_rec[pick].gid);
  assign issue         = mem_req_valid && mem_req_ready;
  assign en            = ((todo & ~(issue ? pick_mask : '0)) == '0);
  assign in_ready      = en;

  always_ff @(posedge clk) begin
    if (!rst_n)  issued <= '0;
    else if (en) issued <= '0;
    else if (issue) issued <= issued | pick_mask;
  end

  always_comb begin
    ev_coarse_pass = '0;
    ev_coarse_cull = '0;
    if (en)
      for (int i = 0; i < N_CFU; i++) begin
        ev_coarse_pass = ev_coarse_pass + 3'(c_valid[i] && c_pass[i]);
        ev_coarse_cull = ev_coarse_cull + 3'(c_valid[i] && !c_pass[i]);
      end
  end

  // ---------------- index fetch and codebook decode ----------------
  sync_fifo #(.T(fh_rec_t), .DEPTH(FIFO_DEPTH)) u_meta (
    .clk, .rst_n, .push(issue), .wr_data(c_rec[pick]), .pop(mem_rsp_valid),
    .rd_data(meta_head), .full(meta_full), .empty(meta_empty), .count(meta_count));

  assign rsp_idx     = gauss_idx_t'(mem_rsp_data);
  assign cb_rd_valid = mem_rsp_valid;
  assign cb_rd_idx   = rsp_idx;

  q16_t dec_opacity;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dec_valid   <= 1'b0;
      dec_meta    <= '0;
      dec_opacity <= '0;
    end else begin
      dec_valid <= mem_rsp_valid;
      if (mem_rsp_valid) begin
        dec_meta    <= meta_head;
        dec_opacity <= rsp_idx.opacity;
      end
    end
  end

  // ---------------- FIFO and fine backend ----------------
  ffu_in_t f_head, f_in;
  assign f_in = '{fh: dec_meta.fh, dec: cb_rd_out, opacity: dec_opacity};

  sync_fifo #(.T(ffu_in_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push(dec_valid && cb_rd_out_valid), .wr_data(f_in), .pop(f_pop),
    .rd_data(f_head), .full(f_full), .empty(f_empty), .count(f_count));

  logic ffu_in_ready;
  assign f_pop = !f_empty && ffu_in_ready;

  ffu u_ffu (
    .clk, .rst_n, .cam, .tile_x0, .tile_y0,
    .in_valid(!f_empty), .in_g(f_head), .in_ready(ffu_in_ready),
    .out_valid, .out_s, .out_ready, .cull(ev_fine_cull));

  assign idle = (c_valid == '0) && meta_empty && !dec_valid && f_empty && !out_valid;

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(mem_rsp_valid && meta_empty)) else $error("hfu: response without request");
      assert (!(dec_valid && f_full))         else $error("hfu: FIFO overrun");
    end
  end
endmodule
