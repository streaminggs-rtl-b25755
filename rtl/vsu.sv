// vsu: voxel sorting unit. For the rays of one pixel group (tile) it finds
// every voxel each ray crosses and produces one global voxel rendering order
// that respects every ray's front-to-back order.
//
// Pipeline: ray sampler (sampling, previous-ID compare) -> renaming table
// (VID -> VIDr, empty voxels removed) -> renamed VIDr list (a FIFO holding the
// per-ray lists) -> adjacent table construction. When the group's last ray
// has been inserted, the control ("Ctrl" mux) hands the adjacent table to the
// in-degree logic (vsu_topo_sort), which streams the sorted VIDrs out on
// out_* (valid/ready, out_last on the final one, out_none if the group met no
// voxel). The adjacent table is cleared when the sort ends, and the next
// group's rays may already be sampled and queued in the list FIFO meanwhile.
//
// Rays arrive on in_* (valid/ready) in voxel-grid units with in_last on the
// group's final ray. The structure follows the design's VSU; the list FIFO
// depth and the streaming hand-off are this implementation's.
module vsu
  import sgs_pkg::*;
#(
  parameter int NUM_SAMPLES = 64,
  parameter int ADJ_ENTRIES = 64,
  parameter int DST_SLOTS   = 8,
  parameter int LIST_DEPTH  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // renaming table host port
  input  logic              rn_wr_en,
  input  logic [VID_W-1:0]  rn_wr_vid,
  input  logic              rn_wr_valid,
  input  logic [VIDR_W-1:0] rn_wr_vidr,
  // rays
  input  logic              in_valid,
  input  ray_t              in_ray,
  input  logic              in_last,
  output logic              in_ready,
  // voxel order
  output logic              out_valid,
  output logic [VIDR_W-1:0] out_vidr,
  output logic              out_last,
  output logic              out_none,
  input  logic              out_ready,
  output logic              busy,
  // events
  output logic              ev_dup,
  output logic              ev_empty,
  output logic              ev_adj_overflow,
  output logic              ev_cycle_break
);
  typedef struct packed {
    logic [VIDR_W-1:0] vidr;
    logic              has_vid;
    logic              ray_end;
    logic              group_end;
  } elem_t;

  // sampler -> rename
  logic             s_valid, s_has, s_rend, s_gend, s_ready;
  logic [VID_W-1:0] s_vid;
  // rename -> list
  logic              r_valid, r_has, r_rend, r_gend, r_ready;
  logic [VIDR_W-1:0] r_vidr;

  vsu_ray_sampler #(.NUM_SAMPLES(NUM_SAMPLES)) u_sampler (
    .clk, .rst_n,
    .in_valid, .in_ray, .in_last, .in_ready,
    .out_valid(s_valid), .out_vid(s_vid), .out_has_vid(s_has),
    .out_ray_end(s_rend), .out_group_end(s_gend), .out_ready(s_ready),
    .dup_drop(ev_dup));

  vsu_rename_table u_rename (
    .clk, .rst_n,
    .wr_en(rn_wr_en), .wr_vid(rn_wr_vid), .wr_valid(rn_wr_valid), .wr_vidr(rn_wr_vidr),
    .in_valid(s_valid), .in_vid(s_vid), .in_has_vid(s_has),
    .in_ray_end(s_rend), .in_group_end(s_gend), .in_ready(s_ready),
    .out_valid(r_valid), .out_vidr(r_vidr), .out_has_vid(r_has),
    .out_ray_end(r_rend), .out_group_end(r_gend), .out_ready(r_ready),
    .empty_drop(ev_empty));

  // renamed VIDr list
  elem_t l_head;
  logic  l_full, l_empty, l_pop;
  logic [$clog2(LIST_DEPTH+1)-1:0] l_count;
  sync_fifo #(.T(elem_t), .DEPTH(LIST_DEPTH)) u_list (
    .clk, .rst_n,
    .push(r_valid && !l_full),
    .wr_data('{vidr: r_vidr, has_vid: r_has, ray_end: r_rend, group_end: r_gend}),
    .pop(l_pop), .rd_data(l_head), .full(l_full), .empty(l_empty), .count(l_count));
  assign r_ready = !l_full;

  // control: build the adjacent table, then sort, then clear
  typedef enum logic [1:0] {C_BUILD, C_START, C_SORT, C_CLEAR} cstate_t;
  cstate_t cstate;
  logic    ts_busy, ts_done, ts_start;

  assign l_pop    = (cstate == C_BUILD) && !l_empty;
  assign ts_start = (cstate == C_START);

  logic [ADJ_ENTRIES-1:0]                             t_valid;
  logic [ADJ_ENTRIES-1:0][VIDR_W-1:0]                 t_tag;
  logic [ADJ_ENTRIES-1:0][DST_SLOTS-1:0]              t_dv;
  logic [ADJ_ENTRIES-1:0][DST_SLOTS-1:0][VIDR_W-1:0]  t_dst;

  vsu_adjacent_table #(.ENTRIES(ADJ_ENTRIES), .DST_SLOTS(DST_SLOTS)) u_adj (
    .clk, .rst_n,
    .clear(cstate == C_CLEAR),
    .ins_valid(l_pop), .ins_has_vid(l_head.has_vid), .ins_vidr(l_head.vidr),
    .ins_ray_end(l_head.ray_end), .overflow(ev_adj_overflow),
    .tbl_valid(t_valid), .tbl_tag(t_tag), .tbl_dst_valid(t_dv), .tbl_dst(t_dst));

  vsu_topo_sort #(.ENTRIES(ADJ_ENTRIES), .DST_SLOTS(DST_SLOTS)) u_topo (
    .clk, .rst_n, .start(ts_start),
    .tbl_valid(t_valid), .tbl_tag(t_tag), .tbl_dst_valid(t_dv), .tbl_dst(t_dst),
    .out_valid, .out_vidr, .out_last, .out_none, .out_ready,
    .busy(ts_busy), .done(ts_done), .cycle_break(ev_cycle_break));

  always_ff @(posedge clk) begin
    if (!rst_n) cstate <= C_BUILD;
    else begin
      case (cstate)
        C_BUILD: if (l_pop && l_head.group_end) cstate <= C_START;
        C_START: cstate <= C_SORT;
        C_SORT:  if (ts_done) cstate <= C_CLEAR;
        C_CLEAR: cstate <= C_BUILD;
        default: cstate <= C_BUILD;
      endcase
    end
  end

  assign busy = !in_ready || s_valid || r_valid || !l_empty || (cstate != C_BUILD);
endmodule
