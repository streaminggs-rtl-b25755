// vsu_adjacent_table: the adjacent table of the voxel sorting unit, a small
// fully associative table that records the rendering dependencies between
// voxels of one pixel group.
//
// Each entry has a tag, the source voxel's VIDr, and a value, the list of up
// to DST_SLOTS destination VIDrs that some ray met directly after the source.
// Elements of each ray's renamed VIDr list arrive in ray order (ins_valid,
// one per cycle). For every element the table makes sure the voxel has an
// entry of its own (so isolated voxels are still rendered) and, unless it is
// the first voxel of the ray, adds it to the destination list of the previous
// voxel of the same ray, if it is not already there. ins_ray_end closes a ray.
// A node or edge that does not fit (table or list full) is dropped and
// overflow pulses. clear empties the table before a new group.
//
// The whole table is visible on the tbl_* outputs for the in-degree logic,
// which performs its own tag match. Tag/value organisation follows the
// design; sizes and the drop-on-overflow policy are this implementation's.
module vsu_adjacent_table
  import sgs_pkg::*;
#(
  parameter int ENTRIES   = 64,
  parameter int DST_SLOTS = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              ins_valid,
  input  logic              ins_has_vid,
  input  logic [VIDR_W-1:0] ins_vidr,
  input  logic              ins_ray_end,
  output logic              overflow,
  output logic [ENTRIES-1:0]                  tbl_valid,
  output logic [ENTRIES-1:0][VIDR_W-1:0]      tbl_tag,
  output logic [ENTRIES-1:0][DST_SLOTS-1:0]   tbl_dst_valid,
  output logic [ENTRIES-1:0][DST_SLOTS-1:0][VIDR_W-1:0] tbl_dst
);
  localparam int IW = $clog2(ENTRIES);
  localparam int DW = (DST_SLOTS > 1) ? $clog2(DST_SLOTS) : 1;

  logic          prev_valid;
  logic [IW-1:0] prev_idx;

  // tag match and free-entry search for the incoming VIDr
  logic          hit, has_free;
  logic [IW-1:0] hit_idx, free_idx, node_idx;
  logic          node_ok;
  // destination list of the previous voxel
  logic          dst_present, dst_has_free;
  logic [DW-1:0] dst_free;

  always_comb begin
    hit = 1'b0; hit_idx = '0; has_free = 1'b0; free_idx = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (tbl_valid[i] && tbl_tag[i] == ins_vidr) begin hit = 1'b1; hit_idx = IW'(i); end
      if (!tbl_valid[i]) begin has_free = 1'b1; free_idx = IW'(i); end
    end
    node_ok  = hit || has_free;
    node_idx = hit ? hit_idx : free_idx;
    dst_present = 1'b0; dst_has_free = 1'b0; dst_free = '0;
    for (int j = DST_SLOTS-1; j >= 0; j--) begin
      if (tbl_dst_valid[prev_idx][j] && tbl_dst[prev_idx][j] == ins_vidr) dst_present = 1'b1;
      if (!tbl_dst_valid[prev_idx][j]) begin dst_has_free = 1'b1; dst_free = DW'(j); end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      tbl_valid     <= '0;
      tbl_dst_valid <= '0;
      tbl_tag       <= '0;
      tbl_dst       <= '0;
      prev_valid    <= 1'b0;
      prev_idx      <= '0;
      overflow      <= 1'b0;
    end else begin
      overflow <= 1'b0;
      if (ins_valid) begin
        if (ins_has_vid) begin
          if (node_ok) begin
            if (!hit) begin
              tbl_valid[free_idx]     <= 1'b1;
              tbl_tag[free_idx]       <= ins_vidr;
              tbl_dst_valid[free_idx] <= '0;
            end
            if (prev_valid && !(tbl_tag[prev_idx] == ins_vidr) && !dst_present) begin
              if (dst_has_free) begin
                tbl_dst_valid[prev_idx][dst_free] <= 1'b1;
                tbl_dst[prev_idx][dst_free]       <= ins_vidr;
              end else begin
                overflow <= 1'b1;
              end
            end
            prev_valid <= 1'b1;
            prev_idx   <= node_idx;
          end else begin
            overflow   <= 1'b1;
            prev_valid <= 1'b0;
          end
        end
        if (ins_ray_end) prev_valid <= 1'b0;
      end
    end
  end
endmodule
