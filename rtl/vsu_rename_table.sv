// vsu_rename_table: renaming table of the voxel sorting unit. Maps a voxel ID
// (VID) to a compact renamed ID (VIDr) and removes empty voxels.
//
// One entry per voxel of the grid holds {valid, VIDr}; valid is 0 for a voxel
// that holds no Gaussians. The table is written offline through the host
// port (wr_*). Lookups are a one-stage pipeline: an element entering with
// in_valid/in_ready leaves one cycle later on out_*, with has_vid cleared when
// the voxel is empty (empty_drop pulses) and the VID replaced by its VIDr.
// ray_end and group_end markers pass through unchanged. The table's function
// is the design's; its memory organisation and port timing are this
// implementation's.
module vsu_rename_table
  import sgs_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // host write port
  input  logic              wr_en,
  input  logic [VID_W-1:0]  wr_vid,
  input  logic              wr_valid,
  input  logic [VIDR_W-1:0] wr_vidr,
  // lookup stream
  input  logic              in_valid,
  input  logic [VID_W-1:0]  in_vid,
  input  logic              in_has_vid,
  input  logic              in_ray_end,
  input  logic              in_group_end,
  output logic              in_ready,
  output logic              out_valid,
  output logic [VIDR_W-1:0] out_vidr,
  output logic              out_has_vid,
  output logic              out_ray_end,
  output logic              out_group_end,
  input  logic              out_ready,
  output logic              empty_drop
);
  typedef struct packed {
    logic              valid;
    logic [VIDR_W-1:0] vidr;
  } entry_t;

  entry_t tbl [1 << VID_W];
  entry_t rd;

  assign in_ready = !out_valid || out_ready;
  assign rd       = tbl[in_vid];

  always_ff @(posedge clk) begin
    if (wr_en) tbl[wr_vid] <= '{valid: wr_valid, vidr: wr_vidr};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid     <= 1'b0;
      out_vidr      <= '0;
      out_has_vid   <= 1'b0;
      out_ray_end   <= 1'b0;
      out_group_end <= 1'b0;
      empty_drop    <= 1'b0;
    end else begin
      empty_drop <= 1'b0;
      if (in_ready) begin
        out_valid <= in_valid && (in_ray_end || (in_has_vid && rd.valid));
        if (in_valid) begin
          out_vidr      <= rd.vidr;
          out_has_vid   <= in_has_vid && rd.valid;
          out_ray_end   <= in_ray_end;
          out_group_end <= in_group_end;
          empty_drop    <= in_has_vid && !rd.valid;
        end
      end
    end
  end
endmodule
