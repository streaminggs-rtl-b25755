// vsu_ray_sampler: walks one pixel ray through the voxel grid and emits the
// sequence of distinct voxel IDs it passes (first stage of the voxel sorting
// unit).
//
// A ray (origin and direction, both in voxel-grid units so that one unit is
// one voxel edge) is accepted when in_ready is high. The sampler then takes
// NUM_SAMPLES samples p_k = org + k*STEP*dir, one per cycle, by adding a
// precomputed step vector. Because the scene is partitioned into voxels
// offline, a sample's voxel ID is simply its integer grid coordinate packed as
// {z,y,x}; samples outside the grid have no ID. A "previous ID" register and
// comparator drop a sample whose ID equals the last emitted one (dup_drop
// pulses), so each voxel a ray crosses appears once.
//
// Output element: vid with has_vid, plus ray_end on the last sample of a ray
// (has_vid may then be 0) and group_end on the last sample of the last ray of
// a pixel group. Output uses valid/ready; the sampler holds while !out_ready.
// Throughput is one sample per cycle; a ray takes NUM_SAMPLES cycles plus one
// to load. Sampling along the ray, the ID computation and the previous-ID
// compare follow the design; the uniform step, sample count and start at t=0
// are this implementation's choices.
module vsu_ray_sampler
  import sgs_pkg::*;
#(
  parameter int   NUM_SAMPLES = 64,
  parameter q16_t STEP        = 32'sh0000_8000   // 0.5 voxel
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  ray_t             in_ray,
  input  logic             in_last,     // last ray of the pixel group
  output logic             in_ready,
  output logic             out_valid,
  output logic [VID_W-1:0] out_vid,
  output logic             out_has_vid,
  output logic             out_ray_end,
  output logic             out_group_end,
  input  logic             out_ready,
  output logic             dup_drop
);
  localparam int SW = $clog2(NUM_SAMPLES + 1);

  logic             busy;
  logic [SW-1:0]    k;
  fx_t [2:0]        pos, delta;
  logic             last_ray;
  logic             prev_valid;
  logic [VID_W-1:0] prev_vid;

  // current sample's voxel
  logic             in_grid;
  logic [VID_W-1:0] vid;
  logic             is_last_sample;
  logic             is_new;

  always_comb begin
    in_grid = 1'b1;
    for (int a = 0; a < 3; a++) begin
      if (pos[a] < 0 || pos[a] >= fx_from_int(1 << GRID_BITS)) in_grid = 1'b0;
    end
    vid = {pos[2][FX_FRAC +: GRID_BITS], pos[1][FX_FRAC +: GRID_BITS], pos[0][FX_FRAC +: GRID_BITS]};
    is_last_sample = (k == SW'(NUM_SAMPLES - 1));
    is_new         = in_grid && !(prev_valid && prev_vid == vid);
  end

  assign in_ready      = !busy;
  assign out_valid     = busy && (is_new || is_last_sample);
  assign out_vid       = vid;
  assign out_has_vid   = is_new;
  assign out_ray_end   = is_last_sample;
  assign out_group_end = is_last_sample && last_ray;

  logic advance;
  assign advance  = busy && (!out_valid || out_ready);
  assign dup_drop = advance && in_grid && !is_new;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      k          <= '0;
      prev_valid <= 1'b0;
      prev_vid   <= '0;
      last_ray   <= 1'b0;
      pos        <= '0;
      delta      <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        busy       <= 1'b1;
        k          <= '0;
        prev_valid <= 1'b0;
        last_ray   <= in_last;
        for (int a = 0; a < 3; a++) begin
          pos[a]   <= fx_from_q16(in_ray.org[a]);
          delta[a] <= fx_mul(fx_from_q16(in_ray.dir[a]), fx_from_q16(STEP));
        end
      end
    end else if (advance) begin
      if (is_new) begin
        prev_valid <= 1'b1;
        prev_vid   <= vid;
      end
      for (int a = 0; a < 3; a++) pos[a] <= pos[a] + delta[a];
      k <= k + 1'b1;
      if (is_last_sample) busy <= 1'b0;
    end
  end
endmodule
