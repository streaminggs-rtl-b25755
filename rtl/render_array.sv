// render_array: the render queue and the rendering units of one tile.
//
// NUM_PIX rendering units (64 = 4 x 4 x 4 by default) each own one pixel of
// the TILE_W x TILE_W tile whose top-left pixel is (tile_x0, tile_y0). Depth-
// sorted splats enter the render queue (in_valid/in_ready, QDEPTH entries);
// every cycle the head splat is broadcast to all units, which blend it into
// their pixels in parallel, so the array renders one Gaussian per cycle for
// the whole tile. clear starts a new tile (all pixels black, transmittance 1).
// flush reads the finished tile out, one pixel per cycle on pix_* in raster
// order (pix_idx = y*TILE_W + x), with its colour and transmittance;
// flush_done pulses after the last pixel. ev_term counts pixels reaching the
// transmittance cut-off in a cycle. idle: queue empty and not flushing.
// The queue and the parallel units follow the design; broadcasting one splat
// to a unit per pixel is this implementation's reading of "4x4x4 rendering
// units".
module render_array
  import sgs_pkg::*;
#(
  parameter int QDEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] tile_x0,
  input  logic [15:0] tile_y0,
  input  logic        clear,
  input  logic        in_valid,
  input  splat_t      in_s,
  output logic        in_ready,
  input  logic        flush,
  output logic        pix_valid,
  output logic [$clog2(NUM_PIX)-1:0] pix_idx,
  output q16_t [2:0]  pix_rgb,
  output q16_t        pix_trans,
  output logic        flush_done,
  output logic        idle,
  output logic [$clog2(NUM_PIX+1)-1:0] ev_term
);
  localparam int PW = $clog2(NUM_PIX);

  splat_t q_head;
  logic   q_full, q_empty;
  logic [$clog2(QDEPTH+1)-1:0] q_count;

  sync_fifo #(.T(splat_t), .DEPTH(QDEPTH)) u_queue (
    .clk, .rst_n, .push(in_valid && !q_full), .wr_data(in_s), .pop(!q_empty),
    .rd_data(q_head), .full(q_full), .empty(q_empty), .count(q_count));
  assign in_ready = !q_full;

  q16_t [NUM_PIX-1:0][2:0] rgb;
  q16_t [NUM_PIX-1:0]      tr;
  logic [NUM_PIX-1:0]      done, term;

  for (genvar p = 0; p < NUM_PIX; p++) begin : g_unit
    render_unit u_ru (
      .clk, .rst_n, .clear,
      .px(tile_x0 + 16'(p % TILE_W)), .py(tile_y0 + 16'(p / TILE_W)),
      .in_valid(!q_empty), .in_s(q_head),
      .rgb(rgb[p]), .trans(tr[p]), .done(done[p]), .terminated(term[p]));
  end

  always_comb begin
    ev_term = '0;
    for (int p = 0; p < NUM_PIX; p++) ev_term = ev_term + ($bits(ev_term))'(term[p]);
  end

  // tile read-out
  logic          flushing;
  logic [PW-1:0] fidx;
  assign pix_valid = flushing;
  assign pix_idx   = fidx;
  assign pix_rgb   = rgb[fidx];
  assign pix_trans = tr[fidx];
  assign idle      = q_empty && !flushing;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      flushing   <= 1'b0;
      fidx       <= '0;
      flush_done <= 1'b0;
    end else begin
      flush_done <= 1'b0;
      if (!flushing) begin
        if (flush) begin flushing <= 1'b1; fidx <= '0; end
      end else begin
        fidx <= fidx + 1'b1;
        if (fidx == PW'(NUM_PIX-1)) begin
          flushing   <= 1'b0;
          flush_done <= 1'b1;
        end
      end
    end
  end
endmodule
