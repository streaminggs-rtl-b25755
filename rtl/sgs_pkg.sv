// sgs_pkg: types, sizes and fixed-point helpers shared by the voxel-streaming
// Gaussian-splatting accelerator.
//
// Number formats. Everything stored in DRAM or in the codebooks is a 32-bit
// two's-complement Q16.16 value (32-bit words make the four codebooks exactly
// 250 KB, the codebook buffer size of the design). Inside the datapaths values
// are widened to a 64-bit Q40.24 format (fx_t) so that pixel-space covariances,
// determinants and their reciprocals keep range and precision. The helpers
// below do the widening, multiply, divide and square root on fx_t.
//
// Sizes that are the design's (4 HFUs of 4 CFUs and 1 FFU, 2 sorting units,
// 64 rendering units, 4096/512 codebook entries, 16 KB double-buffered input
// buffer) are given here as defaults; the rest (tile of 8x8 pixels, grid of
// 16x16x16 voxels, table sizes) are this implementation's own choices.
package sgs_pkg;

  // ---------------- fixed point ----------------
  localparam int FX_W    = 64;
  localparam int FX_FRAC = 24;
  typedef logic signed [FX_W-1:0] fx_t;
  typedef logic signed [31:0]     q16_t;     // storage format Q16.16

  localparam fx_t FX_ONE  = fx_t'(64'sd1 <<< FX_FRAC);
  localparam fx_t FX_HALF = fx_t'(64'sd1 <<< (FX_FRAC-1));

  function automatic fx_t fx_from_q16(input q16_t v);
    return fx_t'(v) <<< (FX_FRAC - 16);
  endfunction

  function automatic q16_t fx_to_q16(input fx_t v);
    return q16_t'(v >>> (FX_FRAC - 16));
  endfunction

  function automatic fx_t fx_from_int(input int v);
    return fx_t'(v) <<< FX_FRAC;
  endfunction

  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = (2*FX_W)'(a) * (2*FX_W)'(b);
    return fx_t'(p >>> FX_FRAC);
  endfunction

  // a / b; a zero divisor returns the largest positive value
  function automatic fx_t fx_div(input fx_t a, input fx_t b);
    logic signed [2*FX_W-1:0] n;
    if (b == '0) return {1'b0, {(FX_W-1){1'b1}}};
    n = (2*FX_W)'(a) <<< FX_FRAC;
    return fx_t'(n / (2*FX_W)'(b));
  endfunction

  // square root of a non-negative fx_t (bit-serial integer square root of a<<FRAC)
  function automatic fx_t fx_sqrt(input fx_t a);
    logic [2*FX_W-1:0] x, r, b;
    if (a <= 0) return '0;
    x = (2*FX_W)'(a) << FX_FRAC;
    r = '0;
    b = (2*FX_W)'(1) << (2*FX_W-2);
    while (b > x) b = b >> 2;
    while (b != 0) begin
      if (x >= r + b) begin
        x = x - (r + b);
        r = (r >> 1) + b;
      end else begin
        r = r >> 1;
      end
      b = b >> 2;
    end
    return fx_t'(r);
  endfunction

  function automatic fx_t fx_max(input fx_t a, input fx_t b);
    return (a > b) ? a : b;
  endfunction

  function automatic fx_t fx_min(input fx_t a, input fx_t b);
    return (a < b) ? a : b;
  endfunction

  // floor to integer
  function automatic int fx_floor(input fx_t a);
    return int'(a >>> FX_FRAC);
  endfunction

  // ---------------- design sizes ----------------
  localparam int NUM_HFU      = 4;     // Hierarchical filtering units
  localparam int NUM_CFU      = 4;     // coarse filter units per HFU
  localparam int NUM_SORTER   = 2;     // bitonic sorting units
  localparam int TILE_W       = 8;     // tile is TILE_W x TILE_W pixels
  localparam int NUM_PIX      = TILE_W * TILE_W;   // = 64 rendering units (4x4x4)

  localparam int GRID_BITS    = 4;     // voxel grid of 16 x 16 x 16
  localparam int VID_W        = 3 * GRID_BITS;
  localparam int VIDR_W       = 12;
  localparam int GID_W        = 24;    // Gaussian index in DRAM
  localparam int CNT_W        = 16;    // Gaussians per voxel

  localparam int CB_ENTRIES    = 4096; // scale, rotation and DC codebooks
  localparam int CB_SH_ENTRIES = 512;  // SH codebook
  localparam int CB_IDX_W      = 12;
  localparam int CB_SH_IDX_W   = 9;
  localparam int SH_REST       = 45;   // 15 higher-order coefficients x 3 colours

  localparam int MEM_W        = 128;   // DRAM word (one first-half record)
  localparam int MADDR_W      = 32;

  // ---------------- records ----------------
  // camera: world-to-camera rotation rows and translation, intrinsics, centre
  typedef struct packed {
    q16_t [2:0][2:0] r;    // r[row][col]
    q16_t [2:0]      t;
    q16_t            fx, fy, cx, cy;
    q16_t [2:0]      pos;  // camera centre in world space
  } camera_t;

  // first half of a Gaussian as stored in DRAM (one MEM_W word): x,y,z, max scale
  typedef struct packed {
    q16_t s;
    q16_t z;
    q16_t y;
    q16_t x;
  } gauss_fh_t;

  // second half in DRAM: codebook indices and the uncompressed opacity
  typedef struct packed {
    logic [31:0]            rsvd;
    q16_t                   opacity;
    logic [18:0]            pad;
    logic [CB_SH_IDX_W-1:0] sh_idx;
    logic [CB_IDX_W-1:0]    dc_idx;
    logic [CB_IDX_W-1:0]    rot_idx;
    logic [CB_IDX_W-1:0]    scale_idx;
  } gauss_idx_t;

  // decoded second half (codebook outputs)
  typedef struct packed {
    q16_t [2:0]         scale;   // activated scales
    q16_t [3:0]         rot;     // normalised quaternion (w,x,y,z) at [0..3]
    q16_t [2:0]         dc;      // SH degree-0 coefficient per colour
    q16_t [SH_REST-1:0] sh_rest; // sh_rest[3*k + c], k = 0..14
  } gauss_dec_t;

  // Gaussian entering the fine-grained filter
  typedef struct packed {
    gauss_fh_t  fh;
    gauss_dec_t dec;
    q16_t       opacity;
  } ffu_in_t;

  // Gaussian handed to sorting and rendering
  typedef struct packed {
    q16_t       depth;
    q16_t       mx, my;      // projected centre (pixels)
    q16_t       ca, cb, cc;  // conic (inverse 2D covariance) a, b, c
    q16_t       opacity;
    q16_t [2:0] rgb;
  } splat_t;

  // first-half record tagged with its Gaussian index
  typedef struct packed {
    logic [GID_W-1:0] gid;
    gauss_fh_t        fh;
  } fh_rec_t;

  // a pixel ray in voxel-grid units (one unit = one voxel edge)
  typedef struct packed {
    q16_t [2:0] org;
    q16_t [2:0] dir;
  } ray_t;

  // event counters of the whole accelerator
  typedef struct packed {
    logic [31:0] dup_samples;     // ray samples dropped by the previous-ID compare
    logic [31:0] empty_voxels;    // samples in empty voxels dropped by renaming
    logic [31:0] adj_overflow;    // edges or nodes lost to a full adjacent table
    logic [31:0] cycle_breaks;    // forced outputs when no zero in-degree exists
    logic [31:0] voxels;          // voxels streamed
    logic [31:0] chunks;          // input-buffer chunks (>1 per voxel when it is large)
    logic [31:0] overlap_loads;   // cycles loading one bank while the other is processed
    logic [31:0] coarse_pass;     // Gaussians passing the coarse filter
    logic [31:0] coarse_cull;     // Gaussians culled by the coarse filter
    logic [31:0] fine_cull;       // Gaussians culled by the fine filter
    logic [31:0] sort_batches;    // batches sorted
    logic [31:0] sort_splits;     // batches cut because a sorting buffer was full
    logic [31:0] hfu_stalls;      // cycles the HFUs were back-pressured
    logic [31:0] early_term;      // pixels that reached transmittance cut-off
  } stats_t;

endpackage
