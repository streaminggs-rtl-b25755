// codebook: the on-chip vector-quantisation codebook buffer that decodes the
// compressed second half of each Gaussian.
//
// Separate codebooks for separate parameter groups: scale (3 values),
// rotation quaternion (4), DC colour (3), each with CB_ENTRIES entries, and
// the 45 higher-order SH coefficients with CB_SH_ENTRIES entries. All values
// are 32-bit Q16.16, which makes the default 4096/512-entry configuration
// 4096*10*4 + 512*45*4 bytes = 250 KB. Codebooks are trained offline and
// loaded through the host write port, one 32-bit value per cycle:
// wr_sel selects the codebook (0 scale, 1 rotation, 2 DC, 3 SH), wr_addr the
// entry, wr_elem the value within it.
//
// NPORTS read ports (one per HFU) each take a set of indices (rd_valid,
// rd_idx) and return the decoded parameters one cycle later (rd_out_valid,
// rd_out), like a synchronous SRAM. The codebook contents, sizes and purpose
// are the design's; the multi-ported organisation is this implementation's.
module codebook
  import sgs_pkg::*;
#(
  parameter int NPORTS     = NUM_HFU,
  parameter int ENTRIES    = CB_ENTRIES,
  parameter int SH_ENTRIES = CB_SH_ENTRIES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [1:0]  wr_sel,
  input  logic [CB_IDX_W-1:0] wr_addr,
  input  logic [5:0]  wr_elem,
  input  q16_t        wr_data,
  input  logic       [NPORTS-1:0] rd_valid,
  input  gauss_idx_t [NPORTS-1:0] rd_idx,
  output logic       [NPORTS-1:0] rd_out_valid,
  output gauss_dec_t [NPORTS-1:0] rd_out
);
  q16_t scale_mem [ENTRIES][3];
  q16_t rot_mem   [ENTRIES][4];
  q16_t dc_mem    [ENTRIES][3];
  q16_t sh_mem    [SH_ENTRIES][SH_REST];

  localparam int AW  = $clog2(ENTRIES);
  localparam int SAW = $clog2(SH_ENTRIES);

  always_ff @(posedge clk) begin
    if (wr_en) begin
      case (wr_sel)
        2'd0: if (wr_elem < 6'd3) scale_mem[wr_addr[AW-1:0]][wr_elem[1:0]] <= wr_data;
        2'd1: if (wr_elem < 6'd4) rot_mem[wr_addr[AW-1:0]][wr_elem[1:0]]   <= wr_data;
        2'd2: if (wr_elem < 6'd3) dc_mem[wr_addr[AW-1:0]][wr_elem[1:0]]    <= wr_data;
        default: if (int'(wr_elem) < SH_REST) sh_mem[wr_addr[SAW-1:0]][wr_elem] <= wr_data;
      endcase
    end
  end

  for (genvar p = 0; p < NPORTS; p++) begin : g_port
    always_ff @(posedge clk) begin
      if (!rst_n) rd_out_valid[p] <= 1'b0;
      else        rd_out_valid[p] <= rd_valid[p];
      if (rd_valid[p]) begin
        for (int e = 0; e < 3; e++) rd_out[p].scale[e] <= scale_mem[rd_idx[p].scale_idx[AW-1:0]][e];
        for (int e = 0; e < 4; e++) rd_out[p].rot[e]   <= rot_mem[rd_idx[p].rot_idx[AW-1:0]][e];
        for (int e = 0; e < 3; e++) rd_out[p].dc[e]    <= dc_mem[rd_idx[p].dc_idx[AW-1:0]][e];
        for (int e = 0; e < SH_REST; e++) rd_out[p].sh_rest[e] <= sh_mem[rd_idx[p].sh_idx[SAW-1:0]][e];
      end
    end
  end
endmodule
