// input_buffer: the double-buffered input buffer that holds the uncompressed
// first halves (x, y, z, max scale) of the Gaussians of one voxel.
//
// Two banks of BANK_RECS records of 16 bytes each (16 KB in total at the
// default 512 records per bank). While the HFUs read one bank, the voxel
// streamer fills the other from DRAM. Writes: one record per cycle into bank
// wr_bank at record wr_addr. Reads: one row of ROW_W consecutive records per
// cycle from bank rd_bank, row rd_row, returned combinationally (a register
// file), so that every coarse filter unit of every HFU gets a record each
// cycle. The double buffering and the 16 KB size are the design's; the row
// organisation is this implementation's.
module input_buffer
  import sgs_pkg::*;
#(
  parameter int BANK_RECS = 512,
  parameter int ROW_W     = NUM_HFU * NUM_CFU
) (
  input  logic clk,
  input  logic wr_en,
  input  logic wr_bank,
  input  logic [$clog2(BANK_RECS)-1:0] wr_addr,
  input  gauss_fh_t wr_data,
  input  logic rd_bank,
  input  logic [$clog2(BANK_RECS/ROW_W)-1:0] rd_row,
  output gauss_fh_t [ROW_W-1:0] rd_data
);
  localparam int ROWS = BANK_RECS / ROW_W;
  localparam int CW   = (ROW_W > 1) ? $clog2(ROW_W) : 1;
  localparam int RW   = $clog2(ROWS);

  gauss_fh_t mem [2][ROWS][ROW_W];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_addr[CW +: RW]][wr_addr[CW-1:0]] <= wr_data;
  end

  always_comb begin
    for (int c = 0; c < ROW_W; c++) rd_data[c] = mem[rd_bank][rd_row][c];
  end
endmodule
