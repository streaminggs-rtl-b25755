// voxel_streamer: streams the voxels of the rendering order from DRAM into the
// input buffer and from there into the HFUs.
//
// Because all Gaussians of a voxel are stored contiguously in DRAM, a voxel is
// a base index and a count, kept in an on-chip voxel directory indexed by
// VIDr and written by the host (dir_*). The loader pops a VIDr from the voxel
// queue (vq_*) and reads the voxel's first-half records, one DRAM word each at
// fh_base + gid, into the free bank of the double-buffered input buffer. A
// voxel larger than a bank is loaded as several chunks. The processor side
// walks a full bank row by row, giving each HFU NUM_CFU records per row
// (records past the chunk's end are not valid) and advancing when every HFU
// is ready. After the last row it waits until all HFUs are idle, pulses
// batch_end (every filtered Gaussian of the chunk is then in a sorting
// buffer) and frees the bank. Loading of the next voxel overlaps processing.
//
// Events: ev_voxel (voxel popped), ev_chunk (chunk ready), ev_overlap (a cycle
// in which one bank loads while the other is processed). idle when nothing is
// loaded, loading or being processed. Streaming whole voxels through a
// double-buffered input buffer follows the design; the directory, chunking
// and row hand-off are this implementation's.
module voxel_streamer
  import sgs_pkg::*;
#(
  parameter int BANK_RECS = 512,
  parameter int DIR_ENTRIES = 1 << VIDR_W
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [MADDR_W-1:0] fh_base,
  // voxel directory host port
  input  logic               dir_wr_en,
  input  logic [VIDR_W-1:0]  dir_wr_vidr,
  input  logic [GID_W-1:0]   dir_wr_base,
  input  logic [CNT_W-1:0]   dir_wr_count,
  // voxel queue
  input  logic               vq_valid,
  input  logic [VIDR_W-1:0]  vq_vidr,
  input  logic               vq_none,
  output logic               vq_pop,
  // DRAM
  output logic               mem_req_valid,
  output logic [MADDR_W-1:0] mem_req_addr,
  input  logic               mem_req_ready,
  input  logic               mem_rsp_valid,
  input  logic [MEM_W-1:0]   mem_rsp_data,
  // HFUs
  output logic    [NUM_HFU-1:0][NUM_CFU-1:0] hfu_valid,
  output fh_rec_t [NUM_HFU-1:0][NUM_CFU-1:0] hfu_rec,
  input  logic    [NUM_HFU-1:0]              hfu_ready,
  input  logic    [NUM_HFU-1:0]              hfu_idle,
  output logic               batch_end,
  output logic               idle,
  output logic               ev_voxel,
  output logic               ev_chunk,
  output logic               ev_overlap
);
  localparam int ROW_W = NUM_HFU * NUM_CFU;
  localparam int ROWS  = BANK_RECS / ROW_W;
  localparam int AW    = $clog2(BANK_RECS);
  localparam int RW    = $clog2(ROWS);

  typedef struct packed {
    logic [GID_W-1:0] base;
    logic [CNT_W-1:0] count;
  } dir_t;
  dir_t dir [DIR_ENTRIES];

  always_ff @(posedge clk) begin
    if (dir_wr_en) dir[dir_wr_vidr] <= '{base: dir_wr_base, count: dir_wr_count};
  end

  // bank bookkeeping
  logic [1:0]            bank_full;
  logic [1:0][GID_W-1:0] bank_base;
  logic [1:0][AW:0]      bank_n;

  // ---------------- loader ----------------
  typedef enum logic [1:0] {L_IDLE, L_WAIT_BANK, L_FETCH} lstate_t;
  lstate_t          lstate;
  logic             fill_bank;
  logic [GID_W-1:0] v_next;      // next Gaussian of the voxel to load
  logic [CNT_W-1:0] v_left;      // Gaussians of the voxel not yet loaded
  logic [AW:0]      c_n, c_req, c_rsp;   // chunk size, requests, responses
  logic [GID_W-1:0] c_base;
  dir_t             dhead;

  assign dhead  = dir[vq_vidr];
  assign vq_pop = (lstate == L_IDLE) && vq_valid;
  assign mem_req_valid = (lstate == L_FETCH) && (c_req < c_n);
  assign mem_req_addr  = fh_base + MADDR_W'(c_base) + MADDR_W'(c_req);

  logic [AW:0] chunk_len;
  assign chunk_len = (v_left > CNT_W'(BANK_RECS)) ? (AW+1)'(BANK_RECS) : (AW+1)'(v_left);

  // ---------------- processor ----------------
  typedef enum logic [1:0] {P_IDLE, P_RUN, P_DRAIN} pstate_t;
  pstate_t       pstate;
  logic          proc_bank;
  logic [RW-1:0] row;
  logic          all_ready, row_fire, last_row;
  gauss_fh_t [ROW_W-1:0] rd_data;

  input_buffer #(.BANK_RECS(BANK_RECS), .ROW_W(ROW_W)) u_ibuf (
    .clk,
    .wr_en(mem_rsp_valid), .wr_bank(fill_bank), .wr_addr(c_rsp[AW-1:0]),
    .wr_data(gauss_fh_t'(mem_rsp_data)),
    .rd_bank(proc_bank), .rd_row(row), .rd_data);

  assign all_ready = &hfu_ready;
  assign row_fire  = (pstate == P_RUN) && all_ready;
  assign last_row  = ((32'(row) + 1) * ROW_W >= 32'(bank_n[proc_bank]));

  always_comb begin
    for (int h = 0; h < NUM_HFU; h++)
      for (int c = 0; c < NUM_CFU; c++) begin
        int o;
        o = int'(row) * ROW_W + h * NUM_CFU + c;
        hfu_valid[h][c]   = row_fire && (o < int'(bank_n[proc_bank]));
        hfu_rec[h][c].gid = bank_base[proc_bank] + GID_W'(o);
        hfu_rec[h][c].fh  = rd_data[h * NUM_CFU + c];
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lstate    <= L_IDLE;
      pstate    <= P_IDLE;
      fill_bank <= 1'b0;
      proc_bank <= 1'b0;
      bank_full <= '0;
      bank_base <= '0;
      bank_n    <= '0;
      v_next    <= '0;
      v_left    <= '0;
      c_n       <= '0;
      c_req     <= '0;
      c_rsp     <= '0;
      c_base    <= '0;
      row       <= '0;
      batch_end <= 1'b0;
      ev_voxel  <= 1'b0;
      ev_chunk  <= 1'b0;
    end else begin
      batch_end <= 1'b0;
      ev_voxel  <= 1'b0;
      ev_chunk  <= 1'b0;
      // loader
      case (lstate)
        L_IDLE: if (vq_valid) begin
          if (!vq_none && dhead.count != '0) begin
            v_next   <= dhead.base;
            v_left   <= dhead.count;
            lstate   <= L_WAIT_BANK;
            ev_voxel <= 1'b1;
          end
        end
        L_WAIT_BANK: if (!bank_full[fill_bank]) begin
          c_n    <= chunk_len;
          c_base <= v_next;
          c_req  <= '0;
          c_rsp  <= '0;
          lstate <= L_FETCH;
        end
        L_FETCH: begin
          if (mem_req_valid && mem_req_ready) c_req <= c_req + 1'b1;
          if (mem_rsp_valid) c_rsp <= c_rsp + 1'b1;
          if (mem_rsp_valid && (c_rsp + 1'b1 == c_n)) begin
            bank_full[fill_bank] <= 1'b1;
            bank_base[fill_bank] <= c_base;
            bank_n[fill_bank]    <= c_n;
            fill_bank            <= !fill_bank;
            ev_chunk             <= 1'b1;
            v_next <= v_next + GID_W'(c_n);
            v_left <= v_left - CNT_W'(c_n);
            lstate <= (v_left == CNT_W'(c_n)) ? L_IDLE : L_WAIT_BANK;
          end
        end
        default: lstate <= L_IDLE;
      endcase
      // processor
      case (pstate)
        P_IDLE: if (bank_full[proc_bank]) begin
          pstate <= P_RUN;
          row    <= '0;
        end
        P_RUN: if (row_fire) begin
          if (last_row) pstate <= P_DRAIN;
          else          row <= row + 1'b1;
        end
        P_DRAIN: if (&hfu_idle) begin
          batch_end            <= 1'b1;
          bank_full[proc_bank] <= 1'b0;
          proc_bank            <= !proc_bank;
          pstate               <= P_IDLE;
        end
        default: pstate <= P_IDLE;
      endcase
    end
  end

  assign ev_overlap = (lstate == L_FETCH) && (pstate != P_IDLE);
  assign idle = (lstate == L_IDLE) && (pstate == P_IDLE) && (bank_full == '0) && !vq_valid;
endmodule
