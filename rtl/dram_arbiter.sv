// dram_arbiter: shares the accelerator's single DRAM read port between its
// requesters (the voxel streamer and the index fetch of every HFU) and steers
// each response back to the requester that asked for it.
//
// Requests use valid/ready with a word address; a round-robin pointer picks
// one requester per cycle among those with req_valid, and the request is
// forwarded when the memory side is ready. The memory returns one MEM_W-bit
// word per request, in request order, on mem_rsp_valid; the arbiter records
// the requester of every accepted request in a tag FIFO of MAX_OUT entries and
// pops it to route each response (rsp_valid[i]). Requesters must always be
// able to take their responses; at most MAX_OUT requests are in flight.
// The shared bus to DRAM is the design's; arbitration policy and in-order
// response protocol are this implementation's.
module dram_arbiter
  import sgs_pkg::*;
#(
  parameter int NREQ    = 1 + NUM_HFU,
  parameter int MAX_OUT = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [NREQ-1:0]               req_valid,
  input  logic [NREQ-1:0][MADDR_W-1:0]  req_addr,
  output logic [NREQ-1:0]               req_ready,
  output logic [NREQ-1:0]               rsp_valid,
  output logic [MEM_W-1:0]              rsp_data,
  output logic                          mem_req_valid,
  output logic [MADDR_W-1:0]            mem_req_addr,
  input  logic                          mem_req_ready,
  input  logic                          mem_rsp_valid,
  input  logic [MEM_W-1:0]              mem_rsp_data
);
  localparam int IW = (NREQ > 1) ? $clog2(NREQ) : 1;

  logic [IW-1:0] rr, sel;
  logic          any;
  logic [IW-1:0] tag_head;
  logic          tag_full, tag_empty;
  logic [$clog2(MAX_OUT+1)-1:0] tag_count;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = NREQ-1; k >= 0; k--) begin
      int i;
      i = (int'(rr) + k) % NREQ;
      if (req_valid[i]) begin any = 1'b1; sel = IW'(i); end
    end
  end

  logic fire;
  assign mem_req_valid = any && !tag_full;
  assign mem_req_addr  = req_addr[sel];
  assign fire          = mem_req_valid && mem_req_ready;

  always_comb begin
    req_ready = '0;
    if (fire) req_ready[sel] = 1'b1;
  end

  sync_fifo #(.T(logic [IW-1:0]), .DEPTH(MAX_OUT)) u_tags (
    .clk, .rst_n, .push(fire), .wr_data(sel), .pop(mem_rsp_valid),
    .rd_data(tag_head), .full(tag_full), .empty(tag_empty), .count(tag_count));

  always_comb begin
    rsp_valid = '0;
    if (mem_rsp_valid) rsp_valid[tag_head] = 1'b1;
  end
  assign rsp_data = mem_rsp_data;

  always_ff @(posedge clk) begin
    if (!rst_n) rr <= '0;
    else if (fire) rr <= (sel == IW'(NREQ-1)) ? '0 : sel + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!(mem_rsp_valid && tag_empty)) else $error("dram_arbiter: response with no request");
  end
endmodule
