// dram_model: behavioural model of the off-chip memory for simulation. A word
// array of 2^AW words of MEM_W bits, written directly by the testbench through
// hierarchical access to mem, read through an in-order request/response port
// with a fixed LATENCY. It accepts one request per cycle except when the
// random back-pressure option refuses one (STALL_PCT percent of cycles).
module dram_model
  import sgs_pkg::*;
#(
  parameter int AW        = 14,
  parameter int LATENCY   = 8,
  parameter int STALL_PCT = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  input  logic [MADDR_W-1:0] req_addr,
  output logic               req_ready,
  output logic               rsp_valid,
  output logic [MEM_W-1:0]   rsp_data
);
  logic [MEM_W-1:0] mem [1 << AW];
  logic [LATENCY-1:0]              pv;
  logic [LATENCY-1:0][MEM_W-1:0]   pd;
  logic stall;

  always_ff @(posedge clk) stall <= ($urandom % 100) < STALL_PCT;
  assign req_ready = !stall;
  assign rsp_valid = pv[LATENCY-1];
  assign rsp_data  = pd[LATENCY-1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pv <= '0;
    end else begin
      pv <= {pv[LATENCY-2:0], req_valid && req_ready};
      pd <= {pd[LATENCY-2:0], mem[req_addr[AW-1:0]]};
    end
  end
endmodule
