// vsu_topo_sort: in-degree table with its Table Init and Table Update logic;
// performs Kahn's topological sort over the voxel dependency graph held in
// the adjacent table and emits the global voxel rendering order.
//
// start (one cycle) begins Table Init: the in-degree table has one entry per
// adjacent-table entry (its VIDr and a count). Init visits one adjacent entry
// per cycle and adds one to the count of every destination it lists (the
// destination's entry is found by matching its VIDr). Then the sort emits one
// VIDr per cycle on out_* (valid/ready): the lowest-numbered live entry whose
// count is zero is output, removed, and in the same cycle Table Update
// subtracts one from the count of each of its destinations. The sort ends
// when no live entry is left (out_last marks the final VIDr; an empty graph
// gives a single out_none element) and done pulses.
//
// The design assumes the graph is acyclic. If live entries remain but none
// has a zero count, the lowest-numbered live entry is output anyway and
// cycle_break pulses, so the unit never deadlocks; that fallback is this
// implementation's choice, as is the lowest-index tie break.
// Latency: ENTRIES cycles of init, then one VIDr per cycle.
module vsu_topo_sort
  import sgs_pkg::*;
#(
  parameter int ENTRIES   = 64,
  parameter int DST_SLOTS = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ENTRIES-1:0]                  tbl_valid,
  input  logic [ENTRIES-1:0][VIDR_W-1:0]      tbl_tag,
  input  logic [ENTRIES-1:0][DST_SLOTS-1:0]   tbl_dst_valid,
  input  logic [ENTRIES-1:0][DST_SLOTS-1:0][VIDR_W-1:0] tbl_dst,
  output logic              out_valid,
  output logic [VIDR_W-1:0] out_vidr,
  output logic              out_last,
  output logic              out_none,
  input  logic              out_ready,
  output logic              busy,
  output logic              done,
  output logic              cycle_break
);
  localparam int IW = $clog2(ENTRIES);
  localparam int CW = $clog2(ENTRIES + 1);

  typedef enum logic [1:0] {S_IDLE, S_INIT, S_SORT} state_t;
  state_t state;

  logic [ENTRIES-1:0]         live;
  logic [ENTRIES-1:0][CW-1:0] cnt;
  logic [IW-1:0]              init_idx;

  // how many of entry src's destinations are entry m
  function automatic logic [CW-1:0] edges_to(input int src, input int m,
      input logic [ENTRIES-1:0][VIDR_W-1:0] tag,
      input logic [ENTRIES-1:0][DST_SLOTS-1:0] dv,
      input logic [ENTRIES-1:0][DST_SLOTS-1:0][VIDR_W-1:0] d);
    logic [CW-1:0] n;
    n = '0;
    for (int j = 0; j < DST_SLOTS; j++)
      if (dv[src][j] && d[src][j] == tag[m]) n = n + 1'b1;
    return n;
  endfunction

  // selection of the next voxel
  logic          any_live, any_zero;
  logic [IW-1:0] zero_idx, live_idx, sel;
  logic [ENTRIES-1:0] live_after;
  always_comb begin
    any_live = 1'b0; any_zero = 1'b0; zero_idx = '0; live_idx = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (live[i]) begin any_live = 1'b1; live_idx = IW'(i); end
      if (live[i] && cnt[i] == '0) begin any_zero = 1'b1; zero_idx = IW'(i); end
    end
    sel = any_zero ? zero_idx : live_idx;
    live_after = live;
    live_after[sel] = 1'b0;
  end

  assign busy      = (state != S_IDLE);
  assign out_valid = (state == S_SORT);
  assign out_vidr  = tbl_tag[sel];
  assign out_none  = !any_live;
  assign out_last  = (live_after == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      live        <= '0;
      cnt         <= '0;
      init_idx    <= '0;
      done        <= 1'b0;
      cycle_break <= 1'b0;
    end else begin
      done        <= 1'b0;
      cycle_break <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state    <= S_INIT;
          live     <= tbl_valid;
          cnt      <= '0;
          init_idx <= '0;
        end
        S_INIT: begin    // Table Init: one adjacent entry per cycle
          for (int m = 0; m < ENTRIES; m++)
            if (tbl_valid[init_idx] && tbl_valid[m])
              cnt[m] <= cnt[m] + edges_to(int'(init_idx), m, tbl_tag, tbl_dst_valid, tbl_dst);
          init_idx <= init_idx + 1'b1;
          if (init_idx == IW'(ENTRIES-1)) state <= S_SORT;
        end
        S_SORT: if (out_ready) begin   // output and Table Update
          if (!any_live) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            live <= live_after;
            for (int m = 0; m < ENTRIES; m++)
              if (live[m] && m != int'(sel))
                cnt[m] <= cnt[m] - edges_to(int'(sel), m, tbl_tag, tbl_dst_valid, tbl_dst);
            if (!any_zero) cycle_break <= 1'b1;
            if (live_after == '0) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
