// bitonic_sorter: a sorting unit with its own sorting buffer. It collects the
// filtered Gaussians of one voxel, sorts them front to back by depth with a
// bitonic network, and streams them to the render queue.
//
// FILL: up to LANES splats per cycle are written (in_valid mask, one lane per
// HFU) while in_ready is high, i.e. while at least LANES slots are free; full
// reports that it is not. start (one cycle, from the controller) ends the
// batch. SORT: the buffer is padded to CAP entries (unused slots sort last)
// and sorted in place by the bitonic network, one stage of CAP/2
// compare-exchange operations per cycle over log2(CAP)*(log2(CAP)+1)/2
// cycles (36 for CAP = 256). DRAIN: the count valid entries leave in
// ascending depth order on out_* (valid/ready, one per cycle, out_last on the final one); the unit then
// returns to FILL. A start on an empty buffer is ignored.
// Latency for a batch of n splats: 36 sort cycles plus n drain cycles.
//
// Bitonic sorting of the Gaussians of a single voxel is the design's; the
// iterative one-stage-per-cycle organisation and the buffer capacity CAP are
// this implementation's.
module bitonic_sorter
  import sgs_pkg::*;
#(
  parameter int CAP   = 256,
  parameter int LANES = NUM_HFU
) (
  input  logic clk,
  input  logic rst_n,
  input  logic   [LANES-1:0] in_valid,
  input  splat_t [LANES-1:0] in_s,
  output logic               in_ready,
  output logic               full,
  input  logic               start,
  output logic               out_valid,
  output splat_t             out_s,
  output logic               out_last,
  input  logic               out_ready,
  output logic               filling,
  output logic               empty,
  output logic               sorting_done
);
  localparam int AW = $clog2(CAP);

  typedef enum logic [1:0] {S_FILL, S_SORT, S_DRAIN} state_t;
  state_t state;

  splat_t       buf_s [CAP];
  logic [CAP-1:0] used;
  logic [AW:0]  count, rd;
  logic [AW:0]  k;       // bitonic block size 2..CAP
  logic [AW-1:0] j;      // compare distance

  assign in_ready = (state == S_FILL) && (int'(count) + LANES <= CAP);
  assign full     = (state == S_FILL) && !in_ready;
  assign filling  = (state == S_FILL);
  assign empty    = (state == S_FILL) && (count == '0);
  assign out_valid = (state == S_DRAIN);
  assign out_s     = buf_s[rd[AW-1:0]];
  assign out_last  = (state == S_DRAIN) && (rd + 1'b1 == count);

  // positions of this cycle's writes
  logic [LANES-1:0][AW:0] wpos;
  logic [AW:0]            nwr;
  always_comb begin
    nwr = '0;
    for (int l = 0; l < LANES; l++) begin
      wpos[l] = count + nwr;
      if (in_valid[l]) nwr = nwr + 1'b1;
    end
  end

  // a is to go after b: unused slots last, then by depth
  function automatic logic after(input logic ua, input splat_t a, input logic ub, input splat_t b);
    if (!ua) return ub;
    if (!ub) return 1'b0;
    return a.depth > b.depth;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_FILL;
      count        <= '0;
      rd           <= '0;
      used         <= '0;
      k            <= '0;
      j            <= '0;
      sorting_done <= 1'b0;
    end else begin
      sorting_done <= 1'b0;
      case (state)
        S_FILL: begin
          if (in_ready)
            for (int l = 0; l < LANES; l++)
              if (in_valid[l]) begin
                buf_s[wpos[l][AW-1:0]] <= in_s[l];
                used[wpos[l][AW-1:0]]  <= 1'b1;
              end
          if (in_ready) count <= count + nwr;
          if (start && (count + (in_ready ? nwr : '0)) != '0) begin
            state <= S_SORT;
            k     <= (AW+1)'(2);
            j     <= AW'(1);
          end
        end
        S_SORT: begin
          // one bitonic stage: pair (i, i^j) with i < i^j
          for (int i = 0; i < CAP; i++) begin
            int l;
            l = i ^ int'(j);
            if (l > i) begin
              logic up, swap;
              up   = ((i & int'(k)) == 0);
              swap = up ? after(used[i], buf_s[i], used[l], buf_s[l])
                        : after(used[l], buf_s[l], used[i], buf_s[i]);
              if (swap) begin
                buf_s[i] <= buf_s[l];
                buf_s[l] <= buf_s[i];
                used[i]  <= used[l];
                used[l]  <= used[i];
              end
            end
          end
          if (j == AW'(1)) begin
            if (k == (AW+1)'(CAP)) begin
              state        <= S_DRAIN;
              rd           <= '0;
              sorting_done <= 1'b1;
            end else begin
              k <= k << 1;
              j <= AW'(k);    // next block size 2k starts with distance k
            end
          end else begin
            j <= j >> 1;
          end
        end
        S_DRAIN: if (out_ready) begin
          rd <= rd + 1'b1;
          if (rd + 1'b1 == count) begin
            state <= S_FILL;
            count <= '0;
            used  <= '0;
          end
        end
        default: state <= S_FILL;
      endcase
    end
  end
endmodule
