// sync_fifo: single-clock first-in first-out queue used for the voxel queue,
// the renamed-VIDr list, the HFU decode FIFO and the render queue.
//
// Register-array FIFO of DEPTH entries of type T. push is accepted when
// !full, pop when !empty; a push and a pop may happen in the same cycle. The
// head entry is visible combinationally on rd_data (first-word fall-through).
// count gives the occupancy. Synchronous active-low reset empties it.
module sync_fifo #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     wr_data,
  input  logic pop,
  output T     rd_data,
  output logic full,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic do_push, do_pop;

  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) begin
        mem[wp] <= wr_data;
        wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (do_pop) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + ($bits(count))'(do_push) - ($bits(count))'(do_pop);
    end
  end

  // a push into a full or pop from an empty FIFO is a protocol error upstream
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(push && full))  else $error("sync_fifo: push while full");
      assert (!(pop && empty))  else $error("sync_fifo: pop while empty");
    end
  end
endmodule
