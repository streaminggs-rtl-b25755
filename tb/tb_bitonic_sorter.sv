// tb_bitonic_sorter: fills the sorting buffer with batches of random depths
// through the four write lanes (random lane masks), starts the sort and
// checks that the drained sequence is the sorted input (same multiset,
// ascending depth), that sorting takes log2(CAP)(log2(CAP)+1)/2 cycles, and
// that the buffer reports full when fewer than four slots remain.
module tb_bitonic_sorter;
  import sgs_pkg::*;
  localparam int CAP = 256, L = NUM_HFU;
  localparam int STAGES = 8 * 9 / 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [L-1:0] in_valid;
  splat_t [L-1:0] in_s;
  logic in_ready, full, start, out_valid, out_last, out_ready, filling, empty, sdone;
  splat_t out_s;
  int checks = 0, failures = 0;

  bitonic_sorter #(.CAP(CAP), .LANES(L)) dut (.clk, .rst_n, .in_valid, .in_s, .in_ready, .full, .start,
    .out_valid, .out_s, .out_last, .out_ready, .filling, .empty, .sorting_done(sdone));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic batch(input int n);
    int keys [$], got [$];
    int sent, c;
    sent = 0;
    while (sent < n) begin
      @(negedge clk);
      in_valid = '0;
      for (int l = 0; l < L; l++)
        if (sent < n && ($urandom % 3) != 0) begin
          int k;
          k = int'($urandom % 50000);
          in_valid[l] = 1; in_s[l] = '0; in_s[l].depth = q16_t'(k); in_s[l].rgb[0] = q16_t'(k * 3);
          keys.push_back(k); sent++;
        end
      #1;
      check(in_ready, "ready while filling");
    end
    @(negedge clk);
    in_valid = '0;
    if (n > CAP - L) check(full, "full reported"); else check(!full, "not full");
    start = 1;
    @(negedge clk);
    start = 0;
    c = 1;
    while (!out_valid) begin @(negedge clk); c++; end
    check(c == STAGES + 1, $sformatf("sort took %0d cycles", c - 1));
    while (out_valid) begin
      out_ready = ($urandom % 4) != 0;
      #1;
      if (out_ready) begin
        got.push_back(int'(out_s.depth));
        check(out_s.rgb[0] == q16_t'(int'(out_s.depth) * 3), "payload travels with key");
        check(out_last == (got.size() == n), "last flag");
      end
      @(negedge clk);
    end
    out_ready = 1;
    keys.sort();
    check(got.size() == n, $sformatf("drained %0d of %0d", got.size(), n));
    for (int i = 0; i < n && i < got.size(); i++) check(got[i] == keys[i], "sorted order");
    check(filling && empty, "back to fill");
  endtask

  initial begin
    in_valid = '0; in_s = '0; start = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    batch(1);
    batch(17);
    batch(100);
    batch(CAP - L);
    batch(CAP - L + 1);
    // start on an empty buffer is ignored
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    check(filling && empty && !out_valid, "empty start ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
