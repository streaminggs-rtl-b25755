// tb_vsu_topo_sort: drives the in-degree logic with adjacent tables directly:
// the running example's graph (expected order 4 5 2 6 3), random DAGs (every
// voxel output once, every edge respected, one voxel per cycle after
// ENTRIES cycles of init), an empty graph, and a cyclic graph (all voxels
// still output, cycle break reported).
module tb_vsu_topo_sort;
  import sgs_pkg::*;
  localparam int E = 32, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, out_valid, out_last, out_none, out_ready, busy, done, cbrk;
  logic [VIDR_W-1:0] out_vidr;
  logic [E-1:0] tv;
  logic [E-1:0][VIDR_W-1:0] tt;
  logic [E-1:0][D-1:0] tdv;
  logic [E-1:0][D-1:0][VIDR_W-1:0] td;
  int checks = 0, failures = 0, breaks = 0;

  vsu_topo_sort #(.ENTRIES(E), .DST_SLOTS(D)) dut (
    .clk, .rst_n, .start, .tbl_valid(tv), .tbl_tag(tt), .tbl_dst_valid(tdv), .tbl_dst(td),
    .out_valid, .out_vidr, .out_last, .out_none, .out_ready, .busy, .done, .cycle_break(cbrk));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  always @(posedge clk) if (rst_n && cbrk) breaks++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nodes [$];
  int esrc [$], edst [$];

  task automatic load_graph();
    tv = '0; tdv = '0; tt = '0; td = '0;
    foreach (nodes[i]) begin tv[i] = 1; tt[i] = VIDR_W'(nodes[i]); end
    foreach (esrc[e]) begin
      int s, k;
      s = -1;
      foreach (nodes[i]) if (nodes[i] == esrc[e]) s = i;
      k = 0;
      while (tdv[s][k]) k++;
      tdv[s][k] = 1; td[s][k] = VIDR_W'(edst[e]);
    end
  endtask

  task automatic run(output int order [$], output int cycles_to_first, output int sort_cycles);
    int c;
    order.delete();
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    c = 1; cycles_to_first = -1; sort_cycles = 0;
    forever begin
      #1;
      if (out_valid) begin
        if (cycles_to_first < 0) cycles_to_first = c;
        if (!out_none) order.push_back(int'(out_vidr));
        sort_cycles++;
        if (out_last || out_none) begin @(negedge clk); break; end
      end
      @(negedge clk);
      c++;
    end
    @(negedge clk);
  endtask

  function automatic int pos_of(input int order [$], input int v);
    foreach (order[i]) if (order[i] == v) return i;
    return -1;
  endfunction

  initial begin
    int order [$];
    int cf, sc;
    start = 0; out_ready = 1; tv = '0; tt = '0; tdv = '0; td = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // running example
    nodes = '{4, 5, 2, 3, 6};
    esrc = '{4, 5, 2, 5, 6}; edst = '{5, 2, 3, 6, 3};
    load_graph();
    run(order, cf, sc);
    check(order.size() == 5, "example size");
    if (order.size() == 5) check(order[0] == 4 && order[1] == 5 && order[2] == 2 && order[3] == 6 && order[4] == 3,
      $sformatf("example order %p", order));
    check(cf == E + 1, $sformatf("first output after %0d cycles", cf));
    check(sc == 5, "one voxel per cycle");
    check(breaks == 0, "no cycle break on a DAG");
    // random DAGs: nodes get a random rank, edges go from lower to higher rank
    for (int g = 0; g < 30; g++) begin
      int n, rank [int];
      nodes.delete(); esrc.delete(); edst.delete();
      n = 1 + int'($urandom % E);
      for (int i = 0; i < n; i++) begin
        int v;
        do v = int'($urandom % 4096); while (pos_of(nodes, v) >= 0);
        nodes.push_back(v); rank[v] = int'($urandom % 1000) * 64 + i;
      end
      for (int i = 0; i < n; i++)
        for (int k = 0; k < D; k++) begin
          int j;
          j = int'($urandom % n);
          if (rank[nodes[j]] > rank[nodes[i]] && ($urandom % 2)) begin
            bit dupe;
            dupe = 0;
            foreach (esrc[e]) if (esrc[e] == nodes[i] && edst[e] == nodes[j]) dupe = 1;
            if (!dupe) begin esrc.push_back(nodes[i]); edst.push_back(nodes[j]); end
          end
        end
      load_graph();
      run(order, cf, sc);
      check(order.size() == n, $sformatf("dag %0d size %0d vs %0d", g, order.size(), n));
      foreach (nodes[i]) check(pos_of(order, nodes[i]) >= 0, "node present");
      foreach (esrc[e]) check(pos_of(order, esrc[e]) < pos_of(order, edst[e]), "edge respected");
    end
    check(breaks == 0, "no cycle break on DAGs");
    // empty graph
    nodes.delete(); esrc.delete(); edst.delete();
    load_graph();
    run(order, cf, sc);
    check(order.size() == 0 && sc == 1, "empty graph gives one none element");
    // cycle 1 -> 2 -> 3 -> 1 plus 0 -> 1
    nodes = '{0, 1, 2, 3}; esrc = '{1, 2, 3, 0}; edst = '{2, 3, 1, 1};
    load_graph();
    run(order, cf, sc);
    check(order.size() == 4, "cyclic graph still outputs every voxel");
    check(breaks == 1, $sformatf("cycle breaks %0d", breaks));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
