// tb_vsu_adjacent_table: builds the adjacent table from per-ray VIDr lists
// (the four rays of the running example, then random lists) and compares the
// table with a reference set of nodes and edges; finally overfills it and
// checks that the overflow events are reported.
module tb_vsu_adjacent_table;
  import sgs_pkg::*;
  localparam int E = 32, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, ins_valid, ins_has, ins_rend, overflow;
  logic [VIDR_W-1:0] ins_vidr;
  logic [E-1:0] tv;
  logic [E-1:0][VIDR_W-1:0] tt;
  logic [E-1:0][D-1:0] tdv;
  logic [E-1:0][D-1:0][VIDR_W-1:0] td;
  int checks = 0, failures = 0, ovf = 0;

  vsu_adjacent_table #(.ENTRIES(E), .DST_SLOTS(D)) dut (
    .clk, .rst_n, .clear, .ins_valid, .ins_has_vid(ins_has), .ins_vidr, .ins_ray_end(ins_rend),
    .overflow, .tbl_valid(tv), .tbl_tag(tt), .tbl_dst_valid(tdv), .tbl_dst(td));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  always @(posedge clk) if (rst_n && overflow) ovf++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit ref_node [int];
  bit ref_edge [int];   // key src*4096+dst

  task automatic send_list(input int l [$]);
    for (int i = 0; i < l.size(); i++) begin
      @(negedge clk);
      ins_valid = 1; ins_has = 1; ins_vidr = VIDR_W'(l[i]); ins_rend = (i == l.size() - 1);
      ref_node[l[i]] = 1;
      if (i > 0 && l[i] != l[i-1]) ref_edge[l[i-1] * 4096 + l[i]] = 1;
    end
    @(negedge clk) ins_valid = 0;
  endtask

  task automatic compare();
    int nn, ne;
    nn = 0; ne = 0;
    for (int i = 0; i < E; i++) if (tv[i]) begin
      nn++;
      check(ref_node.exists(int'(tt[i])), $sformatf("node %0d not expected", tt[i]));
      for (int j = 0; j < D; j++) if (tdv[i][j]) begin
        ne++;
        check(ref_edge.exists(int'(tt[i]) * 4096 + int'(td[i][j])), $sformatf("edge %0d->%0d not expected", tt[i], td[i][j]));
      end
    end
    check(nn == ref_node.num(), $sformatf("node count %0d vs %0d", nn, ref_node.num()));
    check(ne == ref_edge.num(), $sformatf("edge count %0d vs %0d", ne, ref_edge.num()));
  endtask

  task automatic do_clear();
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    ref_node.delete(); ref_edge.delete();
  endtask

  initial begin
    int l [$];
    clear = 0; ins_valid = 0; ins_has = 0; ins_rend = 0; ins_vidr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // rays of the running example: R0 4 5 2 3, R1 4 5 6 3, R2 and R3 4 5 6
    l = '{4, 5, 2, 3}; send_list(l);
    l = '{4, 5, 6, 3}; send_list(l);
    l = '{4, 5, 6};    send_list(l);
    l = '{4, 5, 6};    send_list(l);
    @(negedge clk);
    compare();
    check(ovf == 0, "no overflow in example");
    // random groups within capacity
    for (int g = 0; g < 20; g++) begin
      do_clear();
      for (int r = 0; r < 16; r++) begin
        int n, base;
        l.delete();
        n = 1 + int'($urandom % 5);
        base = int'($urandom % 20);
        for (int i = 0; i < n; i++) l.push_back(base + i + int'($urandom % 2));
        send_list(l);
      end
      @(negedge clk);
      compare();
    end
    check(ovf == 0, "no overflow within capacity");
    // overfill: 40 distinct single-voxel rays
    do_clear();
    for (int r = 0; r < E + 8; r++) begin l = '{100 + r}; send_list(l); end
    @(negedge clk);
    check(ovf == 8, $sformatf("overflow events %0d", ovf));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
