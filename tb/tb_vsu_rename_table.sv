// tb_vsu_rename_table: loads a random renaming table (about half the voxels
// empty), streams lookups with random back-pressure and checks each output
// VIDr, the dropping of empty voxels, marker pass-through and the drop count.
module tb_vsu_rename_table;
  import sgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, wr_valid, in_valid, in_has, in_rend, in_gend, in_ready;
  logic out_valid, out_has, out_rend, out_gend, out_ready, empty_drop;
  logic [VID_W-1:0] wr_vid, in_vid;
  logic [VIDR_W-1:0] wr_vidr, out_vidr;
  int checks = 0, failures = 0;

  vsu_rename_table dut (.clk, .rst_n, .wr_en, .wr_vid, .wr_valid, .wr_vidr,
    .in_valid, .in_vid, .in_has_vid(in_has), .in_ray_end(in_rend), .in_group_end(in_gend),
    .in_ready, .out_valid, .out_vidr, .out_has_vid(out_has), .out_ray_end(out_rend),
    .out_group_end(out_gend), .out_ready, .empty_drop);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit          ref_valid [1 << VID_W];
  int          ref_vidr  [1 << VID_W];
  typedef struct { int vidr; bit has; bit rend; bit gend; } exp_t;
  exp_t exp_q [$];
  int drops = 0, exp_drops = 0;
  always @(posedge clk) if (rst_n && empty_drop) drops++;

  // checker
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      exp_t e;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        e = exp_q.pop_front();
        check(out_has == e.has && out_rend == e.rend && out_gend == e.gend, "flags");
        if (e.has) check(int'(out_vidr) == e.vidr, $sformatf("vidr %0d vs %0d", out_vidr, e.vidr));
      end
    end
  end
  always @(negedge clk) out_ready = ($urandom % 4) != 0;

  initial begin
    wr_en = 0; in_valid = 0; in_has = 0; in_rend = 0; in_gend = 0; in_vid = '0;
    wr_vid = '0; wr_valid = 0; wr_vidr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < (1 << VID_W); v++) begin
      @(negedge clk);
      wr_en = 1; wr_vid = VID_W'(v);
      ref_valid[v] = ($urandom % 2) == 0; ref_vidr[v] = int'($urandom % (1 << VIDR_W));
      wr_valid = ref_valid[v]; wr_vidr = VIDR_W'(ref_vidr[v]);
    end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      int v;
      exp_t e;
      v = int'($urandom % (1 << VID_W));
      in_vid = VID_W'(v); in_has = ($urandom % 8) != 0; in_rend = ($urandom % 6) == 0;
      in_gend = in_rend && (($urandom % 3) == 0);
      in_valid = 1;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      if (in_rend || (in_has && ref_valid[v])) begin
        e.vidr = ref_vidr[v]; e.has = in_has && ref_valid[v]; e.rend = in_rend; e.gend = in_gend;
        exp_q.push_back(e);
      end
      if (in_has && !ref_valid[v]) exp_drops++;
      @(negedge clk);
      in_valid = 0;
    end
    repeat (20) @(negedge clk);
    check(exp_q.size() == 0, "all outputs seen");
    check(drops == exp_drops, $sformatf("empty drops %0d vs %0d", drops, exp_drops));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
