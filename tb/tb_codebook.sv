// tb_codebook: fills all four codebooks (at full size) with values computed
// from their address, then reads random index sets on all ports at once and
// checks every decoded value and the one-cycle read latency.
module tb_codebook;
  import sgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en;
  logic [1:0] wr_sel;
  logic [CB_IDX_W-1:0] wr_addr;
  logic [5:0] wr_elem;
  q16_t wr_data;
  logic [NUM_HFU-1:0] rd_valid, rd_out_valid;
  gauss_idx_t [NUM_HFU-1:0] rd_idx;
  gauss_dec_t [NUM_HFU-1:0] rd_out;
  int checks = 0, failures = 0;

  codebook dut (.clk, .rst_n, .wr_en, .wr_sel, .wr_addr, .wr_elem, .wr_data, .rd_valid, .rd_idx, .rd_out_valid, .rd_out);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic q16_t val(input int sel, input int addr, input int elem);
    return q16_t'((sel << 28) ^ (addr * 97) ^ (elem << 20) ^ 32'h5a5);
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_sel = 0; wr_addr = 0; wr_elem = 0; wr_data = 0; rd_valid = 0; rd_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int sel = 0; sel < 4; sel++) begin
      int n, ne;
      n  = (sel == 3) ? CB_SH_ENTRIES : CB_ENTRIES;
      ne = (sel == 0 || sel == 2) ? 3 : (sel == 1) ? 4 : SH_REST;
      for (int a = 0; a < n; a++)
        for (int e = 0; e < ne; e++) begin
          @(negedge clk);
          wr_en = 1; wr_sel = 2'(sel); wr_addr = CB_IDX_W'(a); wr_elem = 6'(e); wr_data = val(sel, a, e);
        end
    end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      int si [NUM_HFU], ri [NUM_HFU], di [NUM_HFU], hi [NUM_HFU];
      for (int p = 0; p < NUM_HFU; p++) begin
        si[p] = int'($urandom % CB_ENTRIES); ri[p] = int'($urandom % CB_ENTRIES);
        di[p] = int'($urandom % CB_ENTRIES); hi[p] = int'($urandom % CB_SH_ENTRIES);
        rd_idx[p] = '0;
        rd_idx[p].scale_idx = CB_IDX_W'(si[p]); rd_idx[p].rot_idx = CB_IDX_W'(ri[p]);
        rd_idx[p].dc_idx = CB_IDX_W'(di[p]); rd_idx[p].sh_idx = CB_SH_IDX_W'(hi[p]);
      end
      rd_valid = '1;
      @(negedge clk);
      rd_valid = '0;
      check(rd_out_valid == '1, "valid one cycle later");
      for (int p = 0; p < NUM_HFU; p++) begin
        bit ok;
        ok = 1;
        for (int e = 0; e < 3; e++) ok &= (rd_out[p].scale[e] == val(0, si[p], e)) && (rd_out[p].dc[e] == val(2, di[p], e));
        for (int e = 0; e < 4; e++) ok &= (rd_out[p].rot[e] == val(1, ri[p], e));
        for (int e = 0; e < SH_REST; e++) ok &= (rd_out[p].sh_rest[e] == val(3, hi[p], e));
        check(ok, $sformatf("port %0d decode", p));
      end
      @(negedge clk);
      check(rd_out_valid == '0, "valid drops");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
