// tb_input_buffer: writes both banks record by record with distinct values,
// then reads every row of both banks and checks all records; writes to one
// bank while reading the other (double buffering) must not disturb the read
// bank.
module tb_input_buffer;
  import sgs_pkg::*;
  localparam int BR = 512, RW = NUM_HFU * NUM_CFU;
  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en, wr_bank, rd_bank;
  logic [$clog2(BR)-1:0] wr_addr;
  logic [$clog2(BR/RW)-1:0] rd_row;
  gauss_fh_t wr_data;
  gauss_fh_t [RW-1:0] rd_data;
  int checks = 0, failures = 0;

  input_buffer #(.BANK_RECS(BR)) dut (.clk, .wr_en, .wr_bank, .wr_addr, .wr_data, .rd_bank, .rd_row, .rd_data);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic gauss_fh_t rec(input int b, input int a, input int gen);
    gauss_fh_t r;
    r.x = q16_t'(b * 100000 + a); r.y = q16_t'(a * 7 + gen); r.z = q16_t'(gen); r.s = q16_t'(~a);
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_bank = 0; wr_addr = 0; wr_data = '0; rd_bank = 0; rd_row = 0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < BR; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = b[0]; wr_addr = $clog2(BR)'(a); wr_data = rec(b, a, 0);
      end
    @(negedge clk) wr_en = 0;
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < BR / RW; r++) begin
        rd_bank = b[0]; rd_row = $clog2(BR/RW)'(r);
        #1;
        for (int c = 0; c < RW; c++) check(rd_data[c] == rec(b, r * RW + c, 0), $sformatf("bank %0d row %0d col %0d", b, r, c));
        @(negedge clk);
      end
    // refill bank 1 while reading bank 0
    for (int a = 0; a < BR; a++) begin
      wr_en = 1; wr_bank = 1; wr_addr = $clog2(BR)'(a); wr_data = rec(1, a, 1);
      rd_bank = 0; rd_row = $clog2(BR/RW)'(a % (BR / RW));
      #1;
      check(rd_data[a % RW] == rec(0, (a % (BR / RW)) * RW + (a % RW), 0), "read bank undisturbed");
      @(negedge clk);
    end
    wr_en = 0;
    rd_bank = 1; rd_row = 3;
    #1;
    check(rd_data[5] == rec(1, 3 * RW + 5, 1), "refilled bank");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
