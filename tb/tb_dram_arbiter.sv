// tb_dram_arbiter: five requesters issue random streams of reads to a DRAM
// model whose words encode their address; every requester must get exactly
// its own responses, in its own order, with the right data, and no requester
// may starve while others keep requesting (round robin).
module tb_dram_arbiter;
  import sgs_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] req_valid, req_ready, rsp_valid;
  logic [N-1:0][MADDR_W-1:0] req_addr;
  logic [MEM_W-1:0] rsp_data;
  logic m_valid, m_ready, m_rsp_valid;
  logic [MADDR_W-1:0] m_addr;
  logic [MEM_W-1:0] m_rsp_data;
  int checks = 0, failures = 0;

  dram_arbiter #(.NREQ(N)) dut (.clk, .rst_n, .req_valid, .req_addr, .req_ready, .rsp_valid, .rsp_data,
    .mem_req_valid(m_valid), .mem_req_addr(m_addr), .mem_req_ready(m_ready),
    .mem_rsp_valid(m_rsp_valid), .mem_rsp_data(m_rsp_data));
  dram_model #(.AW(12), .LATENCY(6), .STALL_PCT(20)) u_mem (.clk, .rst_n, .req_valid(m_valid), .req_addr(m_addr),
    .req_ready(m_ready), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data));

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

  int sent [N], recv [N];
  int expq [N][$];
  int max_wait [N], wait_c [N];

  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < N; i++) begin
        if (req_valid[i] && req_ready[i]) begin
          expq[i].push_back(int'(req_addr[i]));
          sent[i]++;
          wait_c[i] = 0;
        end else if (req_valid[i]) begin
          wait_c[i]++;
          if (wait_c[i] > max_wait[i]) max_wait[i] = wait_c[i];
        end
        if (rsp_valid[i]) begin
          int a;
          a = expq[i].pop_front();
          check(rsp_data == {96'h0, 32'(a) ^ 32'hc0de_0000}, $sformatf("req %0d data", i));
          recv[i]++;
        end
      end
    end
  end

  initial begin
    req_valid = '0; req_addr = '0;
    for (int a = 0; a < 4096; a++) u_mem.mem[a] = {96'h0, 32'(a) ^ 32'hc0de_0000};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (!req_valid[i] || req_ready[i]) begin
          req_valid[i] = (c < 2800) && (($urandom % 4) != 0);
          req_addr[i]  = MADDR_W'($urandom % 4096);
        end
      end
    end
    req_valid = '0;
    repeat (50) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      check(sent[i] > 200 && recv[i] == sent[i], $sformatf("req %0d sent %0d recv %0d", i, sent[i], recv[i]));
      check(max_wait[i] < 40, $sformatf("req %0d waited %0d cycles", i, max_wait[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
