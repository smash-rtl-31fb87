// tb_bmu_mem_arbiter: four requesters issue random bursts of reads through
// the arbiter to an in-order memory model. Checks that at most one request
// is granted per cycle, that every response reaches the group that asked and
// carries the data of the address it asked for, that all requests complete,
// and that a group with continuous demand waits at most GROUPS-1 grants.
module tb_bmu_mem_arbiter;
  import smash_pkg::*;
  localparam int G = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [G-1:0] g_req_valid, g_req_ready, g_rsp_valid;
  logic [G-1:0][31:0] g_req_addr;
  logic [63:0] g_rsp_data;
  logic m_req_valid, m_req_ready, m_rsp_valid;
  logic [31:0] m_req_addr;
  logic [1:0] m_req_id, m_rsp_id;
  logic [63:0] m_rsp_data;
  int checks = 0, failures = 0;
  int sent [G], got [G], waitc [G];
  logic [31:0] expq [G][$];

  bmu_mem_arbiter #(.GROUPS(G)) dut (.*);
  tb_mem_model #(.WORDS(4096), .LATENCY(3), .IDW(2), .STALL_PCT(20)) u_mem (
    .clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready), .req_addr(m_req_addr),
    .req_id(m_req_id), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data), .rsp_id(m_rsp_id));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // requesters
  for (genvar g = 0; g < G; g++) begin : g_src
    always_ff @(posedge clk) begin
      if (rst_n) begin
        if (g_req_valid[g] && g_req_ready[g]) begin
          expq[g].push_back(g_req_addr[g]);
          sent[g] <= sent[g] + 1;
          waitc[g] <= 0;
          g_req_valid[g] <= (sent[g] + 1 < 300) && ($urandom % 4 != 0);
          g_req_addr[g]  <= 32'($urandom_range(0, 4095) * 8);
        end else if (!g_req_valid[g]) begin
          g_req_valid[g] <= (sent[g] < 300) && ($urandom % 2 == 0);
        end else begin
          waitc[g] <= waitc[g] + (m_req_ready ? 1 : 0);
        end
        if (g_rsp_valid[g]) begin
          logic [31:0] a;
          a = expq[g].pop_front();
          checks++;
          if (g_rsp_data !== u_mem.mem[a / 8]) begin
            failures++; $display("FAIL data grp %0d", g);
          end
          got[g] <= got[g] + 1;
        end
      end
    end
  end

  always_ff @(posedge clk) if (rst_n) begin
    checks++;
    if (!$onehot0(g_req_ready)) begin failures++; $display("FAIL two grants"); end
    for (int g = 0; g < G; g++)
      if (waitc[g] > G - 1) begin
        failures++; $display("FAIL starvation grp %0d", g);
      end
  end

  initial begin
    rst_n = 0; g_req_valid = '0; g_req_addr = '0;
    for (int g = 0; g < G; g++) begin sent[g] = 0; got[g] = 0; waitc[g] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = {$urandom, $urandom};
    begin
      int done_all;
      do begin
        @(negedge clk);
        done_all = 1;
        for (int g = 0; g < G; g++) if (got[g] < 300) done_all = 0;
      end while (!done_all);
    end
    for (int g = 0; g < G; g++) begin
      checks++;
      if (sent[g] != 300 || got[g] != 300) begin failures++; $display("FAIL count %0d", g); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
