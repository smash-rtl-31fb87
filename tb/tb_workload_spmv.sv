// tb_workload_spmv: SpMV at the sizes of the paper's evaluated inputs, on
// the BMU at its default parameters. Two runs share the test:
//  * a matrix with the shape and non-zero count of M1 (descriptor_xingo6u:
//    20738 x 20738, 73916 non-zeros), bitmap ratios 64.64.2;
//  * one SpMV step of PageRank on a graph with the size of G2 (com-DBLP:
//    317K vertices, 1M edges), ratios 64.64.2, whose element indices need
//    more than 32 bits.
// The positions are random, since the real inputs are not available here,
// and the ratio choices are this test's. The testbench plays the CPU running
// the paper's SpMV loop (MATINFO, BMAPINFO x3, RDBMAP x3, then PBMAP + RDIND
// per block, multiply-accumulate over the block), checks y = A*x against a
// direct product, and reports the BMU cycles spent per non-zero block.
module tb_workload_spmv;
  import smash_pkg::*;
  import tb_smash_pkg::*;
  localparam int unsigned MEMW = 2400000;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, cmd_valid, cmd_ready, rsp_valid;
  smash_cmd_t cmd;
  smash_rsp_t rsp;
  logic m_req_valid, m_req_ready, m_rsp_valid;
  logic [31:0] m_req_addr;
  logic [1:0]  m_req_id, m_rsp_id;
  logic [63:0] m_rsp_data;
  int checks = 0, failures = 0;
  longint cyc = 0;

  smash_bmu dut (.*);
  tb_mem_model #(.WORDS(MEMW), .LATENCY(20), .IDW(2), .STALL_PCT(0)) u_mem (
    .clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready), .req_addr(m_req_addr),
    .req_id(m_req_id), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data), .rsp_id(m_rsp_id));

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(smash_op_e op, int unsigned a, int unsigned b);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.grp = 2'd0; cmd.a = a; cmd.b = b;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic run(int unsigned ROWS, int unsigned NNZ, int unsigned C2, int unsigned C1,
                     int unsigned C0);
    bitmap_enc enc = new(ROWS, ROWS, 3, C0, C1, C2);
    int unsigned w0 [3], ww;
    int x [];
    longint y [], yref [];
    longint t0, t1;
    int unsigned nblk = 0;
    while (enc.val.size() < NNZ)
      enc.add((longint'($urandom) * 65536 + $urandom) % enc.total, $urandom_range(1, 9));
    enc.build();
    ww = 0;
    for (int l = 2; l >= 0; l--) begin
      w0[l] = ww;
      ww += (enc.stream[l].size() + 63) / 64 + 1;
    end
    checks++;
    if (ww > MEMW) begin
      failures++; $display("FAIL bitmaps need %0d words", ww);
      return;
    end
    for (int l = 0; l < 3; l++)
      foreach (enc.stream[l][p]) u_mem.mem[w0[l] + p / 64][63 - p % 64] = enc.stream[l][p];
    $display("bitmap streams: %0d / %0d / %0d bits, %0d NZA blocks",
             enc.stream[2].size(), enc.stream[1].size(), enc.stream[0].size(), enc.exp_idx.size());
    x = new[ROWS]; y = new[ROWS]; yref = new[ROWS];
    foreach (x[i]) begin x[i] = $urandom_range(0, 99); y[i] = 0; yref[i] = 0; end
    foreach (enc.val[e]) yref[e / ROWS] += enc.val[e] * x[e % ROWS];

    t0 = cyc;
    issue(OP_MATINFO, ROWS, ROWS);
    issue(OP_BMAPINFO, C2, 2);
    issue(OP_BMAPINFO, C1, 1);
    issue(OP_BMAPINFO, C0, 0);
    issue(OP_RDBMAP, w0[2] * 8, 2);
    issue(OP_RDBMAP, w0[1] * 8, 1);
    issue(OP_RDBMAP, w0[0] * 8, 0);
    forever begin
      smash_rsp_t r;
      longint unsigned e0;
      issue(OP_PBMAP, 0, 0);
      issue(OP_RDIND, 0, 0);
      r = rsp;
      if (!r.found) break;
      checks++;
      if (nblk >= enc.exp_idx.size() ||
          longint'(r.row) * longint'(ROWS) + r.col != enc.exp_idx[nblk]) begin
        failures++; if (failures < 10) $display("FAIL block %0d", nblk);
      end
      nblk++;
      e0 = longint'(r.row) * longint'(ROWS) + r.col;
      for (longint unsigned t = 0; t < C0; t++)
        if (enc.val.exists(e0 + t)) y[(e0 + t) / ROWS] += enc.val[e0 + t] * x[(e0 + t) % ROWS];
    end
    t1 = cyc;
    checks++;
    if (nblk != enc.exp_idx.size()) begin failures++; $display("FAIL %0d blocks", nblk); end
    foreach (y[i]) begin
      checks++;
      if (y[i] != yref[i]) begin failures++; if (failures < 10) $display("FAIL y[%0d]", i); end
    end
    $display("SpMV %0dx%0d, %0d blocks in %0d cycles (%0d cycles per block)",
             ROWS, ROWS, nblk, t1 - t0, (t1 - t0) / (nblk > 0 ? nblk : 1));
  endtask

  initial begin
    rst_n = 0; cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(20738, 73916, 64, 64, 2);      // M1
    run(317000, 1000000, 64, 64, 2);   // G2
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
