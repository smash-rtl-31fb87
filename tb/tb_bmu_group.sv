// tb_bmu_group: drives one BMU group through the SMASH instructions exactly
// as the paper's SpMV listing does (MATINFO, BMAPINFO per level, RDBMAP per
// level, then PBMAP + RDIND per non-zero block) for random matrices. Checks
// every <row, column> returned by RDIND against the software encoder, that
// RDIND reports 'not found' after the last block, and that an RDIND issued
// right behind a PBMAP is stalled until the search is finished.
module tb_bmu_group;
  import smash_pkg::*;
  import tb_smash_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, cmd_valid, cmd_ready, rsp_valid;
  smash_cmd_t cmd;
  smash_rsp_t rsp;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [63:0] mem_rsp_data;
  logic [1:0]  rsp_id;
  int checks = 0, failures = 0, stalls = 0;

  bmu_group dut (.*);
  tb_mem_model #(.WORDS(65536), .LATENCY(6), .IDW(2), .STALL_PCT(15)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .req_id(2'd0), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data), .rsp_id(rsp_id));

  always @(posedge clk) if (cmd_valid && !cmd_ready && cmd.op == OP_RDIND) stalls++;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(smash_op_e op, int unsigned a, int unsigned b);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.grp = 0; cmd.a = a; cmd.b = b;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic rdind(output smash_rsp_t r);
    issue(OP_RDIND, 0, 0);
    // the response was registered at the accepting edge
    if (!rsp_valid) begin failures++; $display("FAIL no RDIND response"); end
    r = rsp;
  endtask

  task automatic run_case(int unsigned rows, int unsigned cols, int unsigned n,
                          int unsigned c0, int unsigned c1, int unsigned c2,
                          int unsigned nnz, int unsigned cluster);
    bitmap_enc enc = new(rows, cols, n, c0, c1, c2);
    int unsigned base [3];
    smash_rsp_t r;
    int k;
    for (int i = 0; i < int'(nnz); i++) begin
      longint unsigned e = (longint'($urandom) * 65536 + $urandom) % enc.total;
      for (int j = 0; j < int'(cluster); j++) enc.add((e + j) % enc.total, 1 + j);
    end
    enc.build();
    for (int i = 0; i < 65536; i++) u_mem.mem[i] = '0;
    base[0] = 0; base[1] = 30000; base[2] = 50000;
    for (int l = 0; l < int'(n); l++)
      foreach (enc.stream[l][p]) u_mem.mem[base[l] + p / 64][63 - p % 64] = enc.stream[l][p];
    issue(OP_MATINFO, rows, cols);
    for (int l = int'(n) - 1; l >= 0; l--) issue(OP_BMAPINFO, enc.comp[l], l);
    for (int l = int'(n) - 1; l >= 0; l--) issue(OP_RDBMAP, base[l] * 8, l);
    k = 0;
    forever begin
      issue(OP_PBMAP, 0, 0);
      rdind(r);
      if (!r.found) break;
      checks++;
      if (k >= enc.exp_idx.size() ||
          r.row != 48'(enc.exp_idx[k] / cols) || r.col != 32'(enc.exp_idx[k] % cols)) begin
        failures++;
        if (failures < 10) $display("FAIL block %0d: got (%0d,%0d)", k, r.row, r.col);
        if (k >= enc.exp_idx.size()) break;
      end
      k++;
    end
    checks++;
    if (k != enc.exp_idx.size()) begin
      failures++; $display("FAIL count %0d exp %0d", k, enc.exp_idx.size());
    end
  endtask

  initial begin
    rst_n = 0; cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run_case(20, 20, 3, 2, 4, 4, 30, 2);
    run_case(333, 97, 3, 2, 16, 16, 300, 1);
    run_case(1000, 100, 1, 4, 1, 1, 200, 3);
    run_case(128, 512, 2, 8, 64, 1, 400, 4);
    for (int t = 0; t < 10; t++)
      run_case($urandom_range(1, 300), $urandom_range(1, 300), $urandom_range(1, 3),
               $urandom_range(1, 8), $urandom_range(1, 32), $urandom_range(1, 32),
               $urandom_range(0, 200), $urandom_range(1, 4));
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL RDIND never stalled"); end
    $display("RDIND stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
