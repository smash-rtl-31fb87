// tb_smash_bmu: end-to-end test of the BMU at its default size (4 groups,
// 3 levels, 256-byte buffers), acting as the CPU that runs the paper's two
// use cases on it.
//  1. SpMV y = A*x with a 3-level hierarchy on group 0, interleaved with a
//     second SpMV on group 3 (PBMAP on both groups, then RDIND on both), so
//     two groups search and refill at the same time.
//  2. SpMM C = A*B with one-level bitmaps: group 1 walks row i of A, group 2
//     walks column j of B (B is encoded column by column), and the
//     testbench merges the two index streams, multiplying the NZA blocks
//     whose positions match.
// Results are compared with y and C computed directly from the matrices.
// The test also counts, and requires at least once each: RDIND stalled
// behind a PBMAP, any other instruction stalled on a busy group, a buffer
// refill in the middle of a search, climbing and descending the hierarchy,
// two groups requesting memory in the same cycle, memory back-pressure and
// the end-of-matrix answer (found = 0).
module tb_smash_bmu;
  import smash_pkg::*;
  import tb_smash_pkg::*;
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
  int n_stall_rdind = 0, n_stall_other = 0, n_refill = 0, n_climb = 0, n_descend = 0;
  int n_arb = 0, n_backp = 0, n_end = 0, n_blocks = 0;

  smash_bmu dut (.*);
  tb_mem_model #(.WORDS(262144), .LATENCY(8), .IDW(2), .STALL_PCT(10)) u_mem (
    .clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready), .req_addr(m_req_addr),
    .req_id(m_req_id), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data), .rsp_id(m_rsp_id));

  // ------------------------------------------------------ event counters
  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && !cmd_ready) begin
      if (cmd.op == OP_RDIND) n_stall_rdind++; else n_stall_other++;
    end
    if ($countones(dut.g_req_valid) > 1) n_arb++;
    if (m_req_valid && !m_req_ready) n_backp++;
  end
  for (genvar g = 0; g < 4; g++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_grp[g].u_group.u_scan.state_q == 2'd1) begin
        if (!dut.g_grp[g].u_group.u_scan.exhausted && !dut.g_grp[g].u_group.u_scan.in_win &&
            !dut.g_grp[g].u_group.u_scan.top_end) n_refill++;
        if (dut.g_grp[g].u_group.u_scan.exhausted && !dut.g_grp[g].u_group.u_scan.is_top)
          n_climb++;
        if (dut.g_grp[g].u_group.u_scan.in_win && dut.g_grp[g].u_group.u_scan.found &&
            !dut.g_grp[g].u_group.u_scan.top_end && dut.g_grp[g].u_group.u_scan.lv_q != 0)
          n_descend++;
      end
    end
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------ CPU side
  task automatic issue(smash_op_e op, int unsigned grp, int unsigned a, int unsigned b);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.grp = 2'(grp); cmd.a = a; cmd.b = b;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic rdind(int unsigned grp, output smash_rsp_t r);
    issue(OP_RDIND, grp, 0, 0);
    if (!rsp_valid) begin failures++; $display("FAIL no RDIND response"); end
    r = rsp;
    if (!r.found) n_end++;
  endtask

  task automatic load_streams(bitmap_enc enc, int unsigned w0 [3]);
    for (int l = 0; l < int'(enc.nlev); l++)
      foreach (enc.stream[l][p]) u_mem.mem[w0[l] + p / 64][63 - p % 64] = enc.stream[l][p];
  endtask

  task automatic setup(bitmap_enc enc, int unsigned grp, int unsigned w0 [3]);
    issue(OP_MATINFO, grp, 32'(enc.rows), 32'(enc.cols));
    for (int l = int'(enc.nlev) - 1; l >= 0; l--) issue(OP_BMAPINFO, grp, enc.comp[l], l);
    for (int l = int'(enc.nlev) - 1; l >= 0; l--) issue(OP_RDBMAP, grp, w0[l] * 8, l);
  endtask

  function automatic void spmv_block(bitmap_enc enc, smash_rsp_t r, ref longint y [],
                                     ref int x []);
    longint unsigned e0 = longint'(r.row) * enc.cols + r.col;
    for (longint unsigned t = 0; t < enc.comp[0]; t++)
      if (enc.val.exists(e0 + t)) y[(e0 + t) / enc.cols] += enc.val[e0 + t] * x[(e0 + t) % enc.cols];
  endfunction

  task automatic random_fill(bitmap_enc enc, int unsigned nnz, int unsigned cluster);
    for (int i = 0; i < int'(nnz); i++) begin
      longint unsigned e = (longint'($urandom) * 65536 + $urandom) % enc.total;
      for (int j = 0; j < int'(cluster); j++) enc.add((e + j) % enc.total, $urandom_range(1, 9));
    end
    enc.build();
  endtask

  // SpMV on groups 0 and 3 at the same time
  task automatic test_spmv();
    bitmap_enc ea = new(600, 500, 3, 2, 16, 32);
    bitmap_enc eb = new(250, 777, 3, 4, 8, 64);
    int unsigned wa [3] = '{0, 20000, 40000};
    int unsigned wb [3] = '{60000, 80000, 100000};
    int xa [], xb [];
    longint ya [], yb [], ra [], rb [];
    smash_rsp_t r0, r3;
    bit d0 = 0, d3 = 0;
    random_fill(ea, 2500, 2);
    random_fill(eb, 1500, 3);
    load_streams(ea, wa);
    load_streams(eb, wb);
    xa = new[ea.cols]; xb = new[eb.cols];
    foreach (xa[i]) xa[i] = $urandom_range(0, 99);
    foreach (xb[i]) xb[i] = $urandom_range(0, 99);
    ya = new[ea.rows]; yb = new[eb.rows]; ra = new[ea.rows]; rb = new[eb.rows];
    foreach (ya[i]) begin ya[i] = 0; ra[i] = 0; end
    foreach (yb[i]) begin yb[i] = 0; rb[i] = 0; end
    foreach (ea.val[e]) ra[e / ea.cols] += ea.val[e] * xa[e % ea.cols];
    foreach (eb.val[e]) rb[e / eb.cols] += eb.val[e] * xb[e % eb.cols];
    setup(ea, 0, wa);
    setup(eb, 3, wb);
    while (!(d0 && d3)) begin
      if (!d0) issue(OP_PBMAP, 0, 0, 0);
      if (!d3) issue(OP_PBMAP, 3, 0, 0);
      if (!d0) begin rdind(0, r0); if (r0.found) begin spmv_block(ea, r0, ya, xa); n_blocks++; end else d0 = 1; end
      if (!d3) begin rdind(3, r3); if (r3.found) begin spmv_block(eb, r3, yb, xb); n_blocks++; end else d3 = 1; end
    end
    foreach (ra[i]) begin
      checks++; if (ya[i] != ra[i]) begin failures++; if (failures < 10) $display("FAIL ya[%0d]", i); end
    end
    foreach (rb[i]) begin
      checks++; if (yb[i] != rb[i]) begin failures++; if (failures < 10) $display("FAIL yb[%0d]", i); end
    end
    $display("SpMV: %0d + %0d non-zero blocks", ea.exp_idx.size(), eb.exp_idx.size());
  endtask

  // SpMM with one-level bitmaps on groups 1 (rows of A) and 2 (columns of B)
  task automatic test_spmm();
    localparam int unsigned M = 24, K = 300, N = 20, C0 = 2;
    bitmap_enc ra [M], cb [N];
    int unsigned wa [M], wb [N], ww, dummy [3];
    longint cref [M][N], cgot [M][N];
    int aval [M][K], bval [K][N];
    smash_rsp_t a, b;
    for (int i = 0; i < int'(M); i++) for (int k = 0; k < int'(K); k++) aval[i][k] = 0;
    for (int k = 0; k < int'(K); k++) for (int j = 0; j < int'(N); j++) bval[k][j] = 0;
    for (int n = 0; n < 400; n++) aval[$urandom_range(0, M-1)][$urandom_range(0, K-1)] = $urandom_range(1, 9);
    for (int n = 0; n < 400; n++) bval[$urandom_range(0, K-1)][$urandom_range(0, N-1)] = $urandom_range(1, 9);
    ww = 120000;
    for (int i = 0; i < int'(M); i++) begin
      ra[i] = new(1, K, 1, C0, 1, 1);
      for (int k = 0; k < int'(K); k++) ra[i].add(k, aval[i][k]);
      ra[i].build();
      wa[i] = ww; dummy = '{ww, 0, 0}; load_streams(ra[i], dummy);
      ww += (ra[i].stream[0].size() + 63) / 64;
    end
    for (int j = 0; j < int'(N); j++) begin
      cb[j] = new(1, K, 1, C0, 1, 1);
      for (int k = 0; k < int'(K); k++) cb[j].add(k, bval[k][j]);
      cb[j].build();
      wb[j] = ww; dummy = '{ww, 0, 0}; load_streams(cb[j], dummy);
      ww += (cb[j].stream[0].size() + 63) / 64;
    end
    for (int i = 0; i < int'(M); i++) for (int j = 0; j < int'(N); j++) begin
      cref[i][j] = 0; cgot[i][j] = 0;
      for (int k = 0; k < int'(K); k++) cref[i][j] += aval[i][k] * bval[k][j];
    end
    issue(OP_MATINFO, 1, 1, K);
    issue(OP_MATINFO, 2, 1, K);
    issue(OP_BMAPINFO, 1, C0, 0);
    issue(OP_BMAPINFO, 2, C0, 0);
    for (int i = 0; i < int'(M); i++) for (int j = 0; j < int'(N); j++) begin
      issue(OP_RDBMAP, 1, wa[i] * 8, 0);
      issue(OP_RDBMAP, 2, wb[j] * 8, 0);
      issue(OP_PBMAP, 1, 0, 0);
      issue(OP_PBMAP, 2, 0, 0);
      rdind(1, a);
      rdind(2, b);
      while (a.found && b.found) begin
        if (a.col == b.col) begin                    // index match
          for (int t = 0; t < int'(C0); t++)
            if (a.col + t < K) cgot[i][j] += aval[i][a.col + t] * bval[a.col + t][j];
          n_blocks++;
          issue(OP_PBMAP, 1, 0, 0);
          issue(OP_PBMAP, 2, 0, 0);
          rdind(1, a);
          rdind(2, b);
        end else if (a.col < b.col) begin
          issue(OP_PBMAP, 1, 0, 0); rdind(1, a);
        end else begin
          issue(OP_PBMAP, 2, 0, 0); rdind(2, b);
        end
      end
      checks++;
      if (cgot[i][j] != cref[i][j]) begin
        failures++; if (failures < 10) $display("FAIL C[%0d][%0d] %0d vs %0d", i, j, cgot[i][j], cref[i][j]);
      end
    end
    $display("SpMM: %0dx%0dx%0d done", M, K, N);
  endtask

  task automatic need(int n, string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL never happened: %s", what); end
  endtask

  initial begin
    rst_n = 0; cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    test_spmv();
    test_spmm();
    $display("events: rdind-stall %0d, other-stall %0d, refill %0d, climb %0d, descend %0d, two-group-req %0d, backpressure %0d, end %0d, blocks %0d",
             n_stall_rdind, n_stall_other, n_refill, n_climb, n_descend, n_arb, n_backp, n_end, n_blocks);
    need(n_stall_rdind, "RDIND stall");
    need(n_stall_other, "stall of other instruction");
    need(n_refill, "refill during PBMAP");
    need(n_climb, "climb");
    need(n_descend, "descend");
    need(n_arb, "two groups request memory");
    need(n_backp, "memory back-pressure");
    need(n_end, "end of matrix");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
