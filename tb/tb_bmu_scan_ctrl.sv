// tb_bmu_scan_ctrl: drives the bitmap scanner directly. For random matrices
// of random shape, density, clustering and 1-3 level hierarchies, the
// software encoder (tb_smash_pkg) builds the bitmap streams in memory; the
// testbench then issues RDBMAP for every level and PBMAP until the scanner
// reports the end, and checks that the saved set-bit positions, weighted as
// in the paper's index formula, give exactly the expected non-zero blocks in
// order. It also counts buffer refills inside a PBMAP (streams longer than
// one 256-byte window) and requires that they happen.
module tb_bmu_scan_ctrl;
  import smash_pkg::*;
  import tb_smash_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, rd_start, pb_start, busy, res_valid, res_found;
  logic [1:0]  rd_lvl;
  logic [31:0] rd_addr;
  logic [2:0][31:0] res_idx;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [63:0] mem_rsp_data;
  logic [1:0]  rsp_id;
  bmu_cfg_t cfg;
  int checks = 0, failures = 0, refills_in_pb = 0, blocks_seen = 0;

  bmu_scan_ctrl dut (.*);
  tb_mem_model #(.WORDS(65536), .LATENCY(5), .IDW(2), .STALL_PCT(10)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .req_id(2'd0), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data), .rsp_id(rsp_id));

  always @(posedge clk)
    if (rst_n && dut.state_q == dut.S_SCAN && !dut.exhausted && !dut.in_win && dut.open_q[dut.lv_q])
      refills_in_pb++;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_case(int unsigned rows, int unsigned cols, int unsigned n,
                          int unsigned c0, int unsigned c1, int unsigned c2,
                          int unsigned nnz, int unsigned cluster);
    bitmap_enc enc = new(rows, cols, n, c0, c1, c2);
    int unsigned base [3];
    longint unsigned idx, w;
    int k;
    if (nnz == 0 && cluster == 0) begin
      // Fig. 4: Bitmap-0 blocks 2, 8 and 10 (4 elements each) are non-zero
      enc.add(10, 5); enc.add(32, 6); enc.add(34, 7); enc.add(35, 8); enc.add(42, 9); enc.add(43, 1);
    end
    for (int i = 0; i < int'(nnz); i++) begin
      longint unsigned e = (longint'($urandom) * 65536 + $urandom) % enc.total;
      for (int j = 0; j < int'(cluster); j++) enc.add((e + j) % enc.total, 1 + j);
    end
    enc.build();
    if (nnz == 0 && cluster == 0) begin
      // the streams printed in Fig. 4(b): Bitmap-2 "11", Bitmap-1 "1010",
      // Bitmap-0 "0010" "1010"
      checks++;
      if (enc.stream[2] != '{1, 1} || enc.stream[1] != '{1, 0, 1, 0} ||
          enc.stream[0] != '{0, 0, 1, 0, 1, 0, 1, 0}) begin
        failures++; $display("FAIL Fig. 4 streams");
      end
    end
    for (int i = 0; i < 65536; i++) u_mem.mem[i] = '0;
    base[0] = 0; base[1] = 20000; base[2] = 40000;     // word addresses
    for (int l = 0; l < int'(n); l++)
      foreach (enc.stream[l][p]) u_mem.mem[base[l] + p / 64][63 - p % 64] = enc.stream[l][p];
    cfg = '0; cfg.rows = rows; cfg.cols = cols; cfg.nlev = 2'(n);
    cfg.total = 48'(enc.total);
    w = 1;
    for (int l = 0; l < 3; l++) begin
      w *= enc.comp[l]; cfg.comp[l] = 12'(enc.comp[l]); cfg.wprod[l] = 48'(w);
    end
    for (int l = int'(n) - 1; l >= 0; l--) begin
      @(negedge clk); rd_start = 1; rd_lvl = 2'(l); rd_addr = base[l] * 8;
      @(negedge clk); rd_start = 0;
      while (busy) @(negedge clk);
    end
    k = 0;
    forever begin
      @(negedge clk); pb_start = 1;
      @(negedge clk); pb_start = 0;
      while (!res_valid) @(negedge clk);
      if (!res_found) break;
      idx = 0; w = 1;
      for (int l = 0; l < int'(n); l++) begin w *= enc.comp[l]; idx += w * res_idx[l]; end
      checks++;
      if (k >= enc.exp_idx.size() || idx != enc.exp_idx[k]) begin
        failures++;
        if (failures < 10) $display("FAIL block %0d: got %0d exp %0d", k, idx,
                                    k < enc.exp_idx.size() ? enc.exp_idx[k] : -1);
        if (k >= enc.exp_idx.size()) break;
      end
      k++; blocks_seen++;
    end
    checks++;
    if (k != enc.exp_idx.size()) begin
      failures++; $display("FAIL count %0d exp %0d (r%0d c%0d n%0d %0d.%0d.%0d)",
                           k, enc.exp_idx.size(), rows, cols, n, c2, c1, c0);
    end
    // a further PBMAP keeps reporting the end
    @(negedge clk); pb_start = 1;
    @(negedge clk); pb_start = 0;
    while (!res_valid) @(negedge clk);
    checks++;
    if (res_found) begin failures++; $display("FAIL end not sticky"); end
  endtask

  initial begin
    rst_n = 0; rd_start = 0; pb_start = 0; rd_lvl = 0; rd_addr = 0; cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // hand-made case from the paper's Fig. 4: 3 levels, ratios 2:1, 4:1, 4:1
    run_case(8, 8, 3, 4, 4, 2, 0, 0);
    run_case(64, 64, 3, 2, 4, 8, 40, 3);
    run_case(100, 333, 1, 2, 1, 1, 100, 1);        // long single-level stream
    run_case(500, 500, 3, 2, 8, 64, 300, 2);
    run_case(1000, 1000, 2, 8, 2048, 1, 200, 5);   // largest ratio
    run_case(300, 700, 3, 4, 16, 16, 2000, 1);
    for (int t = 0; t < 20; t++) begin
      int unsigned n = $urandom_range(1, 3);
      int unsigned r = $urandom_range(1, 400), c = $urandom_range(1, 400);
      run_case(r, c, n, $urandom_range(1, 8), $urandom_range(1, 64), $urandom_range(1, 64),
               $urandom_range(0, 300), $urandom_range(1, 6));
    end
    checks++;
    if (refills_in_pb == 0) begin failures++; $display("FAIL no refill during PBMAP"); end
    $display("blocks %0d, refills during PBMAP %0d", blocks_seen, refills_in_pb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
