// tb_workload_spmm: SpMM at the size of one of the paper's evaluated
// matrices, as far as a simulation can go: one full row of C = A*A, where A
// has the shape and non-zero count of M1 (20738 x 20738, 73916 non-zeros,
// random positions). The BMU runs at its default parameters. Both operands
// use one-level bitmaps with ratio 2:1, as in the paper's SpMM listing:
// group 0 walks row i of A, group 1 walks column j of A (stored column by
// column), for every j. The testbench merges the two index streams, adds
// up the products of matching NZA blocks, and compares the row with a direct
// product. The full product would need 20738 times as long.
module tb_workload_spmm;
  import smash_pkg::*;
  localparam int unsigned N = 20738, NNZ = 73916, C0 = 2;
  localparam int unsigned NCOLS = N;                    // columns of C computed
  localparam int unsigned SW = (N / C0 + 63) / 64;       // words per row / column bitmap
  localparam int unsigned COLBASE = SW + 8;
  localparam int unsigned MEMW = COLBASE + N * SW;
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
    repeat (100000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(smash_op_e op, int unsigned grp, int unsigned a, int unsigned b);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.grp = 2'(grp); cmd.a = a; cmd.b = b;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic next(int unsigned grp, output smash_rsp_t r);
    issue(OP_PBMAP, grp, 0, 0);
    issue(OP_RDIND, grp, 0, 0);
    r = rsp;
  endtask

  initial begin
    int aval [longint];                 // r*N + c -> value
    int rowc [int][$];                  // row -> columns
    longint cref [], cgot [];
    int unsigned irow, best;
    longint t0, t1, nmatch = 0;
    smash_rsp_t a, b;
    rst_n = 0; cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (aval.size() < NNZ) begin
      automatic int unsigned r = $urandom_range(0, N - 1), c = $urandom_range(0, N - 1);
      automatic longint key = longint'(r) * N + c;
      if (!aval.exists(key)) begin aval[key] = $urandom_range(1, 9); rowc[r].push_back(c); end
    end
    // the row of A with the most non-zeros
    best = 0; irow = 0;
    foreach (rowc[r]) if (rowc[r].size() > best) begin best = rowc[r].size(); irow = r; end
    // bitmaps: row irow of A at word 0, column j of A at COLBASE + j*SW
    foreach (rowc[irow][n]) u_mem.mem[rowc[irow][n] / C0 / 64][63 - (rowc[irow][n] / C0) % 64] = 1'b1;
    foreach (aval[key]) begin
      automatic int unsigned r = int'(key / N), c = int'(key % N);
      u_mem.mem[COLBASE + c * SW + (r / C0) / 64][63 - (r / C0) % 64] = 1'b1;
    end
    cref = new[N]; cgot = new[N];
    foreach (cref[j]) begin cref[j] = 0; cgot[j] = 0; end
    foreach (rowc[irow][n]) begin
      automatic int unsigned k = rowc[irow][n];
      if (rowc.exists(k))
        foreach (rowc[k][m]) cref[rowc[k][m]] += aval[longint'(irow) * N + k] * aval[longint'(k) * N + rowc[k][m]];
    end

    t0 = cyc;
    issue(OP_MATINFO, 0, 1, N);
    issue(OP_MATINFO, 1, 1, N);
    issue(OP_BMAPINFO, 0, C0, 0);
    issue(OP_BMAPINFO, 1, C0, 0);
    for (int unsigned j = 0; j < NCOLS; j++) begin
      issue(OP_RDBMAP, 0, 0, 0);
      issue(OP_RDBMAP, 1, (COLBASE + j * SW) * 8, 0);
      issue(OP_PBMAP, 0, 0, 0);
      issue(OP_PBMAP, 1, 0, 0);
      issue(OP_RDIND, 0, 0, 0); a = rsp;
      issue(OP_RDIND, 1, 0, 0); b = rsp;
      while (a.found && b.found) begin
        if (a.col == b.col) begin
          for (int unsigned t = 0; t < C0; t++) begin
            automatic longint ka = longint'(irow) * N + a.col + t, kb = longint'(a.col + t) * N + j;
            if (aval.exists(ka) && aval.exists(kb)) cgot[j] += aval[ka] * aval[kb];
          end
          nmatch++;
          next(0, a);
          next(1, b);
        end else if (a.col < b.col) next(0, a);
        else next(1, b);
      end
    end
    t1 = cyc;
    for (int unsigned j = 0; j < NCOLS; j++) begin
      checks++;
      if (cgot[j] != cref[j]) begin
        failures++; if (failures < 10) $display("FAIL C[%0d][%0d] %0d vs %0d", irow, j, cgot[j], cref[j]);
      end
    end
    checks++;
    if (nmatch == 0) begin failures++; $display("FAIL no index match"); end
    $display("SpMM row %0d (%0d non-zeros) x %0d columns: %0d matching blocks, %0d cycles (%0d per column)",
             irow, best, NCOLS, nmatch, t1 - t0, (t1 - t0) / NCOLS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
