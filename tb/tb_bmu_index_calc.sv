// tb_bmu_index_calc: random set-bit positions, ratios and matrix widths;
// checks Index = sum_i prod_{j<=i} comp(j) * index_bit(i), row = Index/cols
// and col = Index%cols against testbench arithmetic, and that the latency
// from start to done is the constant IDX_W+3 cycles of this implementation.
module tb_bmu_index_calc;
  import smash_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done;
  logic [2:0][31:0] idx_bit;
  bmu_cfg_t cfg;
  logic [47:0] lin_index, row;
  logic [31:0] col;
  int checks = 0, failures = 0;

  bmu_index_calc dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned cp [3], w, idx, er, ec, rows, cols;
    int n, lat;
    rst_n = 0; start = 0; idx_bit = '0; cfg = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      n = $urandom_range(1, 3);
      cols = (t % 7 == 0) ? 1 : $urandom_range(1, 3000000);
      rows = $urandom_range(1, 3000000);
      cfg = '0; cfg.nlev = 2'(n); cfg.cols = 32'(cols); cfg.rows = 32'(rows);
      w = 1; idx = 0;
      for (int l = 0; l < 3; l++) begin
        cp[l] = $urandom_range(1, 64);
        w *= cp[l];
        cfg.comp[l] = 12'(cp[l]); cfg.wprod[l] = 48'(w);
        idx_bit[l] = $urandom_range(0, 63);
        if (l < n) idx += w * idx_bit[l];
      end
      idx = idx % (rows * cols);
      // keep the requested index inside the matrix by re-deriving the top bit
      idx_bit[n-1] = 0; idx = 0; w = 1;
      for (int l = 0; l < n - 1; l++) begin w *= cp[l]; idx += w * idx_bit[l]; end
      w *= cp[n-1];
      idx_bit[n-1] = 32'(((rows * cols - 1) / w) % 5000);
      idx += w * idx_bit[n-1];
      er = idx / cols; ec = idx % cols;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lin_index != 48'(idx) || row != 48'(er) || col != 32'(ec)) begin
        failures++;
        $display("FAIL idx %0d/%0d row %0d/%0d col %0d/%0d", lin_index, idx, row, er, col, ec);
      end
      checks++;
      if (lat != 48 + 3) begin failures++; $display("FAIL latency %0d", lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
