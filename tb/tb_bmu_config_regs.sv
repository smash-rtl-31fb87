// tb_bmu_config_regs: programs random matrix sizes and compression ratios and
// checks rows, cols, the level count, the ratios, the cumulative products
// prod comp(0..i) and rows*cols against values computed in the testbench.
module tb_bmu_config_regs;
  import smash_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, mat_we, bmap_we;
  logic [31:0] mat_rows, mat_cols;
  logic [1:0]  bmap_lvl;
  logic [11:0] bmap_comp;
  bmu_cfg_t    cfg;
  int checks = 0, failures = 0;

  bmu_config_regs dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned r, c, cp [3], w;
    int n;
    rst_n = 0; mat_we = 0; bmap_we = 0; mat_rows = 0; mat_cols = 0; bmap_lvl = 0; bmap_comp = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    chk(cfg.nlev == 0 && cfg.total == 0, "reset");
    for (int t = 0; t < 200; t++) begin
      r = $urandom_range(1, 2000000); c = $urandom_range(1, 2000000);
      n = $urandom_range(1, 3);
      @(negedge clk); mat_we = 1; mat_rows = 32'(r); mat_cols = 32'(c);
      @(negedge clk); mat_we = 0;
      chk(cfg.nlev == 0, "matinfo clears levels");
      for (int l = n - 1; l >= 0; l--) begin
        cp[l] = $urandom_range(1, 2048);
        @(negedge clk); bmap_we = 1; bmap_lvl = 2'(l); bmap_comp = 12'(cp[l]);
        if (cp[l] == 2048) bmap_comp = 12'd2048;
      end
      @(negedge clk); bmap_we = 0;
      chk(cfg.rows == 32'(r) && cfg.cols == 32'(c), "dims");
      chk(cfg.total == 48'(r * c), "total");
      chk(int'(cfg.nlev) == n, $sformatf("nlev %0d vs %0d", cfg.nlev, n));
      w = 1;
      for (int l = 0; l < n; l++) begin
        w *= cp[l];
        chk(cfg.comp[l] == 12'(cp[l]), "comp");
        chk(cfg.wprod[l] == 48'(w), $sformatf("wprod[%0d] %0d vs %0d", l, cfg.wprod[l], w));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
