// bmu_config_regs: the programmable registers of one BMU group.
//
// MATINFO writes the matrix dimensions, BMAPINFO writes the compression
// ratio comp(lvl) of one bitmap level (Table 1 of the paper). From these the
// block derives, combinationally, what the index calculation and the scan
// logic need: the cumulative products wprod(i) = comp(0)*...*comp(i) of the
// paper's index formula and the element count rows*cols.
//
// The number of levels in use is not an operand in the paper. Here MATINFO
// clears it and every BMAPINFO raises it to at least lvl+1, so a program that
// issues BMAPINFO for levels 0..n-1 (as the paper's SpMV and SpMM listings
// do) gets an n-level hierarchy. Ratios must lie in 1..BUF_BYTES*8, the
// paper's limit (2048:1 for a 256-byte buffer); an assertion checks it.
//
// Timing: registers update at the clock edge of the write strobe; cfg is
// valid from the next cycle. Reset clears everything (levels = 0).
module bmu_config_regs
  import smash_pkg::*;
#(
  parameter int unsigned LEVELS    = NUM_LEVELS,
  parameter int unsigned BUF_BYTES = smash_pkg::BMU_BUF_BYTES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mat_we,
  input  logic [DIM_W-1:0]  mat_rows,
  input  logic [DIM_W-1:0]  mat_cols,
  input  logic              bmap_we,
  input  logic [LVL_W-1:0]  bmap_lvl,
  input  logic [COMP_W-1:0] bmap_comp,
  output bmu_cfg_t          cfg
);
  logic [DIM_W-1:0]               rows_q, cols_q;
  logic [LVL_W-1:0]               nlev_q;
  logic [LEVELS-1:0][COMP_W-1:0]  comp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rows_q <= '0;
      cols_q <= '0;
      nlev_q <= '0;
      comp_q <= '0;
    end else if (mat_we) begin
      rows_q <= mat_rows;
      cols_q <= mat_cols;
      nlev_q <= '0;
    end else if (bmap_we && (32'(bmap_lvl) < LEVELS)) begin
      comp_q[bmap_lvl] <= bmap_comp;
      if (bmap_lvl >= nlev_q) nlev_q <= bmap_lvl + 1'b1;
    end
  end

  always_comb begin
    cfg       = '0;
    cfg.rows  = rows_q;
    cfg.cols  = cols_q;
    cfg.nlev  = nlev_q;
    cfg.total = IDX_W'(rows_q) * IDX_W'(cols_q);
    for (int i = 0; i < LEVELS; i++) begin
      cfg.comp[i]  = comp_q[i];
      cfg.wprod[i] = (i == 0) ? IDX_W'(comp_q[0])
                              : IDX_W'(cfg.wprod[i-1] * IDX_W'(comp_q[i]));
    end
  end

  // Paper, Sec. 4.2.1: the ratio must not exceed the buffer size in bits.
  a_comp_range: assert property (@(posedge clk) disable iff (!rst_n)
    bmap_we |-> (bmap_comp >= 1 && 32'(bmap_comp) <= BUF_BYTES * 8));
endmodule
