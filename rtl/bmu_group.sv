// bmu_group: one group of the Bitmap Management Unit.
//
// A group serves one sparse matrix (paper, Sec. 4.2.1 and Fig. 6). It holds
// the programmable registers (bmu_config_regs), the scanner with its three
// SRAM bitmap buffers (bmu_scan_ctrl), the index calculation
// (bmu_index_calc) and the two output registers, row index and column index.
// The group also decodes the SMASH instructions addressed to it:
//   MATINFO  a=rows, b=cols      -> programmable registers
//   BMAPINFO a=comp, b=lvl       -> programmable registers
//   RDBMAP   a=[mem], b=buf      -> load the buffer of level buf
//   PBMAP                        -> find next non-zero block, update outputs
//   RDIND                        -> return row / column output registers
// The operand packing and the handshake are this design's choices.
//
// Timing: cmd_ready is low while an RDBMAP load or a PBMAP search is in
// progress, so an instruction that follows simply stalls until the group is
// idle again (that is how RDIND waits for the result of PBMAP). RDIND is
// answered with rsp_valid one cycle after it is accepted. A PBMAP takes the
// scan time (one cycle per 64-bit bitmap word examined, one per level
// change, plus 32 memory responses per buffer refill) plus IDX_W+3 cycles of
// index calculation.
module bmu_group
  import smash_pkg::*;
#(
  parameter int unsigned LEVELS    = NUM_LEVELS,
  parameter int unsigned BUF_BYTES = smash_pkg::BMU_BUF_BYTES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  smash_cmd_t        cmd,
  output logic              rsp_valid,
  output smash_rsp_t        rsp,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  input  logic              mem_rsp_valid,
  input  logic [WORD_W-1:0] mem_rsp_data
);
  bmu_cfg_t cfg;
  logic     accept;
  logic     scan_busy, calc_busy, calc_done;
  logic     res_valid, res_found;
  logic [LEVELS-1:0][POS_W-1:0] res_idx;
  logic [IDX_W-1:0] calc_row, calc_index;
  logic [DIM_W-1:0] calc_col;

  // output registers (Fig. 6: "Row index", "Column index")
  logic [IDX_W-1:0] row_q;
  logic [DIM_W-1:0] col_q;
  logic             found_q;

  assign cmd_ready = !scan_busy && !calc_busy && !calc_done;
  assign accept    = cmd_valid && cmd_ready;

  bmu_config_regs #(.LEVELS(LEVELS), .BUF_BYTES(BUF_BYTES)) u_regs (
    .clk, .rst_n,
    .mat_we    (accept && cmd.op == OP_MATINFO),
    .mat_rows  (cmd.a),
    .mat_cols  (cmd.b),
    .bmap_we   (accept && cmd.op == OP_BMAPINFO),
    .bmap_lvl  (cmd.b[LVL_W-1:0]),
    .bmap_comp (cmd.a[COMP_W-1:0]),
    .cfg
  );

  bmu_scan_ctrl #(.LEVELS(LEVELS), .BUF_BYTES(BUF_BYTES)) u_scan (
    .clk, .rst_n, .cfg,
    .rd_start  (accept && cmd.op == OP_RDBMAP),
    .rd_lvl    (cmd.b[LVL_W-1:0]),
    .rd_addr   (cmd.a),
    .pb_start  (accept && cmd.op == OP_PBMAP),
    .busy      (scan_busy),
    .res_valid, .res_found, .res_idx,
    .mem_req_valid, .mem_req_ready, .mem_req_addr,
    .mem_rsp_valid, .mem_rsp_data
  );

  bmu_index_calc #(.LEVELS(LEVELS)) u_calc (
    .clk, .rst_n,
    .start     (res_valid && res_found),
    .idx_bit   (res_idx),
    .cfg,
    .busy      (calc_busy),
    .done      (calc_done),
    .lin_index (calc_index),   // not needed outside the calculation
    .row       (calc_row),
    .col       (calc_col)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_q     <= '0;
      col_q     <= '0;
      found_q   <= 1'b0;
      rsp_valid <= 1'b0;
      rsp       <= '0;
    end else begin
      if (res_valid && !res_found) found_q <= 1'b0;
      if (calc_done) begin
        row_q   <= calc_row;
        col_q   <= calc_col;
        found_q <= 1'b1;
      end
      rsp_valid <= accept && cmd.op == OP_RDIND;
      if (accept && cmd.op == OP_RDIND) begin
        rsp.found <= found_q;
        rsp.row   <= row_q;
        rsp.col   <= col_q;
      end
    end
  end

endmodule
