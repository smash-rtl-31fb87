// bmu_index_calc: turns the saved set-bit positions into <row, column>.
//
// Implements the paper's formula (Sec. 4.2.3)
//     Index = sum_{i=0}^{levels-1} ( prod_{j=0}^{i} comp(j) ) * index_bit(i)
//     row   = Index / matrix_columns,   column = Index % matrix_columns
// where index_bit(i) is the position of the set bit found in the current
// block of Bitmap-i. The products prod comp(j) come precomputed from the
// programmable registers (cfg.wprod). The weighted sum is formed in one
// combinational step and registered when 'start' is accepted; the division
// then runs on bmu_divider (IDX_W+1 cycles). Both are this design's choices.
//
// Interface: 'start' (while !busy) captures idx_bit; 'done' pulses with row,
// col and the linear index valid, about IDX_W+3 cycles later.
module bmu_index_calc
  import smash_pkg::*;
#(
  parameter int unsigned LEVELS = NUM_LEVELS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [LEVELS-1:0][POS_W-1:0] idx_bit,
  input  bmu_cfg_t                     cfg,
  output logic                         busy,
  output logic                         done,
  output logic [IDX_W-1:0]             lin_index,
  output logic [IDX_W-1:0]             row,
  output logic [DIM_W-1:0]             col
);
  logic [IDX_W-1:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < LEVELS; i++)
      if (LVL_W'(i) < cfg.nlev)
        sum += IDX_W'(cfg.wprod[i] * IDX_W'(idx_bit[i]));
  end

  logic div_start, div_busy;
  logic pend_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lin_index <= '0;
      pend_q    <= 1'b0;
    end else begin
      pend_q <= 1'b0;
      if (start && !busy) begin
        lin_index <= sum;
        pend_q    <= 1'b1;
      end
    end
  end

  assign div_start = pend_q;
  assign busy      = pend_q | div_busy;

  bmu_divider #(.N(IDX_W), .D(DIM_W)) u_div (
    .clk, .rst_n,
    .start     (div_start),
    .dividend  (lin_index),
    .divisor   (cfg.cols),
    .busy      (div_busy),
    .done      (done),
    .quotient  (row),
    .remainder (col)
  );
endmodule
