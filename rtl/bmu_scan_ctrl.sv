// bmu_scan_ctrl: the "hardware logic" of a BMU group -- the bitmap scanner.
//
// What it does (paper, Sec. 4.2.2-4.2.3): on PBMAP it walks the bitmap
// hierarchy depth-first and stops at the next set bit of Bitmap-0, saving at
// every level the position of the set bit it followed (index_bit(i)). On
// RDBMAP it loads the bitmap that starts at a memory address into the
// buffer of one level.
//
// Storage layout (follows Fig. 4b of the paper): each level is one packed
// bit stream in memory that holds only the blocks whose parent bit is set,
// in depth-first order. A block of level i < top is comp(i+1) bits long (one
// parent bit's worth); the top level is one block that covers the whole
// matrix. Because depth-first order visits each stream strictly in address
// order, every level keeps just a stream cursor (pos), the offset inside its
// current block (off) and whether that block is open.
//
// How it works (own choices where the paper is silent):
//  * Each level has one 256-byte buffer (bitmap_buffer) holding a 2048-bit
//    aligned window of its stream. When the cursor leaves the window, the
//    next window is fetched: 32 reads of 64 bits, pipelined, in order.
//  * The scanner examines one 64-bit buffer word per cycle, masked to the
//    part of the current block inside that word, and finds the first set bit
//    with a priority encoder. Found at level 0: report. Found higher up:
//    descend and open the child block. Block exhausted: climb one level.
//  * The top level ends where off * prod(comp) reaches rows*cols; then PBMAP
//    reports "not found".
//  * Stream bit p is bit 63-(p%64) of word p/64 (MSB first).
//
// Interface: rd_start / pb_start are single-cycle strobes accepted only
// while !busy. A PBMAP ends with a one-cycle res_valid pulse (res_found,
// res_idx). The memory port is a valid/ready request (byte address) with an
// in-order response stream; it is always ready for responses.
module bmu_scan_ctrl
  import smash_pkg::*;
#(
  parameter int unsigned LEVELS    = NUM_LEVELS,
  parameter int unsigned BUF_BYTES = smash_pkg::BMU_BUF_BYTES
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  bmu_cfg_t                     cfg,
  // RDBMAP [mem], buf
  input  logic                         rd_start,
  input  logic [LVL_W-1:0]             rd_lvl,
  input  logic [ADDR_W-1:0]            rd_addr,
  // PBMAP
  input  logic                         pb_start,
  output logic                         busy,
  output logic                         res_valid,
  output logic                         res_found,
  output logic [LEVELS-1:0][POS_W-1:0] res_idx,
  // memory read port
  output logic                         mem_req_valid,
  input  logic                         mem_req_ready,
  output logic [ADDR_W-1:0]            mem_req_addr,
  input  logic                         mem_rsp_valid,
  input  logic [WORD_W-1:0]            mem_rsp_data
);
  localparam int unsigned BUF_BITS  = BUF_BYTES * 8;
  localparam int unsigned WB        = $clog2(BUF_BITS);      // window bits
  localparam int unsigned WORDS     = BUF_BITS / WORD_W;
  localparam int unsigned WA        = $clog2(WORDS);
  localparam int unsigned WIN_W     = POS_W - WB;

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_FILL} state_e;
  state_e state_q;

  logic [LEVELS-1:0][ADDR_W-1:0] base_q;
  logic [LEVELS-1:0][POS_W-1:0]  pos_q, off_q, idx_q;
  logic [LEVELS-1:0][WIN_W-1:0]  win_q;
  logic [LEVELS-1:0]             winv_q, open_q;
  logic [LVL_W-1:0]              lv_q;
  logic                          fill_for_pb_q;
  logic [WA:0]                   fill_iss_q, fill_rcv_q;
  logic                          res_valid_q, res_found_q;

  // ---------------------------------------------------------------- buffers
  logic [LEVELS-1:0][WORD_W-1:0] buf_rdata;
  for (genvar l = 0; l < LEVELS; l++) begin : g_buf
    bitmap_buffer #(.BUF_BYTES(BUF_BYTES), .WORD_W(WORD_W)) u_buf (
      .clk,
      .we    (state_q == S_FILL && mem_rsp_valid && lv_q == LVL_W'(l)),
      .waddr (fill_rcv_q[WA-1:0]),
      .wdata (mem_rsp_data),
      .raddr (pos_q[l][WB-1:6]),
      .rdata (buf_rdata[l])
    );
  end

  // ------------------------------------------------------ scan datapath
  logic [LVL_W-1:0]  top;
  logic              is_top, in_win, found, exhausted, top_end;
  logic [POS_W-1:0]  pos, off, blen, step, delta, foff;
  logic [5:0]        bo;
  logic [6:0]        avail, hi;
  logic [WORD_W-1:0] word, mask, masked;
  logic [IDX_W-1:0]  top_reach;

  always_comb begin
    top     = cfg.nlev - 1'b1;
    is_top  = (lv_q == top);
    pos     = pos_q[lv_q];
    off     = off_q[lv_q];
    blen    = is_top ? '1 : POS_W'(cfg.comp[lv_q + 1'b1]);
    in_win  = winv_q[lv_q] && (win_q[lv_q] == pos[POS_W-1:WB]);
    bo      = pos[5:0];
    avail   = 7'd64 - 7'(bo);
    // bits of the current block that lie in this word
    if (!is_top && (blen - off) < POS_W'(avail)) step = blen - off;
    else                                         step = POS_W'(avail);
    hi      = 7'(bo) + 7'(step);
    mask    = ({WORD_W{1'b1}} << bo) &
              ((hi == 7'd64) ? {WORD_W{1'b1}} : ((WORD_W'(1) << hi[5:0]) - 1'b1));
    word    = rev_word(buf_rdata[lv_q]);
    masked  = in_win ? (word & mask) : '0;
    found   = (masked != '0);
    delta   = POS_W'(lowest_set(masked)) - POS_W'(bo);
    foff    = found ? off + delta : off;
    exhausted = !open_q[lv_q] || (!is_top && off >= blen);
    top_reach = IDX_W'(cfg.wprod[top] * IDX_W'(foff));
    top_end   = is_top && (top_reach >= cfg.total);
  end

  // ------------------------------------------------------------- control
  logic [POS_W-1:0] fill_pos;
  assign fill_pos = pos_q[lv_q];

  assign mem_req_valid = (state_q == S_FILL) && (fill_iss_q < (WA+1)'(WORDS));
  assign mem_req_addr  = base_q[lv_q]
                       + ADDR_W'({fill_pos[POS_W-1:WB], {WB{1'b0}}} >> 3)
                       + ADDR_W'(fill_iss_q[WA-1:0]) * ADDR_W'(WORD_W / 8);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_IDLE;
      base_q        <= '0;
      pos_q         <= '0;
      off_q         <= '0;
      idx_q         <= '0;
      win_q         <= '0;
      winv_q        <= '0;
      open_q        <= '0;
      lv_q          <= '0;
      fill_for_pb_q <= 1'b0;
      fill_iss_q    <= '0;
      fill_rcv_q    <= '0;
      res_valid_q   <= 1'b0;
      res_found_q   <= 1'b0;
    end else begin
      res_valid_q <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (rd_start && !res_valid_q) begin
            base_q[rd_lvl] <= rd_addr;
            pos_q[rd_lvl]  <= '0;
            off_q[rd_lvl]  <= '0;
            winv_q[rd_lvl] <= 1'b0;
            // loading the top level restarts the traversal from the top
            for (int l = 0; l < LEVELS; l++)
              if (rd_lvl == top && LVL_W'(l) < rd_lvl) open_q[l] <= 1'b0;
            open_q[rd_lvl] <= (rd_lvl == top);
            lv_q           <= rd_lvl;
            fill_for_pb_q  <= 1'b0;
            fill_iss_q     <= '0;
            fill_rcv_q     <= '0;
            state_q        <= S_FILL;
          end else if (pb_start && !res_valid_q) begin
            lv_q    <= '0;
            state_q <= S_SCAN;
          end
        end

        S_SCAN: begin
          if (cfg.nlev == '0 || (is_top && (exhausted || top_end))) begin
            res_valid_q <= 1'b1;
            res_found_q <= 1'b0;
            state_q     <= S_IDLE;
          end else if (exhausted) begin
            lv_q <= lv_q + 1'b1;                         // climb
          end else if (!in_win) begin
            winv_q[lv_q]  <= 1'b0;
            fill_for_pb_q <= 1'b1;
            fill_iss_q    <= '0;
            fill_rcv_q    <= '0;
            state_q       <= S_FILL;
          end else if (found) begin
            idx_q[lv_q] <= foff;
            off_q[lv_q] <= foff + 1'b1;
            pos_q[lv_q] <= pos + delta + 1'b1;
            if (lv_q == '0) begin
              res_valid_q <= 1'b1;
              res_found_q <= 1'b1;
              state_q     <= S_IDLE;
            end else begin                               // descend
              open_q[lv_q - 1'b1] <= 1'b1;
              off_q[lv_q - 1'b1]  <= '0;
              lv_q                <= lv_q - 1'b1;
            end
          end else begin                                 // next word
            pos_q[lv_q] <= pos + step;
            off_q[lv_q] <= off + step;
          end
        end

        S_FILL: begin
          if (mem_req_valid && mem_req_ready) fill_iss_q <= fill_iss_q + 1'b1;
          if (mem_rsp_valid) begin
            fill_rcv_q <= fill_rcv_q + 1'b1;
            if (fill_rcv_q == (WA+1)'(WORDS - 1)) begin
              winv_q[lv_q] <= 1'b1;
              win_q[lv_q]  <= fill_pos[POS_W-1:WB];
              state_q      <= fill_for_pb_q ? S_SCAN : S_IDLE;
            end
          end
        end

        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state_q != S_IDLE) || res_valid_q;
  assign res_valid = res_valid_q;
  assign res_found = res_found_q;
  assign res_idx   = idx_q;

  a_no_stray_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> (state_q == S_FILL));
endmodule
