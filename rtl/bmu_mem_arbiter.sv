// bmu_mem_arbiter: shares the BMU's memory read port among the groups.
//
// The paper shows one path "Transfer Bitmap Blocks" from the memory
// hierarchy into the BMU; how several groups share it is not described. This
// block is this design's choice: a round-robin arbiter on the request side
// that tags each request with the requesting group, and a demultiplexer on
// the response side that uses the returned tag. The memory must answer in
// request order and echo the tag.
//
// Timing: purely combinational grant; the priority pointer moves past the
// winner after each accepted request, so a busy group cannot starve others.
module bmu_mem_arbiter
  import smash_pkg::*;
#(
  parameter int unsigned GROUPS = NUM_GROUPS,
  localparam int unsigned IDW   = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // group side
  input  logic [GROUPS-1:0]              g_req_valid,
  output logic [GROUPS-1:0]              g_req_ready,
  input  logic [GROUPS-1:0][ADDR_W-1:0]  g_req_addr,
  output logic [GROUPS-1:0]              g_rsp_valid,
  output logic [WORD_W-1:0]              g_rsp_data,
  // memory side
  output logic                           m_req_valid,
  input  logic                           m_req_ready,
  output logic [ADDR_W-1:0]              m_req_addr,
  output logic [IDW-1:0]                 m_req_id,
  input  logic                           m_rsp_valid,
  input  logic [WORD_W-1:0]              m_rsp_data,
  input  logic [IDW-1:0]                 m_rsp_id
);
  logic [IDW-1:0] ptr_q, win;
  logic           any;

  always_comb begin
    win = '0;
    any = 1'b0;
    for (int k = GROUPS - 1; k >= 0; k--) begin
      // candidate at distance k from the pointer; lowest distance wins
      int unsigned c;
      c = (int'(ptr_q) + k) % GROUPS;
      if (g_req_valid[c]) begin
        win = IDW'(c);
        any = 1'b1;
      end
    end
  end

  assign m_req_valid = any;
  assign m_req_addr  = g_req_addr[win];
  assign m_req_id    = win;

  always_comb begin
    g_req_ready = '0;
    g_req_ready[win] = any && m_req_ready;
    g_rsp_valid = '0;
    g_rsp_valid[m_rsp_id] = m_rsp_valid;
  end
  assign g_rsp_data = m_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr_q <= '0;
    else if (any && m_req_ready) ptr_q <= IDW'((int'(win) + 1) % GROUPS);
  end

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(g_req_ready));
endmodule
