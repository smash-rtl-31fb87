// smash_bmu: the Bitmap Management Unit (BMU) of SMASH, top level.
//
// The BMU sits beside a CPU core and answers the five SMASH instructions
// (MATINFO, BMAPINFO, RDBMAP, PBMAP, RDIND) for up to GROUPS sparse matrices
// at once, one per group (paper, Sec. 4.2 and Fig. 6; four groups of three
// 256-byte bitmap buffers is the configuration the paper sizes in its area
// estimate). Each instruction carries a group number; the top routes it to
// that group and stalls it (cmd_ready low) while the group is busy. Groups
// work independently, so a PBMAP on one group may run while another group
// loads its buffers. Their bitmap reads share one memory port through a
// round-robin arbiter (bmu_mem_arbiter); the memory must answer in order and
// echo the request tag.
//
// CPU side: cmd_valid/cmd_ready/cmd is one instruction per accepted cycle;
// rsp_valid/rsp returns the result of an RDIND one cycle after it was
// accepted. Memory side: m_req_* is a 64-bit read request by byte address
// (8-byte aligned) with tag m_req_id; m_rsp_* returns the data in order.
// The command encoding, handshakes and memory protocol are this design's
// own; the paper specifies the instructions only at ISA level.
module smash_bmu
  import smash_pkg::*;
#(
  parameter int unsigned GROUPS    = NUM_GROUPS,
  parameter int unsigned LEVELS    = NUM_LEVELS,
  parameter int unsigned BUF_BYTES = smash_pkg::BMU_BUF_BYTES,
  localparam int unsigned IDW      = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // SMASH ISA port from the CPU
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  smash_cmd_t        cmd,
  output logic              rsp_valid,
  output smash_rsp_t        rsp,
  // memory hierarchy port
  output logic              m_req_valid,
  input  logic              m_req_ready,
  output logic [ADDR_W-1:0] m_req_addr,
  output logic [IDW-1:0]    m_req_id,
  input  logic              m_rsp_valid,
  input  logic [WORD_W-1:0] m_rsp_data,
  input  logic [IDW-1:0]    m_rsp_id
);
  logic [GROUPS-1:0]             g_cmd_valid, g_cmd_ready, g_rsp_valid;
  smash_rsp_t [GROUPS-1:0]       g_rsp;
  logic [GROUPS-1:0]             g_req_valid, g_req_ready, g_mrsp_valid;
  logic [GROUPS-1:0][ADDR_W-1:0] g_req_addr;
  logic [WORD_W-1:0]             g_mrsp_data;
  logic                          grp_ok;

  assign grp_ok = (32'(cmd.grp) < GROUPS);

  always_comb begin
    g_cmd_valid = '0;
    if (grp_ok) g_cmd_valid[cmd.grp] = cmd_valid;
    // an instruction for a group that does not exist is dropped
    cmd_ready = grp_ok ? g_cmd_ready[cmd.grp] : 1'b1;
  end

  for (genvar g = 0; g < GROUPS; g++) begin : g_grp
    bmu_group #(.LEVELS(LEVELS), .BUF_BYTES(BUF_BYTES)) u_group (
      .clk, .rst_n,
      .cmd_valid     (g_cmd_valid[g]),
      .cmd_ready     (g_cmd_ready[g]),
      .cmd,
      .rsp_valid     (g_rsp_valid[g]),
      .rsp           (g_rsp[g]),
      .mem_req_valid (g_req_valid[g]),
      .mem_req_ready (g_req_ready[g]),
      .mem_req_addr  (g_req_addr[g]),
      .mem_rsp_valid (g_mrsp_valid[g]),
      .mem_rsp_data  (g_mrsp_data)
    );
  end

  // at most one group answers per cycle (one instruction enters per cycle)
  always_comb begin
    rsp_valid = |g_rsp_valid;
    rsp       = '0;
    for (int g = 0; g < GROUPS; g++)
      if (g_rsp_valid[g]) rsp = g_rsp[g];
  end

  bmu_mem_arbiter #(.GROUPS(GROUPS)) u_arb (
    .clk, .rst_n,
    .g_req_valid, .g_req_ready, .g_req_addr,
    .g_rsp_valid (g_mrsp_valid),
    .g_rsp_data  (g_mrsp_data),
    .m_req_valid, .m_req_ready, .m_req_addr, .m_req_id,
    .m_rsp_valid, .m_rsp_data, .m_rsp_id
  );

  a_one_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(g_rsp_valid));
endmodule
