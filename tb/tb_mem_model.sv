// tb_mem_model: behavioural model of the memory hierarchy (not synthesizable
// design, testbench only). Answers 64-bit reads by byte address after a fixed
// LATENCY, in request order, echoing the request tag. With STALL_PCT > 0 it
// refuses requests at random to exercise back-pressure. Words outside the
// array read as zero. Testbenches fill 'mem' directly; stream bit p of a
// bitmap at word w0 is bit 63-(p%64) of mem[w0 + p/64].
module tb_mem_model #(
  parameter int unsigned WORDS     = 65536,
  parameter int unsigned LATENCY   = 4,
  parameter int unsigned IDW       = 2,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_valid,
  output logic           req_ready,
  input  logic [31:0]    req_addr,
  input  logic [IDW-1:0] req_id,
  output logic           rsp_valid,
  output logic [63:0]    rsp_data,
  output logic [IDW-1:0] rsp_id
);
  logic [63:0] mem [WORDS];
  typedef struct { longint due; logic [63:0] d; logic [IDW-1:0] id; } ent_t;
  ent_t q [$];
  longint cyc;
  int unsigned nreq;

  initial begin
    for (int i = 0; i < int'(WORDS); i++) mem[i] = '0;
  end

  task automatic set_bit(int unsigned w0, longint unsigned p, bit v);
    mem[w0 + int'(p / 64)][63 - int'(p % 64)] = v;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc       <= 0;
      req_ready <= 1'b1;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      rsp_id    <= '0;
      nreq      <= 0;
      q.delete();
    end else begin
      ent_t e;
      cyc <= cyc + 1;
      if (req_valid && req_ready) begin
        e.due = cyc + LATENCY;
        e.d   = (req_addr / 8 < WORDS) ? mem[req_addr / 8] : '0;
        e.id  = req_id;
        q.push_back(e);
        nreq <= nreq + 1;
      end
      rsp_valid <= 1'b0;
      if (q.size() > 0 && q[0].due <= cyc) begin
        e = q.pop_front();
        rsp_valid <= 1'b1;
        rsp_data  <= e.d;
        rsp_id    <= e.id;
      end
      req_ready <= (STALL_PCT == 0) ? 1'b1 : (($urandom % 100) >= STALL_PCT);
    end
  end
endmodule
