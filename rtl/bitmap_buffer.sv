// bitmap_buffer: one SRAM bitmap buffer of a BMU group.
//
// Holds a 256-byte window (32 words of 64 bits) of one bitmap level while
// the scan logic searches it for set bits. The size is the paper's; the word
// organisation, the single write port fed from memory responses and the
// asynchronous read port used by the scanner are this design's choices. The
// array is written as a register file so it synthesises anywhere; a real
// chip would map it to an SRAM macro of the same shape.
//
// Timing: a write takes effect at the rising clock edge; rdata follows raddr
// combinationally. The contents are not reset (the scan logic tracks which
// window is valid).
module bitmap_buffer #(
  parameter int unsigned BUF_BYTES = smash_pkg::BMU_BUF_BYTES,
  parameter int unsigned WORD_W    = smash_pkg::WORD_W,
  localparam int unsigned WORDS    = BUF_BYTES * 8 / WORD_W,
  localparam int unsigned AW       = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [WORD_W-1:0] wdata,
  input  logic [AW-1:0]     raddr,
  output logic [WORD_W-1:0] rdata
);
  logic [WORD_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
