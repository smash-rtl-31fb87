// tb_bitmap_buffer: writes random words to random addresses of a 256-byte
// bitmap buffer and checks every read against a reference array, including
// reads in the cycle right after a write.
module tb_bitmap_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  logic        we;
  logic [4:0]  waddr, raddr;
  logic [63:0] wdata, rdata;
  logic [63:0] ref_mem [32];
  int checks = 0, failures = 0;

  bitmap_buffer dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); we = 1; waddr = 5'(i); wdata = {$urandom, $urandom}; ref_mem[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 32; i++) begin
      raddr = 5'(i); #1;
      checks++; if (rdata !== ref_mem[i]) begin failures++; $display("FAIL rd %0d", i); end
    end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); waddr = 5'($urandom); wdata = {$urandom, $urandom};
      raddr = 5'($urandom);
      #1; checks++;
      if (rdata !== ref_mem[raddr]) begin failures++; $display("FAIL rd %0d", raddr); end
      @(posedge clk); if (we) ref_mem[waddr] = wdata;
      #1; raddr = waddr;
      #1; checks++;
      if (rdata !== ref_mem[raddr]) begin failures++; $display("FAIL rd-after-wr %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
