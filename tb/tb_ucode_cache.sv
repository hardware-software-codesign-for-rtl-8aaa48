// tb_ucode_cache: self-checking test of the 16-entry microcode cache.
// Writes random words to random entries and reads every entry back through
// the asynchronous read port, comparing with a reference copy.
module tb_ucode_cache;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we;
  logic [3:0] waddr, raddr;
  logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [16];

  ucode_cache dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) ref_mem[i] = '0;
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we = $urandom_range(0, 1);
      waddr = 4'($urandom); wdata = $urandom;
      raddr = 4'($urandom);
      #1;
      checks++;
      if (rdata !== ref_mem[raddr]) begin failures++; $display("mismatch @%0d", raddr); end
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
