// tb_bram_dp: self-checking test of the dual-port block RAM.
// Random reads and writes on both ports against a reference array; checks the
// one-cycle read latency and read-first behaviour of a writing port.
module tb_bram_dp;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we_a, we_b;
  logic [9:0] addr_a, addr_b;
  logic [15:0] din_a, din_b, dout_a, dout_b;
  logic [15:0] ref_mem [1024];
  logic [15:0] exp_a, exp_b;

  bram_dp dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) ref_mem[i] = '0;
    we_a = 0; we_b = 0; addr_a = 0; addr_b = 0; din_a = 0; din_b = 0;
    @(negedge clk);
    for (int n = 0; n < 5000; n++) begin
      we_a   = ($urandom_range(0, 2) == 0);
      we_b   = ($urandom_range(0, 2) == 0);
      addr_a = 10'($urandom);
      addr_b = 10'($urandom);
      if (addr_a == addr_b) we_b = 0;
      din_a  = 16'($urandom);
      din_b  = 16'($urandom);
      exp_a  = ref_mem[addr_a];
      exp_b  = ref_mem[addr_b];
      @(posedge clk);
      if (we_a) ref_mem[addr_a] = din_a;
      if (we_b) ref_mem[addr_b] = din_b;
      #1;
      checks += 2;
      if (dout_a !== exp_a) begin failures++; if (failures < 10) $display("A mismatch %h %h", dout_a, exp_a); end
      if (dout_b !== exp_b) begin failures++; if (failures < 10) $display("B mismatch %h %h", dout_b, exp_b); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
