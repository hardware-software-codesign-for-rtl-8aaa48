// tb_mvm: self-checking test of the Mini Vector Machine.
// Fills the left BRAM with random pairs (MVM_WRITE), runs every vector
// operation into a random half of the right BRAM, checks the run length
// (busy for 519 cycles, from the second cycle of the operation), then reads
// the right BRAM (MVM_READ) and compares with results computed here. Finally
// an addition is cut short by MVM_RESET: it must stop at once, keep the
// results already written and leave the rest of the right BRAM alone.
module tb_mvm;
  import mm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  logic [3:0] processor_control;
  logic [15:0] input_data0, input_addr0, input_data1, input_addr1;
  logic [15:0] output_data0, output_addr0, output_data1, output_addr1;
  logic busy;

  mvm dut (.*);

  logic signed [15:0] left [1024];
  logic [15:0] right [1024];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic fill();
    processor_control = {1'b0, MVM_WRITE};
    for (int j = 0; j < 512; j++) begin
      input_addr0 = 16'(2*j); input_addr1 = 16'(2*j+1);
      input_data0 = 16'($urandom_range(0, 65535));
      input_data1 = 16'($urandom_range(0, 65535));
      if (j % 7 == 3) begin input_data0 = 16'h8000; input_data1 = 16'h7fff; end
      left[2*j] = input_data0; left[2*j+1] = input_data1;
      @(negedge clk);
    end
    processor_control = {1'b0, MVM_READ};
    @(negedge clk);
  endtask

  task automatic run(input mvm_op_e op, input logic msb);
    int nbusy;
    logic signed [47:0] acc;
    bit first_ok;
    // reference
    acc = 0;
    for (int e = 0; e < 512; e++) begin
      case (op)
        MVM_VEC_ADD:    right[{msb, 9'(e)}] = 16'(left[e] + left[512+e]);
        MVM_VEC_SUB:    right[{msb, 9'(e)}] = 16'(left[e] - left[512+e]);
        MVM_ELEM_MULTI: right[{msb, 9'(e)}] = 16'(48'(left[e]) * 48'(left[512+e]));
        MVM_VEC_DOT:    acc = acc + 48'(left[e]) * 48'(left[512+e]);
        default:        acc = acc + 48'(left[e]) + 48'(left[512+e]);
      endcase
    end
    if (op inside {MVM_VEC_DOT, MVM_VEC_SUM}) right[{msb, 9'd0}] = acc[15:0];
    processor_control = {msb, op};
    @(negedge clk);
    first_ok = busy;
    nbusy = 0;
    while (busy && nbusy < 2000) begin nbusy++; @(negedge clk); end
    check(first_ok, $sformatf("busy in cycle 2 of op %0d", op));
    check(nbusy == 519, $sformatf("op %0d busy for %0d cycles, expected 519", op, nbusy));
    processor_control = {1'b0, MVM_READ};
    @(negedge clk);
  endtask

  task automatic readback(input logic msb, input int npairs);
    for (int j = 0; j < npairs; j++) begin
      input_addr0 = {6'b0, msb, 9'(2*j)};
      input_addr1 = {6'b0, msb, 9'(2*j+1)};
      @(negedge clk);
      check(output_data0 == right[{msb, 9'(2*j)}] && output_data1 == right[{msb, 9'(2*j+1)}],
            $sformatf("read pair %0d: %h %h exp %h %h", j, output_data0, output_data1,
                      right[{msb, 9'(2*j)}], right[{msb, 9'(2*j+1)}]));
      check(output_addr0 == input_addr0 && output_addr1 == input_addr1, "output address");
    end
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) right[i] = '0;
    rst_n = 0; processor_control = {1'b0, MVM_READ};
    input_data0 = 0; input_data1 = 0; input_addr0 = 0; input_addr1 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < 2; r++) begin
      fill();
      run(MVM_VEC_ADD, 1'b0);   readback(1'b0, 256);
      run(MVM_VEC_SUB, 1'b1);   readback(1'b1, 256);
      run(MVM_ELEM_MULTI, 1'b0); readback(1'b0, 256);
      run(MVM_VEC_DOT, 1'b1);   readback(1'b1, 4);
      run(MVM_VEC_SUM, 1'b0);   readback(1'b0, 4);
    end
    // MVM_RESET in the middle of an addition: the run stops at once, the
    // results written so far stay, the rest of the right BRAM is untouched.
    fill();
    processor_control = {1'b1, MVM_VEC_ADD};
    repeat (120) @(negedge clk);
    check(busy, "busy before reset");
    processor_control = {1'b0, MVM_RESET};
    @(negedge clk);
    check(!busy, "reset ends the run");
    processor_control = {1'b0, MVM_READ};
    repeat (600) begin
      check(!busy, "stays idle after reset");
      @(negedge clk);
    end
    for (int e = 0; e < 512; e++) begin
      if (e > 100 && e < 120) continue;
      input_addr0 = {6'b0, 1'b1, 9'(e)};
      input_addr1 = input_addr0;
      @(negedge clk);
      if (e <= 100)
        check(output_data0 == 16'(left[e] + left[512+e]),
              $sformatf("element %0d written before reset", e));
      else
        check(output_data0 == right[{1'b1, 9'(e)}],
              $sformatf("element %0d untouched after reset", e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
