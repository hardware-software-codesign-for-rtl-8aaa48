// tb_actpro: self-checking test of the Activation Processor.
// Loads a random look-up table (both halves) with ACTPRO_WRITE_ACT, random
// data with ACTPRO_WRITE_DATA, runs ACTPRO_RUN with each table half, checks
// the run length (busy for 517 cycles from the second cycle) and compares all
// 1024 results, read back with ACTPRO_READ, with the table entry at
// {half, data >>> 7}.
module tb_actpro;
  import mm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, lut_sel, busy;
  logic [1:0] processor_control;
  logic [15:0] input_data0, input_addr0, input_data1, input_addr1;
  logic [15:0] output_data0, output_addr0, output_data1, output_addr1;

  actpro dut (.*);

  logic signed [15:0] left [1024];
  logic [15:0] lut [1024];

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

  task automatic load(input act_op_e op);
    processor_control = op;
    for (int j = 0; j < 512; j++) begin
      input_addr0 = 16'(2*j); input_addr1 = 16'(2*j+1);
      input_data0 = 16'($urandom_range(0, 65535));
      input_data1 = 16'($urandom_range(0, 65535));
      if (op == ACTPRO_WRITE_ACT) begin lut[2*j] = input_data0; lut[2*j+1] = input_data1; end
      else begin left[2*j] = input_data0; left[2*j+1] = input_data1; end
      @(negedge clk);
    end
    processor_control = ACTPRO_READ;
    @(negedge clk);
  endtask

  task automatic run_and_check(input logic sel);
    int nbusy;
    bit first_ok;
    logic signed [15:0] sh;
    logic [15:0] e0, e1;
    lut_sel = sel;
    processor_control = ACTPRO_RUN;
    @(negedge clk);
    first_ok = busy;
    nbusy = 0;
    while (busy && nbusy < 2000) begin nbusy++; @(negedge clk); end
    check(first_ok, "busy in cycle 2");
    check(nbusy == 517, $sformatf("busy for %0d cycles, expected 517", nbusy));
    processor_control = ACTPRO_READ;
    for (int j = 0; j < 512; j++) begin
      input_addr0 = 16'(2*j); input_addr1 = 16'(2*j+1);
      @(negedge clk);
      sh = left[2*j] >>> 7;   e0 = lut[{sel, sh[8:0]}];
      sh = left[2*j+1] >>> 7; e1 = lut[{sel, sh[8:0]}];
      check(output_data0 == e0 && output_data1 == e1,
            $sformatf("pair %0d: %h %h exp %h %h", j, output_data0, output_data1, e0, e1));
    end
  endtask

  initial begin
    rst_n = 0; lut_sel = 0; processor_control = ACTPRO_READ;
    input_data0 = 0; input_data1 = 0; input_addr0 = 0; input_addr1 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load(ACTPRO_WRITE_ACT);
    load(ACTPRO_WRITE_DATA);
    run_and_check(1'b0);
    run_and_check(1'b1);
    load(ACTPRO_WRITE_DATA);
    run_and_check(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
