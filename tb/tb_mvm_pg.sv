// tb_mvm_pg: self-checking test of the MVM processor group.
// Loads the microcode program of each vector instruction (mm_pkg::prog_word)
// through the group-control port, starts it, feeds random input pairs and
// compares every output pair with the group model of tb_mm_model_pkg. The
// first run has an input pair always waiting and the output always ready, and
// checks the run length: 4 x 512 load cycles + 522 run cycles + 4 x 256 store
// cycles per iteration, plus two cycles of output latency. The other runs
// insert random gaps on both sides, so the group must stall correctly.
module tb_mvm_pg;
  import mm_pkg::*;
  import tb_mm_model_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  group_ctl_e group_control;
  logic [31:0] microcode;
  logic [ITER_W-1:0] iters;
  logic [3:0] loop_start;
  logic [15:0] input_data0, input_data1, output_data0, output_data1;
  logic input_valid, input_pop, output_valid, output_ready, busy, in_stall, out_stall;

  mvm_pg dut (.*);

  logic [31:0] inq [$];
  logic [31:0] expq [$];
  int n_in_stall = 0, n_out_stall = 0;
  bit gaps;
  grp_model model;

  initial begin
    repeat (1000000) @(posedge clk);
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

  // input side: present the head of inq, pop on input_pop
  always @(negedge clk) begin
    if (rst_n) begin
      input_valid  <= (inq.size() > 0) && (!gaps || $urandom_range(0, 3) != 0);
      output_ready <= !gaps || ($urandom_range(0, 2) != 0);
    end
  end
  assign input_data0 = (inq.size() > 0) ? inq[0][15:0] : 16'h0;
  assign input_data1 = (inq.size() > 0) ? inq[0][31:16] : 16'h0;

  always @(posedge clk) begin
    if (in_stall) n_in_stall++;
    if (out_stall) n_out_stall++;
    if (input_pop) void'(inq.pop_front());
    if (output_valid) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        if ({output_data1, output_data0} !== expq[0]) begin
          failures++;
          if (failures < 20) $display("FAIL output %h exp %h", {output_data1, output_data0}, expq[0]);
        end
        void'(expq.pop_front());
      end
    end
  end

  task automatic run(input isa_op_e op, input int nit, input bit with_gaps, input int exp_cycles);
    logic [31:0] w [$];
    int plen, nbusy;
    gaps = with_gaps;
    plen = is_mvm_op(op) ? MVM_PROG_LEN : ACT_PROG_LEN;
    for (int k = 0; k < plen; k++) begin
      group_control = GC_LOAD; microcode = prog_word(op, k);
      @(negedge clk);
    end
    for (int it = 0; it < nit; it++) begin
      w.delete();
      for (int i = 0; i < grp_model::words(op, it); i++) begin
        w.push_back($urandom);
        inq.push_back(w[$]);
      end
      model.iterate(op, it, w, expq);
    end
    group_control = GC_START; iters = ITER_W'(nit);
    loop_start = is_mvm_op(op) ? 4'd0 : 4'd1;
    @(negedge clk);
    group_control = GC_HOLD;
    nbusy = 0;
    while (busy && nbusy < 500000) begin nbusy++; @(negedge clk); end
    if (exp_cycles > 0)
      check(nbusy == exp_cycles, $sformatf("busy %0d cycles, expected %0d", nbusy, exp_cycles));
    check(inq.size() == 0, "all input consumed");
    check(expq.size() == 0, $sformatf("all outputs produced (%0d left)", expq.size()));
    repeat (5) @(negedge clk);
  endtask

  initial begin
    model = new();
    rst_n = 0; group_control = GC_HOLD; microcode = 0; iters = 0; loop_start = 0;
    gaps = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(OP_VECTOR_ADDITION, 2, 1'b0, 2 * (4*512 + MVM_RUN_CYCLES + 4*256) + 2);
    run(OP_VECTOR_DOT_PRODUCT, 2, 1'b1, 0);
    run(OP_VECTOR_SUBTRACTION, 1, 1'b1, 0);
    run(OP_ELEMENT_MULTIPLICATION, 1, 1'b1, 0);
    run(OP_VECTOR_SUMMATION, 1, 1'b1, 0);
    run(OP_VECTOR_DOT_PRODUCT, 1, 1'b0, 0);
    check(n_in_stall > 0 && n_out_stall > 0, "stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
