// tb_local_ctrl: self-checking test of the processor-group local controller.
// Loads a three-microcode program and runs it for three iterations with the
// loop restarting at entry 1, while input pairs arrive and the output side is
// ready only at random. Every cycle the processor controls, the counter
// addresses, the output multiplexer select, input_pop and out_issue are
// compared with a cycle-accurate model kept in the testbench; stalls on both
// sides must occur. A second, one-entry program checks that loading after a
// run starts again at entry 0. A third, long program is abandoned with
// GC_STOP, must stay halted, and must run again in full on the next GC_START.
module tb_local_ctrl;
  import mm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  group_ctl_e group_control;
  logic [31:0] microcode;
  logic [ITER_W-1:0] iters;
  logic [3:0] loop_start;
  logic input_valid, output_ready, input_pop, out_issue, busy, in_stall, out_stall;
  logic [3:0] pctl [PROCS];
  logic [15:0] addr0, addr1;
  logic [1:0] out_mux;

  local_ctrl dut (.*);

  ucode_t prog [3];
  int n_in_stall = 0, n_out_stall = 0;

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic run_model(input int n, input int nit, input int lstart);
    int pc, it, cyc, cnt;
    bit exec;
    ucode_t u;
    logic col;
    logic [15:0] ea0;
    pc = 0; it = 0; cyc = 0; cnt = 0;
    while (it < nit) begin
      u = prog[pc];
      input_valid  = ($urandom_range(0, 3) != 0);
      output_ready = ($urandom_range(0, 3) != 0);
      #1;
      exec = !(u.in_cnt_en && !input_valid) && !(u.out_cnt_en && !output_ready);
      if (u.in_cnt_en && !input_valid) n_in_stall++;
      if (u.out_cnt_en && !output_ready) n_out_stall++;
      col = (u.out_cnt_en ? u.out_col : u.in_col) ^ cnt[8];
      ea0 = 16'({col, 8'(cnt), 1'b0});
      check(busy, "busy while running");
      check(pctl[0] == u.pctl0 && pctl[1] == u.pctl1 && pctl[2] == u.pctl2 && pctl[3] == u.pctl3,
            $sformatf("pctl pc=%0d cyc=%0d", pc, cyc));
      check(out_mux == u.out_mux, "out_mux");
      if (u.in_cnt_en || u.out_cnt_en)
        check(addr0 == ea0 && addr1 == (ea0 | 16'd1),
              $sformatf("addr %h exp %h pc=%0d cnt=%0d", addr0, ea0, pc, cnt));
      check(input_pop == (exec && u.in_cnt_en), "input_pop");
      check(out_issue == (exec && u.out_cnt_en), "out_issue");
      @(negedge clk);
      if (exec) begin
        cyc++;
        if (u.in_cnt_en || u.out_cnt_en) cnt++;
        if (cyc >= ((u.cycles == 0) ? 1 : int'(u.cycles))) begin
          cyc = 0; cnt = 0;
          pc++;
          if (pc == n) begin pc = lstart; it++; end
        end
      end
    end
    #1;
    check(!busy, "idle after the last iteration");
    check(pctl[0] == 4'(MVM_READ), "idle control");
  endtask

  task automatic load(input ucode_t u);
    group_control = GC_LOAD; microcode = u;
    @(negedge clk);
    group_control = GC_HOLD;
  endtask

  initial begin
    rst_n = 0; group_control = GC_HOLD; microcode = 0; iters = 0; loop_start = 0;
    input_valid = 0; output_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    prog[0] = mk_ucode(4'd2, 4'd1, 4'd1, 4'd1, 2'd0, 1'b0, 1'b0, 1'b1, 1'b0, 10'd300);
    prog[1] = mk_ucode(4'd5, 4'd5, 4'd5, 4'd5, 2'd1, 1'b0, 1'b0, 1'b0, 1'b0, 10'd10);
    prog[2] = mk_ucode(4'd1, 4'd1, 4'd1, 4'd1, 2'd2, 1'b1, 1'b1, 1'b0, 1'b0, 10'd20);
    for (int i = 0; i < 3; i++) load(prog[i]);
    @(negedge clk);
    check(!busy, "idle before start");
    iters = 3; loop_start = 1; group_control = GC_START;
    @(negedge clk);
    group_control = GC_HOLD;
    run_model(3, 3, 1);
    // second program: one entry, loaded after a run, so it lands in entry 0
    prog[0] = mk_ucode(4'd7, 4'd6, 4'd5, 4'd3, 2'd3, 1'b0, 1'b0, 1'b0, 1'b0, 10'd0);
    load(prog[0]);
    iters = 2; loop_start = 0; group_control = GC_START;
    @(negedge clk);
    group_control = GC_HOLD;
    run_model(1, 2, 0);
    // third program: a long run abandoned by GC_STOP, then started again
    prog[0] = mk_ucode(4'd5, 4'd5, 4'd5, 4'd5, 2'd0, 1'b0, 1'b0, 1'b0, 1'b0, 10'd1000);
    load(prog[0]);
    iters = 1; loop_start = 0; group_control = GC_START;
    @(negedge clk);
    group_control = GC_HOLD;
    repeat (50) @(negedge clk);
    check(busy && pctl[0] == 4'd5, "running before stop");
    group_control = GC_STOP;
    @(negedge clk);
    group_control = GC_HOLD;
    for (int i = 0; i < 20; i++) begin
      check(!busy && pctl[0] == 4'(MVM_READ) && !input_pop && !out_issue, "halted after stop");
      @(negedge clk);
    end
    group_control = GC_START;
    @(negedge clk);
    group_control = GC_HOLD;
    check(busy && pctl[0] == 4'd5, "cached program restarts after stop");
    repeat (1000) @(negedge clk);
    check(!busy, "restarted program runs its full length");
    check(n_in_stall > 0 && n_out_stall > 0, "both stall kinds exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
