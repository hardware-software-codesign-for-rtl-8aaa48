// tb_mm_body.svh: shared body of the Matrix Machine end-to-end testbenches.
//
// Included inside a testbench module that defines the localparams N_MVM and
// N_ACT and then instantiates matrix_machine as `dut` on the signals declared
// here. Provides run_program(): it loads the instructions, starts the machine,
// streams random input words in the order the global controller consumes
// them (per instruction, per iteration, per selected group), lets the output
// receiver stall in random bursts, and checks that every group returns
// exactly the outputs that the group model (tb_mm_model_pkg) predicts. Output
// words are matched per group as a multiset, because an output that finds the
// receiver not ready goes round the ring again and may be overtaken.
// It also counts how often each mechanism of the design occurred: input
// stalls, output stalls, ring recirculation, credit waits, each opcode,
// multi-iteration runs from the microcode cache.

  localparam int N_PG = N_MVM + N_ACT;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              rst_n;
  logic              imem_we;
  logic [7:0]        imem_addr;
  logic [31:0]       imem_wdata;
  logic              start;
  logic [8:0]        prog_len;
  logic              busy, done;
  logic              din_valid, din_ready;
  logic [31:0]       din_data;
  logic              dout_valid, dout_ready;
  logic [GID_W-1:0]  dout_gid;
  logic [31:0]       dout_data;

  logic [31:0] dinq [$];
  int          expected [N_PG][logic [31:0]];
  int          n_expected [N_PG];
  int          n_received [N_PG];
  grp_model    models [N_PG];
  bit          gaps_in, gaps_out;
  int          burst;

  int n_in_stall = 0, n_out_stall = 0, n_recirc = 0, n_credit_wait = 0;
  int n_op [8];
  int n_multi_iter = 0;
  int cyc = 0;
  int last_cycles = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int g = 0; g < N_PG; g++) begin
        if (dut.in_stall[g])  n_in_stall++;
        if (dut.out_stall[g]) n_out_stall++;
      end
      if (dut.recirc)      n_recirc++;
      if (dut.credit_wait) n_credit_wait++;
      if (din_valid && din_ready) void'(dinq.pop_front());
      if (dout_valid && dout_ready) begin
        checks++;
        if (int'(dout_gid) >= N_PG || !expected[dout_gid].exists(dout_data)) begin
          failures++;
          if (failures < 20) $display("FAIL unexpected output %h from group %0d", dout_data, dout_gid);
        end else begin
          expected[dout_gid][dout_data]--;
          if (expected[dout_gid][dout_data] == 0) expected[dout_gid].delete(dout_data);
          n_received[dout_gid]++;
        end
      end
    end
  end

  // input stream and output receiver
  always @(negedge clk) begin
    din_valid <= (dinq.size() > 0) && (!gaps_in || $urandom_range(0, 4) != 0);
    if (burst > 0) burst <= burst - 1;
    else if (gaps_out && $urandom_range(0, 99) == 0) burst <= $urandom_range(5, 60);
  end
  assign din_data   = (dinq.size() > 0) ? dinq[0] : 32'h0;
  assign dout_ready = (burst == 0);

  function automatic instr_t mk_instr(isa_op_e op, int nit, int s, int e);
    instr_t i;
    i.op = op; i.iters = ITER_W'(nit); i.sel_start = GID_W'(s); i.sel_end = GID_W'(e);
    return i;
  endfunction

  task automatic run_program(input instr_t prog [$], input int max_cycles);
    int t0, hi, nit;
    logic [31:0] w [$];
    logic [31:0] outq [$];
    // instruction memory
    for (int i = 0; i < prog.size(); i++) begin
      imem_we = 1; imem_addr = 8'(i); imem_wdata = prog[i];
      @(negedge clk);
    end
    imem_we = 0;
    // input stream and expected outputs, in the controller's order
    foreach (prog[i]) begin
      n_op[prog[i].op]++;
      if (prog[i].op inside {OP_NOP, OP_RSVD}) continue;
      nit = (prog[i].iters == 0) ? 1 : int'(prog[i].iters);
      hi  = (int'(prog[i].sel_end) >= N_PG) ? N_PG - 1 : int'(prog[i].sel_end);
      if (nit > 1) n_multi_iter++;
      for (int it = 0; it < nit; it++) begin
        for (int g = int'(prog[i].sel_start); g <= hi; g++) begin
          if (is_mvm_op(prog[i].op) != (g < N_MVM)) continue;
          w.delete(); outq.delete();
          for (int k = 0; k < grp_model::words(prog[i].op, it); k++) begin
            w.push_back($urandom);
            dinq.push_back(w[$]);
          end
          models[g].iterate(prog[i].op, it, w, outq);
          foreach (outq[k]) begin
            if (expected[g].exists(outq[k])) expected[g][outq[k]]++;
            else expected[g][outq[k]] = 1;
            n_expected[g]++;
          end
        end
      end
    end
    prog_len = 9'(prog.size());
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    while (!done && cyc - t0 < max_cycles) @(negedge clk);
    check(done, $sformatf("program finished within %0d cycles", max_cycles));
    last_cycles = cyc - t0;
    $display("program of %0d instructions took %0d cycles", prog.size(), last_cycles);
    // outputs still going round the ring
    repeat (4 * N_PG + 200) @(negedge clk);
    check(dinq.size() == 0, "all input consumed");
    for (int g = 0; g < N_PG; g++)
      check(expected[g].size() == 0 && n_received[g] == n_expected[g],
            $sformatf("group %0d: %0d of %0d outputs right", g, n_received[g], n_expected[g]));
  endtask

  task automatic init();
    for (int g = 0; g < N_PG; g++) begin
      models[g] = new();
      n_expected[g] = 0;
      n_received[g] = 0;
    end
    foreach (n_op[i]) n_op[i] = 0;
    rst_n = 0; imem_we = 0; imem_addr = 0; imem_wdata = 0; start = 0; prog_len = 0;
    burst = 0; gaps_in = 0; gaps_out = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
  endtask

  task automatic report_mechanisms(input bit need_all);
    $display("input stalls %0d, output stalls %0d, ring recirculations %0d, credit waits %0d, multi-iteration instructions %0d",
             n_in_stall, n_out_stall, n_recirc, n_credit_wait, n_multi_iter);
    $display("opcodes: dot %0d sum %0d add %0d sub %0d mul %0d act %0d nop %0d",
             n_op[0], n_op[1], n_op[2], n_op[3], n_op[4], n_op[5], n_op[6]);
    if (need_all) begin
      check(n_in_stall > 0, "input stall happened");
      check(n_out_stall > 0, "output stall happened");
      check(n_recirc > 0, "ring recirculation happened");
      check(n_credit_wait > 0, "credit wait happened");
      check(n_multi_iter > 0, "multi-iteration run happened");
      for (int i = 0; i < 7; i++) check(n_op[i] > 0, $sformatf("opcode %0d executed", i));
    end
  endtask
