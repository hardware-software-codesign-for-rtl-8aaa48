// tb_global_ctrl: self-checking test of the global controller.
// The testbench closes the ring with a one-stop model of the processor
// groups (2 MVM groups, 1 activation group, input queues of 4 words). It
// checks that every selected group of the right kind receives the opcode's
// microcode program followed by a start packet with the iteration count and
// loop entry; that the data words follow in the controller's order
// (iteration, then group, then word) and equal the input stream; that a
// group's queue is never overrun (credits); that outputs reach the output
// port with their group, also after going round the ring while the receiver
// is not ready; that an instruction begins only after every group of the
// previous one reported DONE; and that `done` pulses at the end.
module tb_global_ctrl;
  import mm_pkg::*;
  import tb_mm_model_pkg::*;
  localparam int NM = 2, NA = 1, N = 3, DEPTH = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, imem_we, start, busy, done, din_valid, din_ready;
  logic [7:0] imem_addr;
  logic [31:0] imem_wdata, din_data, dout_data;
  logic [8:0] prog_len;
  logic dout_valid, dout_ready, recirc, credit_wait;
  logic [GID_W-1:0] dout_gid;
  pkt_t ring_out, ring_in;
  logic [N-1:0] credit;

  global_ctrl #(.N_MVM_PG(NM), .N_ACT_PG(NA), .IN_DEPTH(DEPTH)) dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  instr_t      prog [$];
  logic [31:0] dinq [$];
  int          exp_gid [$];      // expected group of each data word
  logic [31:0] exp_word [$];
  int          qlen [N];         // words waiting in each group's queue
  int          left [N];         // words still to come for the running program
  int          k_ucode [N];
  int          cur_op [N];
  int          running_groups = 0;
  pkt_t        pend [$];         // packets the groups want to put on the ring
  logic [31:0] out_exp [$];
  int          n_out = 0, n_recirc = 0, n_cwait = 0;
  int          ins_idx = 0, started = 0;
  int          sel_count [$];

  // input stream
  always @(negedge clk) din_valid <= (dinq.size() > 0) && $urandom_range(0, 3) != 0;
  assign din_data = (dinq.size() > 0) ? dinq[0] : 32'h0;
  always @(negedge clk) dout_ready <= $urandom_range(0, 2) != 0;

  // group side and the rest of the ring (one register stage)
  always @(posedge clk) begin
    pkt_t nxt;
    if (!rst_n) begin
      ring_in <= '0;
      credit  <= '0;
    end else begin
      if (din_valid && din_ready) void'(dinq.pop_front());
      if (recirc) n_recirc++;
      if (credit_wait) n_cwait++;
      if (dout_valid && dout_ready) begin
        checks++;
        n_out++;
        begin
          int idx;
          idx = -1;
          foreach (out_exp[i]) if (out_exp[i] == dout_data) idx = i;
          if (idx < 0) begin failures++; $display("FAIL unexpected output %h", dout_data); end
          else out_exp.delete(idx);
        end
      end
      // groups consume their queues at random
      for (int g = 0; g < N; g++) begin
        credit[g] <= 1'b0;
        if (qlen[g] > 0 && $urandom_range(0, 2) == 0) begin
          qlen[g]--;
          credit[g] <= 1'b1;
          left[g]--;
          if (left[g] == 0) begin
            pkt_t o;
            for (int i = 0; i < 2; i++) begin
              o.kind = PK_OUT; o.gid = GID_W'(g); o.payload = $urandom;
              pend.push_back(o); out_exp.push_back(o.payload);
            end
            o.kind = PK_DONE; o.payload = 0;
            pend.push_back(o);
          end
        end
      end
      // packet leaving the controller
      nxt = '0;
      case (ring_out.kind)
        PK_UCODE: begin
          checks++;
          if (started == sel_count[ins_idx]) begin
            if (running_groups != 0) begin failures++; $display("FAIL next instruction before DONE"); end
            ins_idx++; started = 0;
            while (prog[ins_idx].op inside {OP_NOP, OP_RSVD}) ins_idx++;
          end
          if (ring_out.payload !== prog_word(prog[ins_idx].op, k_ucode[ring_out.gid])) begin
            failures++; $display("FAIL microcode %0d of group %0d", k_ucode[ring_out.gid], ring_out.gid);
          end
          k_ucode[ring_out.gid]++;
        end
        PK_START: begin
          int nit, w;
          instr_t ins;
          checks++;
          ins = prog[ins_idx];
          nit = (ins.iters == 0) ? 1 : int'(ins.iters);
          if (k_ucode[ring_out.gid] != (is_mvm_op(ins.op) ? MVM_PROG_LEN : ACT_PROG_LEN) ||
              ring_out.payload[ITER_W-1:0] != ITER_W'(nit) ||
              ring_out.payload[ITER_W+3:ITER_W] != (is_mvm_op(ins.op) ? 4'd0 : 4'd1)) begin
            failures++; $display("FAIL start of group %0d", ring_out.gid);
          end
          k_ucode[ring_out.gid] = 0;
          w = 0;
          for (int it = 0; it < nit; it++) w += grp_model::words(ins.op, it);
          left[ring_out.gid] = w;
          running_groups++;
          started++;
        end
        PK_DATA: begin
          checks++;
          if (exp_gid.size() == 0 || exp_gid[0] != int'(ring_out.gid) || exp_word[0] !== ring_out.payload) begin
            failures++; if (failures < 20) $display("FAIL data word to group %0d", ring_out.gid);
          end
          if (exp_gid.size() > 0) begin void'(exp_gid.pop_front()); void'(exp_word.pop_front()); end
          qlen[ring_out.gid]++;
          checks++;
          if (qlen[ring_out.gid] > DEPTH) begin failures++; $display("FAIL queue overrun"); end
        end
        PK_OUT, PK_DONE: nxt = ring_out;      // went past the controller
        default: ;
      endcase
      if (nxt.kind == PK_NONE && pend.size() > 0) begin
        nxt = pend.pop_front();
        if (nxt.kind == PK_DONE) running_groups--;
      end
      ring_in <= nxt;
    end
  end

  function automatic instr_t mk(isa_op_e op, int nit, int s, int e);
    instr_t i;
    i.op = op; i.iters = ITER_W'(nit); i.sel_start = GID_W'(s); i.sel_end = GID_W'(e);
    return i;
  endfunction

  initial begin
    int t0, hi, nsel;
    rst_n = 0; imem_we = 0; imem_addr = 0; imem_wdata = 0; start = 0; prog_len = 0;
    for (int g = 0; g < N; g++) begin qlen[g] = 0; left[g] = -1; k_ucode[g] = 0; end
    prog.push_back(mk(OP_VECTOR_ADDITION, 2, 0, 1));
    prog.push_back(mk(OP_NOP, 0, 0, 0));
    prog.push_back(mk(OP_ACTIVATION_FUNCTION, 2, 0, 9));
    prog.push_back(mk(OP_VECTOR_DOT_PRODUCT, 1, 1, 2));
    prog.push_back(mk(OP_RSVD, 0, 0, 0));
    // expected data order
    foreach (prog[i]) begin
      int nit;
      nsel = 0;
      if (prog[i].op inside {OP_NOP, OP_RSVD}) begin sel_count.push_back(0); continue; end
      nit = (prog[i].iters == 0) ? 1 : int'(prog[i].iters);
      hi = (int'(prog[i].sel_end) >= N) ? N - 1 : int'(prog[i].sel_end);
      for (int g = int'(prog[i].sel_start); g <= hi; g++) if (is_mvm_op(prog[i].op) == (g < NM)) nsel++;
      sel_count.push_back(nsel);
      for (int it = 0; it < nit; it++)
        for (int g = int'(prog[i].sel_start); g <= hi; g++) begin
          if (is_mvm_op(prog[i].op) != (g < NM)) continue;
          for (int k = 0; k < grp_model::words(prog[i].op, it); k++) begin
            exp_gid.push_back(g);
            exp_word.push_back($urandom);
            dinq.push_back(exp_word[$]);
          end
        end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (prog[i]) begin
      imem_we = 1; imem_addr = 8'(i); imem_wdata = prog[i];
      @(negedge clk);
    end
    imem_we = 0;
    check(!busy, "idle before start");
    prog_len = 9'(prog.size()); start = 1;
    @(negedge clk);
    start = 0;
    t0 = 0;
    while (!done && t0 < 350000) begin t0++; @(negedge clk); end
    check(done, "done pulse");
    @(negedge clk);
    check(!busy, "idle after done");
    repeat (50) @(negedge clk);
    check(exp_gid.size() == 0, "all data words sent");
    check(out_exp.size() == 0 && n_out > 0, "all outputs delivered");
    check(running_groups == 0, "all groups done");
    check(n_recirc > 0 && n_cwait > 0, "recirculation and credit waits happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
