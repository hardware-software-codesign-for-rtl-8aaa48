// tb_ring_fifo: self-checking test of the circular FIFO with three stops.
// The testbench plays the global controller at the ring's ends and the three
// processor groups at its stops. It checks that microcode, start and stop
// packets reach exactly their group as one-cycle group controls g cycles
// after they are offered on from_gc; that data packets arrive in order in the group's input
// queue and every pop returns a credit; and that the groups' outputs come back
// round the ring in order, each group's DONE packet after its last output.
module tb_ring_fifo;
  import mm_pkg::*;
  localparam int N = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  pkt_t from_gc, to_gc;
  group_ctl_e group_control [N];
  logic [31:0] microcode [N];
  logic [ITER_W-1:0] iters [N];
  logic [3:0] loop_start [N];
  logic [15:0] input_data0 [N], input_data1 [N];
  logic input_valid [N], input_pop [N];
  logic [15:0] output_data0 [N], output_data1 [N];
  logic output_valid [N], output_ready [N], pg_busy [N];
  logic [N-1:0] credit;

  ring_fifo #(.N_PG(N), .IN_DEPTH(16), .OUT_DEPTH(8)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected control events per group: {kind, payload, due cycle}
  pkt_t ctl_exp [N][$];
  int   ctl_due [N][$];
  logic [31:0] data_exp [N][$];
  logic [31:0] out_exp [N][$];
  int   n_credit [N];
  int   n_pop [N];
  int   n_out_left [N];
  bit   done_seen [N];
  int   credits [N];

  // group side: pop randomly, check data, produce outputs
  for (genvar g = 0; g < N; g++) begin : g_grp
    always @(negedge clk) begin
      if (!rst_n) begin
        input_pop[g] <= 1'b0; output_valid[g] <= 1'b0; pg_busy[g] <= 1'b0;
        output_data0[g] <= '0; output_data1[g] <= '0;
      end else begin
        input_pop[g] <= input_valid[g] && ($urandom_range(0, 2) == 0);
        output_valid[g] <= 1'b0;
        if (n_out_left[g] > 0 && output_ready[g] && $urandom_range(0, 1) == 1) begin
          output_valid[g] <= 1'b1;
          output_data0[g] <= 16'($urandom);
          output_data1[g] <= 16'($urandom);
          n_out_left[g]--;
        end
        pg_busy[g] <= (n_out_left[g] > 0) || output_valid[g];
      end
    end
    always @(posedge clk) begin
      if (rst_n) begin
        if (output_valid[g]) out_exp[g].push_back({output_data1[g], output_data0[g]});
        if (credit[g]) n_credit[g]++;
        if (input_pop[g]) begin
          n_pop[g]++;
          checks++;
          if (data_exp[g].size() == 0 || {input_data1[g], input_data0[g]} !== data_exp[g][0]) begin
            failures++; $display("FAIL data at group %0d", g);
          end
          if (data_exp[g].size() > 0) void'(data_exp[g].pop_front());
        end
        if (group_control[g] != GC_HOLD) begin
          checks++;
          if (ctl_exp[g].size() == 0) begin failures++; $display("FAIL unexpected control %0d", g); end
          else begin
            if (ctl_due[g][0] != cyc || microcode[g] != ctl_exp[g][0].payload ||
                !((ctl_exp[g][0].kind == PK_UCODE && group_control[g] == GC_LOAD) ||
                  (ctl_exp[g][0].kind == PK_START && group_control[g] == GC_START &&
                   iters[g] == ctl_exp[g][0].payload[ITER_W-1:0] &&
                   loop_start[g] == ctl_exp[g][0].payload[ITER_W+3:ITER_W]) ||
                  (ctl_exp[g][0].kind == PK_STOP && group_control[g] == GC_STOP))) begin
              failures++;
              $display("FAIL control group %0d at %0d (due %0d)", g, cyc, ctl_due[g][0]);
            end
            void'(ctl_exp[g].pop_front()); void'(ctl_due[g].pop_front());
          end
        end
      end
    end
  end

  // global-controller side: consume what returns
  always @(posedge clk) begin
    if (rst_n && to_gc.kind != PK_NONE) begin
      checks++;
      if (to_gc.kind == PK_OUT) begin
        if (done_seen[to_gc.gid] || out_exp[to_gc.gid].size() == 0 ||
            to_gc.payload !== out_exp[to_gc.gid][0]) begin
          failures++; $display("FAIL output from %0d", to_gc.gid);
        end
        if (out_exp[to_gc.gid].size() > 0) void'(out_exp[to_gc.gid].pop_front());
      end else if (to_gc.kind == PK_DONE) begin
        if (out_exp[to_gc.gid].size() != 0 || n_out_left[to_gc.gid] != 0) begin
          failures++; $display("FAIL early DONE from %0d", to_gc.gid);
        end
        done_seen[to_gc.gid] = 1;
      end else begin
        failures++; $display("FAIL packet kind %0d came back", to_gc.kind);
      end
    end
  end

  task automatic send(input pkt_kind_e k, input int g, input logic [31:0] pl);
    from_gc.kind = k; from_gc.gid = GID_W'(g); from_gc.payload = pl;
    if (k == PK_DATA) begin data_exp[g].push_back(pl); credits[g]--; end
    else if (k != PK_NONE) begin ctl_exp[g].push_back(from_gc); ctl_due[g].push_back(cyc + g); end
    @(negedge clk);
    from_gc = '0;
  endtask

  initial begin
    rst_n = 0; from_gc = '0;
    for (int g = 0; g < N; g++) begin
      n_credit[g] = 0; n_pop[g] = 0; n_out_left[g] = 0; done_seen[g] = 0; credits[g] = 16;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int g = 0; g < N; g++) begin
      send(PK_UCODE, g, $urandom);
      send(PK_UCODE, g, $urandom);
      send(PK_START, g, {13'b0, 4'(g + 1), 15'(100 + g)});
    end
    for (int g = 0; g < N; g++) n_out_left[g] = 40 + 10 * g;
    for (int n = 0; n < 600; n++) begin
      int g;
      g = $urandom_range(0, N - 1);
      if (credits[g] > 0 && $urandom_range(0, 1) == 1) send(PK_DATA, g, $urandom);
      else send(PK_NONE, 0, 0);
      for (int i = 0; i < N; i++) credits[i] = 16 - data_exp[i].size();
    end
    send(PK_STOP, 1, 32'h0);
    repeat (300) @(negedge clk);
    for (int g = 0; g < N; g++) begin
      check(done_seen[g], $sformatf("DONE from group %0d", g));
      check(data_exp[g].size() == 0, "all data delivered");
      check(ctl_exp[g].size() == 0, "all controls delivered");
      check(n_credit[g] == n_pop[g] && n_pop[g] > 0, "one credit per pop");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
