// mvm_pg: Mini Vector Machine processor group.
//
// Four Mini Vector Machines (mvm) under one local controller (local_ctrl, with
// its 16-entry microcode cache) and one 4:1 output multiplexer, as published.
// The input pair (input_data0/1) is offered to all four processors at the
// addresses made by the input counter; the processor controls of the current
// microcode decide which processor writes it. In output microcodes the four
// processors are read at the output counter's addresses and the multiplexer
// (microcode bits 15..14) chooses which one reaches output_data0/1.
//
// Interface: group_control / microcode / input_data0 / input_data1 /
// output_data0 / output_data1 are the published group ports. Added by this
// implementation: `iters` and `loop_start` (taken with GC_START), a
// valid/pop pair on the input (`input_valid` says a pair is waiting,
// `input_pop` that it was consumed this cycle), a valid/ready pair on the
// output, `busy` (program running or outputs still in flight) and two stall
// flags for monitoring.
// Timing: an output read issued in cycle t (local_ctrl `out_issue`) gives
// output_valid with the data in cycle t+2 (BRAM read, output register), so
// `output_ready` must leave room for two words in flight.
module mvm_pg
  import mm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  group_ctl_e        group_control,
  input  logic [31:0]       microcode,
  input  logic [ITER_W-1:0] iters,
  input  logic [3:0]        loop_start,
  input  logic [15:0]       input_data0,
  input  logic [15:0]       input_data1,
  input  logic              input_valid,
  output logic              input_pop,
  output logic [15:0]       output_data0,
  output logic [15:0]       output_data1,
  output logic              output_valid,
  input  logic              output_ready,
  output logic              busy,
  output logic              in_stall,
  output logic              out_stall
);

  logic [3:0]  pctl [PROCS];
  logic [15:0] addr0, addr1;
  logic [1:0]  out_mux, mux_q;
  logic        out_issue, issue_q, lc_busy;
  logic [15:0] od0 [PROCS];
  logic [15:0] od1 [PROCS];
  logic [15:0] oa0 [PROCS];
  logic [15:0] oa1 [PROCS];
  logic        pbusy [PROCS];

  local_ctrl #(.IDLE_PCTL(4'(MVM_READ))) u_lc (
    .clk, .rst_n, .group_control, .microcode, .iters, .loop_start,
    .input_valid, .output_ready, .input_pop, .out_issue, .pctl,
    .addr0, .addr1, .out_mux, .busy(lc_busy), .in_stall, .out_stall
  );

  for (genvar p = 0; p < PROCS; p++) begin : g_mvm
    mvm u_mvm (
      .clk, .rst_n,
      .processor_control(pctl[p]),
      .input_data0, .input_addr0(addr0),
      .input_data1, .input_addr1(addr1),
      .output_data0(od0[p]), .output_addr0(oa0[p]),
      .output_data1(od1[p]), .output_addr1(oa1[p]),
      .busy(pbusy[p])
    );
  end

  // output 4:1 multiplexer, registered
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      issue_q      <= 1'b0;
      mux_q        <= '0;
      output_valid <= 1'b0;
      output_data0 <= '0;
      output_data1 <= '0;
    end else begin
      issue_q      <= out_issue;
      mux_q        <= out_mux;
      output_valid <= issue_q;
      output_data0 <= od0[mux_q];
      output_data1 <= od1[mux_q];
    end
  end

  assign busy = lc_busy || issue_q || output_valid;

endmodule
