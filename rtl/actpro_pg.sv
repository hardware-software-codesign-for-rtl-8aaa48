// actpro_pg: Activation Processor processor group.
//
// Four Activation Processors (actpro) under one local controller (local_ctrl,
// with its 16-entry microcode cache) and one 4:1 output multiplexer. The
// published design gives this group the same organisation and ports as the
// MVM group, with activation processors in place of vector machines; each
// processor's 4 bit control field of the microcode carries the 2 bit
// activation operation in bits 1..0 and the table-half select (function or
// derivative) in bit 2.
// The input pair (input_data0/1) is offered to all four processors at the
// input counter's addresses; the processor controls decide which processor
// (or, for ACTPRO_WRITE_ACT, which look-up tables) take it. In output
// microcodes the multiplexer (bits 15..14) chooses the processor that reaches
// output_data0/1.
//
// Interface and timing are those of mvm_pg: published ports plus `iters`,
// `loop_start`, input valid/pop, output valid/ready, `busy` and stall flags
// (this implementation's additions). A read issued in cycle t gives
// output_valid in cycle t+2.
module actpro_pg
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

  local_ctrl #(.IDLE_PCTL(4'(ACTPRO_READ))) u_lc (
    .clk, .rst_n, .group_control, .microcode, .iters, .loop_start,
    .input_valid, .output_ready, .input_pop, .out_issue, .pctl,
    .addr0, .addr1, .out_mux, .busy(lc_busy), .in_stall, .out_stall
  );

  for (genvar p = 0; p < PROCS; p++) begin : g_act
    actpro u_act (
      .clk, .rst_n,
      .processor_control(pctl[p][1:0]),
      .lut_sel(pctl[p][2]),
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
