// matrix_machine: the Matrix Machine, a neural-network vector processor.
//
// One global controller (global_ctrl), one circular FIFO (ring_fifo) and
// N_MVM_PG Mini Vector Machine processor groups (mvm_pg) followed by N_ACT_PG
// activation processor groups (actpro_pg) on the ring. Group g of the ring is
// MVM group g for g < N_MVM_PG, activation group g - N_MVM_PG after that.
//
// Defaults are sized for the Spartan-7 XC7S75-2 chosen by the published cost
// study: N_MVM_PG = N_DDR * CLK_DDR / CLK_FPGA = 4 * 400 MHz / 100 MHz = 16;
// N_ACT_PG = 4, the block-RAM-bound minimum of the published resource
// formula for the resources the 16 MVM groups leave on that device.
//
// Interface (plain signals; the DDR memory, its controller and the host sit
// outside):
//   imem_we/imem_addr/imem_wdata   load 32 bit instructions
//   start, prog_len, busy, done    run the first prog_len instructions
//   din_valid/din_data/din_ready   input element pairs, in the order the
//                                  global controller consumes them
//   dout_valid/dout_gid/dout_data/dout_ready  output element pairs with the
//                                  group that produced them
// Timing: see global_ctrl for the order of data and local_ctrl / mvm /
// actpro for cycle-level behaviour.
module matrix_machine
  import mm_pkg::*;
#(
  parameter int unsigned N_MVM_PG   = 16,
  parameter int unsigned N_ACT_PG   = 4,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned IN_DEPTH   = 16,
  parameter int unsigned OUT_DEPTH  = 8,
  parameter int unsigned IMAW       = $clog2(IMEM_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              imem_we,
  input  logic [IMAW-1:0]   imem_addr,
  input  logic [31:0]       imem_wdata,
  input  logic              start,
  input  logic [IMAW:0]     prog_len,
  output logic              busy,
  output logic              done,
  input  logic              din_valid,
  input  logic [31:0]       din_data,
  output logic              din_ready,
  output logic              dout_valid,
  output logic [GID_W-1:0]  dout_gid,
  output logic [31:0]       dout_data,
  input  logic              dout_ready
);

  localparam int unsigned N_PG = N_MVM_PG + N_ACT_PG;

  pkt_t              gc_to_ring, ring_to_gc;
  logic [N_PG-1:0]   credit;
  logic              recirc, credit_wait;

  group_ctl_e        group_control [N_PG];
  logic [31:0]       microcode     [N_PG];
  logic [ITER_W-1:0] iters         [N_PG];
  logic [3:0]        loop_start    [N_PG];
  logic [15:0]       input_data0   [N_PG];
  logic [15:0]       input_data1   [N_PG];
  logic              input_valid   [N_PG];
  logic              input_pop     [N_PG];
  logic [15:0]       output_data0  [N_PG];
  logic [15:0]       output_data1  [N_PG];
  logic              output_valid  [N_PG];
  logic              output_ready  [N_PG];
  logic              pg_busy       [N_PG];
  logic              in_stall      [N_PG];
  logic              out_stall     [N_PG];

  global_ctrl #(
    .N_MVM_PG(N_MVM_PG), .N_ACT_PG(N_ACT_PG),
    .IMEM_DEPTH(IMEM_DEPTH), .IN_DEPTH(IN_DEPTH)
  ) u_gc (
    .clk, .rst_n,
    .imem_we, .imem_addr, .imem_wdata,
    .start, .prog_len, .busy, .done,
    .din_valid, .din_data, .din_ready,
    .dout_valid, .dout_gid, .dout_data, .dout_ready,
    .ring_out(gc_to_ring), .ring_in(ring_to_gc),
    .credit, .recirc, .credit_wait
  );

  ring_fifo #(.N_PG(N_PG), .IN_DEPTH(IN_DEPTH), .OUT_DEPTH(OUT_DEPTH)) u_ring (
    .clk, .rst_n,
    .from_gc(gc_to_ring), .to_gc(ring_to_gc),
    .group_control, .microcode, .iters, .loop_start,
    .input_data0, .input_data1, .input_valid, .input_pop,
    .output_data0, .output_data1, .output_valid, .output_ready,
    .pg_busy, .credit
  );

  for (genvar g = 0; g < N_PG; g++) begin : g_pg
    if (g < N_MVM_PG) begin : g_mvm
      mvm_pg u_pg (
        .clk, .rst_n,
        .group_control(group_control[g]), .microcode(microcode[g]),
        .iters(iters[g]), .loop_start(loop_start[g]),
        .input_data0(input_data0[g]), .input_data1(input_data1[g]),
        .input_valid(input_valid[g]), .input_pop(input_pop[g]),
        .output_data0(output_data0[g]), .output_data1(output_data1[g]),
        .output_valid(output_valid[g]), .output_ready(output_ready[g]),
        .busy(pg_busy[g]), .in_stall(in_stall[g]), .out_stall(out_stall[g])
      );
    end else begin : g_act
      actpro_pg u_pg (
        .clk, .rst_n,
        .group_control(group_control[g]), .microcode(microcode[g]),
        .iters(iters[g]), .loop_start(loop_start[g]),
        .input_data0(input_data0[g]), .input_data1(input_data1[g]),
        .input_valid(input_valid[g]), .input_pop(input_pop[g]),
        .output_data0(output_data0[g]), .output_data1(output_data1[g]),
        .output_valid(output_valid[g]), .output_ready(output_ready[g]),
        .busy(pg_busy[g]), .in_stall(in_stall[g]), .out_stall(out_stall[g])
      );
    end
  end

endmodule
