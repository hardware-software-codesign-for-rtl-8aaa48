// ring_fifo: the circular FIFO that links the global controller to all groups.
//
// A chain of N_PG ring stops (ring_node), stop g serving processor group g.
// The global controller is the remaining stop: its registered output enters
// stop 0 (`from_gc`), and the output of stop N_PG-1 returns to it (`to_gc`),
// closing the ring. Microcode, start and data packets travel from the global
// controller to their group; output and done packets travel from the groups
// to the global controller. A packet the global controller does not take
// (an output while the host is not ready) simply goes round again.
// Latency: a packet on `from_gc` in cycle t reaches stop g's group ports in
// cycle t+g; a packet put on the ring by stop g in cycle t is on `to_gc` in
// cycle t + N_PG - g.
//
// Interface: one entry per group in each unpacked array; the group-side
// signals are those of ring_node. `credit[g]` pulses for every input pair
// group g consumes.
module ring_fifo
  import mm_pkg::*;
#(
  parameter int unsigned N_PG      = 20,
  parameter int unsigned IN_DEPTH  = 16,
  parameter int unsigned OUT_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pkt_t              from_gc,
  output pkt_t              to_gc,
  output group_ctl_e        group_control [N_PG],
  output logic [31:0]       microcode     [N_PG],
  output logic [ITER_W-1:0] iters         [N_PG],
  output logic [3:0]        loop_start    [N_PG],
  output logic [15:0]       input_data0   [N_PG],
  output logic [15:0]       input_data1   [N_PG],
  output logic              input_valid   [N_PG],
  input  logic              input_pop     [N_PG],
  input  logic [15:0]       output_data0  [N_PG],
  input  logic [15:0]       output_data1  [N_PG],
  input  logic              output_valid  [N_PG],
  output logic              output_ready  [N_PG],
  input  logic              pg_busy       [N_PG],
  output logic [N_PG-1:0]   credit
);

  pkt_t link [N_PG+1];

  assign link[0] = from_gc;
  assign to_gc   = link[N_PG];

  for (genvar g = 0; g < N_PG; g++) begin : g_node
    ring_node #(.GID(g), .IN_DEPTH(IN_DEPTH), .OUT_DEPTH(OUT_DEPTH)) u_node (
      .clk, .rst_n,
      .ring_in      (link[g]),
      .ring_out     (link[g+1]),
      .group_control(group_control[g]),
      .microcode    (microcode[g]),
      .iters        (iters[g]),
      .loop_start   (loop_start[g]),
      .input_data0  (input_data0[g]),
      .input_data1  (input_data1[g]),
      .input_valid  (input_valid[g]),
      .input_pop    (input_pop[g]),
      .output_data0 (output_data0[g]),
      .output_data1 (output_data1[g]),
      .output_valid (output_valid[g]),
      .output_ready (output_ready[g]),
      .pg_busy      (pg_busy[g]),
      .credit       (credit[g])
    );
  end

endmodule
