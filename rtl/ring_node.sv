// ring_node: one stop of the circular FIFO, attached to one processor group.
//
// The ring is a closed chain of registered stops (the global controller and
// one per processor group); every cycle each packet slot moves one stop on,
// so no signal crosses more than one stop per cycle. At this stop:
//   * a packet for this group (gid == GID) is taken off the ring:
//       PK_UCODE  -> one cycle of GC_LOAD with the payload on `microcode`
//       PK_START  -> one cycle of GC_START, payload {loop_start, iters}
//       PK_STOP   -> one cycle of GC_STOP
//       PK_DATA   -> the pair {data1, data0} is queued in the input FIFO;
//                    the group pops it when it consumes it, and each pop is
//                    returned to the global controller as a credit
//                    (`credit`), so that FIFO can never overflow.
//   * the group's outputs are queued in the output FIFO as PK_OUT packets,
//     and a PK_DONE packet follows when the group's `busy` falls. The head of
//     this FIFO is put on the ring whenever the slot leaving this stop is
//     empty. `output_ready` stays high while four words of room remain,
//     which covers the group's two-cycle read latency and the DONE packet.
//   * every other packet passes unchanged.
// Latency: one cycle per stop.
//
// The ring itself is published (a circular FIFO that distributes microcodes
// and data and collects outputs); the packet format, the queues and the
// credit scheme are this implementation's.
module ring_node
  import mm_pkg::*;
#(
  parameter int unsigned GID       = 0,
  parameter int unsigned IN_DEPTH  = 16,
  parameter int unsigned OUT_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pkt_t              ring_in,
  output pkt_t              ring_out,
  // processor-group side
  output group_ctl_e        group_control,
  output logic [31:0]       microcode,
  output logic [ITER_W-1:0] iters,
  output logic [3:0]        loop_start,
  output logic [15:0]       input_data0,
  output logic [15:0]       input_data1,
  output logic              input_valid,
  input  logic              input_pop,
  input  logic [15:0]       output_data0,
  input  logic [15:0]       output_data1,
  input  logic              output_valid,
  output logic              output_ready,
  input  logic              pg_busy,
  // flow-control credit back to the global controller
  output logic              credit
);

  localparam int unsigned IAW = $clog2(IN_DEPTH);
  localparam int unsigned OAW = $clog2(OUT_DEPTH);

  logic   mine, take;
  logic   in_empty, in_full, out_empty, out_full;
  logic [IAW:0] in_count;
  logic [OAW:0] out_count;
  logic [31:0]  in_head;
  pkt_t   out_head, out_push_pkt, pass;
  logic   out_push, out_pop, busy_q;

  assign mine = (ring_in.kind != PK_NONE) && (ring_in.gid == GID_W'(GID));
  assign take = mine && (ring_in.kind inside {PK_UCODE, PK_DATA, PK_START, PK_STOP});

  always_comb begin
    group_control = GC_HOLD;
    if (take) begin
      case (ring_in.kind)
        PK_UCODE: group_control = GC_LOAD;
        PK_START: group_control = GC_START;
        PK_STOP:  group_control = GC_STOP;
        default:  group_control = GC_HOLD;
      endcase
    end
  end
  assign microcode  = ring_in.payload;
  assign iters      = ring_in.payload[ITER_W-1:0];
  assign loop_start = ring_in.payload[ITER_W+3:ITER_W];

  // input queue
  sync_fifo #(.WIDTH(32), .DEPTH(IN_DEPTH)) u_in (
    .clk, .rst_n,
    .push (take && ring_in.kind == PK_DATA),
    .din  (ring_in.payload),
    .pop  (input_pop),
    .dout (in_head),
    .empty(in_empty),
    .full (in_full),
    .count(in_count)
  );
  assign input_valid = !in_empty;
  assign input_data0 = in_head[15:0];
  assign input_data1 = in_head[31:16];
  assign credit      = input_pop;

  // output queue
  always_comb begin
    out_push_pkt.gid = GID_W'(GID);
    if (output_valid) begin
      out_push_pkt.kind    = PK_OUT;
      out_push_pkt.payload = {output_data1, output_data0};
    end else begin
      out_push_pkt.kind    = PK_DONE;
      out_push_pkt.payload = '0;
    end
  end
  assign out_push = output_valid || (busy_q && !pg_busy);

  sync_fifo #(.WIDTH($bits(pkt_t)), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n,
    .push (out_push),
    .din  (out_push_pkt),
    .pop  (out_pop),
    .dout (out_head),
    .empty(out_empty),
    .full (out_full),
    .count(out_count)
  );
  assign output_ready = (out_count + (OAW+1)'(4) <= (OAW+1)'(OUT_DEPTH));

  // slot leaving this stop
  always_comb begin
    pass    = take ? '0 : ring_in;
    out_pop = 1'b0;
    if (pass.kind == PK_NONE && !out_empty) begin
      pass    = out_head;
      out_pop = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ring_out <= '0;
      busy_q   <= 1'b0;
    end else begin
      ring_out <= pass;
      busy_q   <= pg_busy;
    end
  end

  a_in_room: assert property (@(posedge clk) disable iff (!rst_n)
                              !(take && ring_in.kind == PK_DATA && in_full));

endmodule
