// global_ctrl: global controller of the Matrix Machine.
//
// Holds the instruction program, decodes every instruction into microcodes,
// sends the microcodes and the data to the selected processor groups over the
// ring FIFO and collects the groups' outputs from the ring.
//
// Instruction (mm_pkg::instr_t, 32 bit): opcode [31:29], number of
// iterations [28:14], first group [13:7], last group [6:0]. For each
// instruction, in program order:
//   1. decode: for every group g in [first, min(last, N_PG-1)] of the right
//      kind (vector opcodes go to the MVM groups 0 .. N_MVM_PG-1, the
//      activation opcode to the activation groups N_MVM_PG .. N_PG-1) the
//      microcode program of the opcode (mm_pkg::prog_word) is sent as
//      PK_UCODE packets, followed by PK_START with the iteration count
//      (activation programs loop from entry 1, so the look-up table is loaded
//      once).
//   2. data: for each iteration, for each selected group in turn, the words
//      that group's program consumes in that iteration are taken from the
//      input stream `din` (one 32 bit word = two 16 bit elements, element 0 in
//      the low half) and sent as PK_DATA packets: 2048 words per iteration for
//      a vector opcode (512 per processor, processor 0 first, column 0 then
//      column 1), 2048 for the activation opcode plus 512 look-up-table words
//      (1024 entries) ahead of the first iteration.
//   3. wait until every selected group has reported PK_DONE.
// NOP (and the unused opcode 111) take one cycle and do nothing.
// Flow control: a packet is put on the ring only into an empty slot; data for
// group g only while the controller holds a credit for g (one per free entry
// of g's input queue, returned when the group consumes a pair). Outputs
// reaching the controller go to `dout` (valid/ready, with the source group);
// while the receiver is not ready they stay on the ring and go round again.
//
// The opcodes, the iteration / group-select fields and the decode into
// microcodes are published; the field positions, the programs, the data order
// and the flow control are this implementation's choices.
// dout_gid / dout_data are the fields of the packet arriving from the ring,
// without a register: the ring stop in front already registers them.
module global_ctrl
  import mm_pkg::*;
#(
  parameter int unsigned N_MVM_PG   = 16,
  parameter int unsigned N_ACT_PG   = 4,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned IN_DEPTH   = 16,
  parameter int unsigned N_PG       = N_MVM_PG + N_ACT_PG,
  parameter int unsigned IMAW       = $clog2(IMEM_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction memory load
  input  logic              imem_we,
  input  logic [IMAW-1:0]   imem_addr,
  input  logic [31:0]       imem_wdata,
  // run control
  input  logic              start,
  input  logic [IMAW:0]     prog_len,
  output logic              busy,
  output logic              done,
  // data stream in
  input  logic              din_valid,
  input  logic [31:0]       din_data,
  output logic              din_ready,
  // output stream
  output logic              dout_valid,
  output logic [GID_W-1:0]  dout_gid,
  output logic [31:0]       dout_data,
  input  logic              dout_ready,
  // ring
  output pkt_t              ring_out,
  input  pkt_t              ring_in,
  input  logic [N_PG-1:0]   credit,
  // monitoring
  output logic              recirc,
  output logic              credit_wait
);

  localparam int unsigned CRW = $clog2(IN_DEPTH) + 1;

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_PROG, S_DATA, S_WAIT} state_e;

  logic [31:0]       imem [IMEM_DEPTH];
  state_e            state;
  logic [IMAW:0]     pc, len_q;
  instr_t            ins;
  logic [GID_W:0]    g, lo, hi;
  logic [3:0]        k;
  logic [GID_W:0]    ngrp, ndone;
  logic [ITER_W-1:0] it, iters_eff;
  logic [11:0]       wcnt;
  logic [CRW-1:0]    cred [N_PG];

  logic              slot_free, inj;
  pkt_t              inj_pkt;
  logic              g_ok, g_out, plen_end;
  logic [11:0]       words;
  logic [3:0]        plen;
  logic              send_data;
  instr_t            fetched;
  logic [CRW-1:0]    cred_g;

  assign fetched = instr_t'(imem[pc[IMAW-1:0]]);

  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_addr] <= imem_wdata;
  end

  // ---------------------------------------------------- ring stop
  assign dout_valid = (ring_in.kind == PK_OUT);
  assign dout_gid   = ring_in.gid;
  assign dout_data  = ring_in.payload;
  assign slot_free  = (ring_in.kind == PK_NONE) || (ring_in.kind == PK_DONE) ||
                      (ring_in.kind == PK_OUT && dout_ready);
  assign recirc     = (ring_in.kind == PK_OUT) && !dout_ready;

  // ---------------------------------------------------- decode helpers
  assign plen  = is_mvm_op(ins.op) ? 4'(MVM_PROG_LEN) : 4'(ACT_PROG_LEN);
  assign g_out = (g > hi);
  assign g_ok  = is_mvm_op(ins.op) ? (g < (GID_W+1)'(N_MVM_PG))
                                   : (g >= (GID_W+1)'(N_MVM_PG));
  assign words = (!is_mvm_op(ins.op) && it == '0) ? 12'd2560 : 12'd2048;
  assign plen_end = (k == plen);

  always_comb begin
    cred_g = '0;
    for (int i = 0; i < int'(N_PG); i++)
      if (g == (GID_W+1)'(i)) cred_g = cred[i];
  end

  always_comb begin
    inj       = 1'b0;
    inj_pkt   = '0;
    din_ready = 1'b0;
    send_data = 1'b0;
    credit_wait = 1'b0;
    inj_pkt.gid = g[GID_W-1:0];
    case (state)
      S_PROG: if (!g_out && g_ok && slot_free) begin
        inj = 1'b1;
        if (!plen_end) begin
          inj_pkt.kind    = PK_UCODE;
          inj_pkt.payload = prog_word(ins.op, 32'(k));
        end else begin
          inj_pkt.kind    = PK_START;
          inj_pkt.payload = 32'({is_mvm_op(ins.op) ? 4'd0 : 4'd1, iters_eff});
        end
      end
      S_DATA: if (!g_out && g_ok && wcnt != words && din_valid) begin
        credit_wait = (cred_g == '0);
        if (!credit_wait && slot_free) begin
          inj             = 1'b1;
          send_data       = 1'b1;
          din_ready       = 1'b1;
          inj_pkt.kind    = PK_DATA;
          inj_pkt.payload = din_data;
        end
      end
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);

  // ---------------------------------------------------- sequencer
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; pc <= '0; len_q <= '0; ins <= '0;
      g <= '0; lo <= '0; hi <= '0; k <= '0; ngrp <= '0; ndone <= '0;
      it <= '0; iters_eff <= '0; wcnt <= '0; done <= 1'b0; ring_out <= '0;
      for (int i = 0; i < int'(N_PG); i++) cred[i] <= CRW'(IN_DEPTH);
    end else begin
      done     <= 1'b0;
      ring_out <= inj ? inj_pkt : (slot_free ? pkt_t'('0) : ring_in);
      if (ring_in.kind == PK_DONE) ndone <= ndone + 1'b1;

      for (int i = 0; i < int'(N_PG); i++) begin
        if (credit[i] && !(send_data && g == (GID_W+1)'(i))) cred[i] <= cred[i] + 1'b1;
        else if (!credit[i] && send_data && g == (GID_W+1)'(i)) cred[i] <= cred[i] - 1'b1;
      end

      case (state)
        S_IDLE: if (start) begin
          pc    <= '0;
          len_q <= prog_len;
          if (prog_len == '0) done <= 1'b1;
          else state <= S_FETCH;
        end
        S_FETCH: begin
          ins   <= fetched;
          ndone <= '0;
          ngrp  <= '0;
          k     <= '0;
          wcnt  <= '0;
          it    <= '0;
          lo    <= (GID_W+1)'(fetched.sel_start);
          g     <= (GID_W+1)'(fetched.sel_start);
          hi    <= ((GID_W+1)'(fetched.sel_end) >= (GID_W+1)'(N_PG))
                   ? (GID_W+1)'(N_PG - 1)
                   : (GID_W+1)'(fetched.sel_end);
          iters_eff <= (fetched.iters == '0)
                       ? ITER_W'(1) : fetched.iters;
          if (fetched.op inside {OP_NOP, OP_RSVD}) begin
            pc <= pc + 1'b1;
            if (pc + 1'b1 == len_q) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end else begin
            state <= S_PROG;
          end
        end
        S_PROG: begin
          if (g_out) begin
            g    <= lo;
            wcnt <= '0;
            it   <= '0;
            state <= (ngrp == '0) ? S_WAIT : S_DATA;
          end else if (!g_ok) begin
            g <= g + 1'b1;
          end else if (inj) begin
            if (plen_end) begin
              k    <= '0;
              ngrp <= ngrp + 1'b1;
              g    <= g + 1'b1;
            end else begin
              k <= k + 1'b1;
            end
          end
        end
        S_DATA: begin
          if (g_out) begin
            g <= lo;
            if (it + 1'b1 >= iters_eff) state <= S_WAIT;
            else it <= it + 1'b1;
          end else if (!g_ok || wcnt == words) begin
            g    <= g + 1'b1;
            wcnt <= '0;
          end else if (send_data) begin
            wcnt <= wcnt + 1'b1;
          end
        end
        S_WAIT: begin
          if (ndone + (GID_W+1)'(ring_in.kind == PK_DONE) >= ngrp) begin
            pc <= pc + 1'b1;
            if (pc + 1'b1 == len_q) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_FETCH;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
