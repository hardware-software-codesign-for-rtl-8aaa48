// mvm: Mini Vector Machine, one vector unit built around one DSP slice.
//
// Structure (as published): a left BRAM holding the operand vectors, a DSP
// slice fed by the left BRAM's two read ports, a right BRAM that stores the
// results, a read counter, a write counter and control logic. All elements
// are 16 bit signed integers.
//
// processor_control[2:0] (mm_pkg::mvm_op_e) selects the operation and is held
// by the processor group for as long as the operation lasts;
// processor_control[3] selects which half of the right BRAM receives results.
//   MVM_RESET   clear the counters, the DSP and the write pipeline.
//   MVM_READ    halted; the right BRAM is read: output_data0 is the word at
//               input_addr0, output_data1 the word at input_addr1, one cycle
//               later, with output_addr0/1 the matching addresses.
//   MVM_WRITE   the input pair is registered in the first cycle (setup) and
//               written into the left BRAM in the next one:
//               input_data0 at input_addr0, input_data1 at input_addr1.
//   run operations (DOT, SUM, ADD, SUB, ELEM_MULTI) start on the cycle in which
//               processor_control switches to them. The left BRAM is treated
//               as two columns of 512 words (address bit 9): port 0 reads
//               column 0, port 1 column 1, so element i computes
//               f(col0[i], col1[i]).
// Run timing (published vector addition diagram), counted from the first
// cycle the new control is seen as cycle 1:
//   1 setup of DSP and counters; 2 read left BRAM at the read counter, read
//   counter + 1; 3 operands on the DSP's A/B ports; 8 P valid and write
//   counter + 1; 9 result written to the right BRAM. 512 elements: the last
//   result is written in cycle 520 and `busy` is high in cycles 2 .. 520.
// Element-wise operations write result i at right-BRAM address {msb, i}.
// DOT and SUM accumulate over all 512 pairs (SUM adds both columns, i.e. all
// 1024 words) and write the running value to address {msb, 0}, so that word
// holds the final result once `busy` falls. Results are the low 16 bits of
// the 48 bit P (truncation, as published).
//
// Own choices: `rst_n` and `busy` ports (not in the published port table),
// one-cycle read latency, the column split of the left BRAM, reading through
// both right-BRAM ports during MVM_READ (the published text gives one output
// port but its port table gives two), and the result address of DOT/SUM.
module mvm
  import mm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [3:0]  processor_control,
  input  logic [15:0] input_data0,
  input  logic [15:0] input_addr0,
  input  logic [15:0] input_data1,
  input  logic [15:0] input_addr1,
  output logic [15:0] output_data0,
  output logic [15:0] output_addr0,
  output logic [15:0] output_data1,
  output logic [15:0] output_addr1,
  output logic        busy
);

  localparam int unsigned HALF = BRAM_DEPTH / 2;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  mvm_op_e op, prev_op;
  state_e  state;
  logic    start, is_run;
  logic [BRAM_AW-2:0] rc, wc;           // read / write counters (9 bit)
  logic [2:0]         dcnt;
  logic               msb;
  dsp_fn_e            fn;
  logic               acc_mode;

  // left BRAM write stage
  logic        wq_v;
  logic [BRAM_AW-1:0] wq_a0, wq_a1;
  logic [15:0] wq_d0, wq_d1;
  // read pipeline
  logic        rd_v;
  // right BRAM write stage
  logic        wr_v;
  logic [BRAM_AW-1:0] wr_a;
  logic [15:0] wr_d;

  logic [15:0] l_dout0, l_dout1, r_dout0, r_dout1;
  logic signed [ACC_W-1:0] p;
  logic        p_valid;

  assign op     = mvm_op_e'(processor_control[2:0]);
  assign is_run = op inside {MVM_VEC_DOT, MVM_VEC_SUM, MVM_VEC_ADD,
                             MVM_VEC_SUB, MVM_ELEM_MULTI};
  assign start  = is_run && (op != prev_op) && (state == S_IDLE);
  assign busy   = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n || op == MVM_RESET) begin
      prev_op  <= op;
      state    <= S_IDLE;
      rc       <= '0;
      wc       <= '0;
      dcnt     <= '0;
      msb      <= 1'b0;
      fn       <= DSP_ADD;
      acc_mode <= 1'b0;
      wq_v     <= 1'b0;
      rd_v     <= 1'b0;
      wr_v     <= 1'b0;
      wr_a     <= '0;
      wr_d     <= '0;
      wq_a0 <= '0; wq_a1 <= '0; wq_d0 <= '0; wq_d1 <= '0;
    end else begin
      prev_op <= op;
      // MVM_WRITE: setup cycle registers the pair, next cycle writes it
      wq_v  <= (op == MVM_WRITE);
      wq_a0 <= input_addr0[BRAM_AW-1:0];
      wq_a1 <= input_addr1[BRAM_AW-1:0];
      wq_d0 <= input_data0;
      wq_d1 <= input_data1;

      rd_v <= (state == S_RUN);
      case (state)
        S_IDLE: if (start) begin             // cycle 1: setup
          state    <= S_RUN;
          rc       <= '0;
          wc       <= '0;
          msb      <= processor_control[3];
          acc_mode <= (op == MVM_VEC_DOT) || (op == MVM_VEC_SUM);
          case (op)
            MVM_VEC_DOT: fn <= DSP_MACC;
            MVM_VEC_SUM: fn <= DSP_SACC;
            MVM_VEC_SUB: fn <= DSP_SUB;
            MVM_VEC_ADD: fn <= DSP_ADD;
            default:     fn <= DSP_MUL;
          endcase
        end
        S_RUN: begin                         // cycles 2 .. 513: reads
          rc <= rc + 1'b1;
          if (rc == (BRAM_AW-1)'(HALF - 1)) begin
            state <= S_DRAIN;
            dcnt  <= '0;
          end
        end
        default: begin                       // cycles 514 .. 520: drain
          dcnt <= dcnt + 1'b1;
          if (dcnt == 3'd6) state <= S_IDLE;
        end
      endcase

      // P valid: latch result and address, write counter advances
      wr_v <= p_valid;
      if (p_valid) begin
        wr_d <= p[15:0];
        wr_a <= {msb, acc_mode ? {(BRAM_AW-1){1'b0}} : wc};
        if (!acc_mode) wc <= wc + 1'b1;
      end
    end
  end

  // ---------------------------------------------------------- left BRAM
  bram_dp #(.DEPTH(BRAM_DEPTH), .WIDTH(DATA_W)) u_left (
    .clk   (clk),
    .we_a  (wq_v),
    .addr_a(wq_v ? wq_a0 : {1'b0, rc}),
    .din_a (wq_d0),
    .dout_a(l_dout0),
    .we_b  (wq_v),
    .addr_b(wq_v ? wq_a1 : {1'b1, rc}),
    .din_b (wq_d1),
    .dout_b(l_dout1)
  );

  // ---------------------------------------------------------------- DSP
  dsp_unit u_dsp (
    .clk     (clk),
    .clr     (start || !rst_n || op == MVM_RESET),
    .fn      (fn),
    .in_valid(rd_v),
    .a       (l_dout0),
    .b       (l_dout1),
    .p       (p),
    .p_valid (p_valid)
  );

  // --------------------------------------------------------- right BRAM
  // Port 0 takes the DSP results; port 1 is the read port. While halted
  // (MVM_READ) port 0 is idle and serves the second output.
  bram_dp #(.DEPTH(BRAM_DEPTH), .WIDTH(DATA_W)) u_right (
    .clk   (clk),
    .we_a  (wr_v),
    .addr_a(wr_v ? wr_a : input_addr1[BRAM_AW-1:0]),
    .din_a (wr_d),
    .dout_a(r_dout0),
    .we_b  (1'b0),
    .addr_b(input_addr0[BRAM_AW-1:0]),
    .din_b ('0),
    .dout_b(r_dout1)
  );

  assign output_data0 = r_dout1;
  assign output_data1 = r_dout0;

  always_ff @(posedge clk) begin
    output_addr0 <= input_addr0;
    output_addr1 <= input_addr1;
  end

endmodule
