// actpro: Activation Processor, applies an activation function by table look-up.
//
// Structure (as published): a left BRAM with the input data, two 7 bit
// arithmetic right shifters (one per left-BRAM read port), a look-up-table
// BRAM holding the activation function and its derivative, a right BRAM for
// the results, a read counter, a write counter and control logic. It has the
// same data/address ports as the Mini Vector Machine.
//
// processor_control (mm_pkg::act_op_e) is held for as long as the operation
// lasts:
//   ACTPRO_READ        halted; output_data0/1 are the right-BRAM words at
//                      input_addr0/1, one cycle later (output_addr0/1 match).
//   ACTPRO_WRITE_ACT   input pair written into the look-up table (registered
//                      one cycle, written the next).
//   ACTPRO_WRITE_DATA  input pair written into the left BRAM, same timing.
//   ACTPRO_RUN         starts on the cycle the control switches to it and
//                      processes all 1024 words, two per cycle: the pair
//                      {col0[i], col1[i]} (address bit 9 is the column) is
//                      shifted right by 7, each shifted value (9 bits, two's
//                      complement) addresses the table as {lut_sel, value},
//                      and the two results are written to the right BRAM at
//                      the same addresses the operands came from.
// Run timing (published ReLU diagram), cycle 1 = first cycle of RUN:
//   1 setup; 2 read left BRAM, read counter + 1; 3 shift; 5 table result
//   available; 6 write counter + 1; 7 results written. 512 pairs: last write in
//   cycle 518, `busy` high in cycles 2 .. 518.
// `lut_sel` picks the half of the table: 0 the function, 1 its derivative.
//
// Own choices: one table BRAM with both ports used for the two shifted values
// (the published resource count is three BRAMs per processor), the 9 bit
// table index with `lut_sel` on top, `rst_n`, `busy` and `lut_sel` ports, and
// the column layout.
module actpro
  import mm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  processor_control,
  input  logic        lut_sel,
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
  localparam int unsigned CW   = BRAM_AW - 1;   // counter width (9)

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  act_op_e op, prev_op;
  state_e  state;
  logic    start;
  logic [CW-1:0] rc, wc, wr_a;
  logic [2:0]    dcnt;
  logic          sel_q;

  logic          wq_data, wq_act;
  logic [BRAM_AW-1:0] wq_a0, wq_a1;
  logic [15:0]   wq_d0, wq_d1;

  logic          rd_v, sh_v, lut_v, res_v, wr_v;
  logic signed [15:0] l_dout0, l_dout1;
  logic [8:0]    sh0, sh1;
  logic [15:0]   t_dout0, t_dout1, res0, res1, wr_d0, wr_d1;
  logic [15:0]   r_dout0, r_dout1;

  assign op    = act_op_e'(processor_control);
  assign start = (op == ACTPRO_RUN) && (prev_op != ACTPRO_RUN) && (state == S_IDLE);
  assign busy  = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prev_op <= ACTPRO_READ;
      state   <= S_IDLE;
      rc <= '0; wc <= '0; dcnt <= '0; sel_q <= 1'b0;
      wq_data <= 1'b0; wq_act <= 1'b0;
      wq_a0 <= '0; wq_a1 <= '0; wq_d0 <= '0; wq_d1 <= '0;
      rd_v <= 1'b0; sh_v <= 1'b0; lut_v <= 1'b0; res_v <= 1'b0; wr_v <= 1'b0;
      sh0 <= '0; sh1 <= '0; res0 <= '0; res1 <= '0;
      wr_a <= '0; wr_d0 <= '0; wr_d1 <= '0;
    end else begin
      prev_op <= op;
      wq_data <= (op == ACTPRO_WRITE_DATA);
      wq_act  <= (op == ACTPRO_WRITE_ACT);
      wq_a0   <= input_addr0[BRAM_AW-1:0];
      wq_a1   <= input_addr1[BRAM_AW-1:0];
      wq_d0   <= input_data0;
      wq_d1   <= input_data1;

      case (state)
        S_IDLE: if (start) begin            // cycle 1: setup
          state <= S_RUN;
          rc    <= '0;
          wc    <= '0;
          sel_q <= lut_sel;
        end
        S_RUN: begin                        // cycles 2 .. 513
          rc <= rc + 1'b1;
          if (rc == CW'(HALF - 1)) begin
            state <= S_DRAIN;
            dcnt  <= '0;
          end
        end
        default: begin                      // cycles 514 .. 518
          dcnt <= dcnt + 1'b1;
          if (dcnt == 3'd4) state <= S_IDLE;
        end
      endcase

      // pipeline: read (2) -> shift (3) -> table (4/5) -> result (6) -> write (7)
      rd_v  <= (state == S_RUN);
      sh_v  <= rd_v;
      sh0   <= 9'(l_dout0 >>> SHIFT);
      sh1   <= 9'(l_dout1 >>> SHIFT);
      lut_v <= sh_v;
      res_v <= lut_v;
      res0  <= t_dout0;
      res1  <= t_dout1;
      wr_v  <= res_v;
      if (res_v) begin
        wr_a  <= wc;
        wc    <= wc + 1'b1;
        wr_d0 <= res0;
        wr_d1 <= res1;
      end
    end
  end

  bram_dp #(.DEPTH(BRAM_DEPTH), .WIDTH(DATA_W)) u_left (
    .clk(clk),
    .we_a(wq_data), .addr_a(wq_data ? wq_a0 : {1'b0, rc}), .din_a(wq_d0), .dout_a(l_dout0),
    .we_b(wq_data), .addr_b(wq_data ? wq_a1 : {1'b1, rc}), .din_b(wq_d1), .dout_b(l_dout1)
  );

  bram_dp #(.DEPTH(BRAM_DEPTH), .WIDTH(DATA_W)) u_lut (
    .clk(clk),
    .we_a(wq_act), .addr_a(wq_act ? wq_a0 : {sel_q, sh0}), .din_a(wq_d0), .dout_a(t_dout0),
    .we_b(wq_act), .addr_b(wq_act ? wq_a1 : {sel_q, sh1}), .din_b(wq_d1), .dout_b(t_dout1)
  );

  bram_dp #(.DEPTH(BRAM_DEPTH), .WIDTH(DATA_W)) u_right (
    .clk(clk),
    .we_a(wr_v), .addr_a(wr_v ? {1'b0, wr_a} : input_addr0[BRAM_AW-1:0]),
    .din_a(wr_d0), .dout_a(r_dout0),
    .we_b(wr_v), .addr_b(wr_v ? {1'b1, wr_a} : input_addr1[BRAM_AW-1:0]),
    .din_b(wr_d1), .dout_b(r_dout1)
  );

  assign output_data0 = r_dout0;
  assign output_data1 = r_dout1;

  always_ff @(posedge clk) begin
    output_addr0 <= input_addr0;
    output_addr1 <= input_addr1;
  end

endmodule
