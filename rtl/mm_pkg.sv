// mm_pkg: types and constants shared by the Matrix Machine.
//
// Holds the encodings that every level of the machine agrees on: the
// instruction set (opcodes, 32 bit instruction word), the 32 bit microcode
// word that drives one processor group of four processors, the operation codes
// of the Mini Vector Machine (MVM) and of the Activation Processor (ACTPRO),
// the group-control codes of a processor group, and the packet that travels on
// the ring FIFO between the global controller and the processor groups.
//
// Opcode values, microcode bit fields and processor-control codes follow the
// published design. The instruction field layout, the group-control encoding,
// the ring packet format and the microcode programs that the global
// controller expands each instruction into are this implementation's choices
// (documented next to each definition).
package mm_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned DATA_W     = 16;    // signed element width
  localparam int unsigned BRAM_DEPTH = 1024;  // RAMB18E1 as 1024 x 16
  localparam int unsigned BRAM_AW    = 10;
  localparam int unsigned PROCS      = 4;     // processors per group (4:1 mux)
  localparam int unsigned UC_DEPTH   = 16;    // microcodes per group cache
  localparam int unsigned CNT_W      = 8;     // input / output counter width
  localparam int unsigned ACC_W      = 48;    // DSP48E1 P width
  localparam int unsigned SHIFT      = 7;     // ACTPRO right shift
  localparam int unsigned GID_W      = 7;     // 32 bit ISA: up to 128 groups
  localparam int unsigned ITER_W     = 15;

  // Cycles one run-type microcode must last: setup + 512 reads + pipeline.
  localparam int unsigned MVM_RUN_CYCLES = 522;
  localparam int unsigned ACT_RUN_CYCLES = 520;

  // ------------------------------------------------------- instruction set
  typedef enum logic [2:0] {
    OP_VECTOR_DOT_PRODUCT     = 3'b000,
    OP_VECTOR_SUMMATION       = 3'b001,
    OP_VECTOR_ADDITION        = 3'b010,
    OP_VECTOR_SUBTRACTION     = 3'b011,
    OP_ELEMENT_MULTIPLICATION = 3'b100,
    OP_ACTIVATION_FUNCTION    = 3'b101,
    OP_NOP                    = 3'b110,
    OP_RSVD                   = 3'b111
  } isa_op_e;

  // 32 bit instruction: opcode, number of iterations, first and last
  // processor group it applies to (7 bit selects: 128 groups).
  typedef struct packed {
    isa_op_e                op;        // [31:29]
    logic [ITER_W-1:0]      iters;     // [28:14]
    logic [GID_W-1:0]       sel_start; // [13:7]
    logic [GID_W-1:0]       sel_end;   // [6:0]
  } instr_t;

  // -------------------------------------------------- processor controls
  typedef enum logic [2:0] {
    MVM_RESET      = 3'b000,
    MVM_READ       = 3'b001,
    MVM_WRITE      = 3'b010,
    MVM_VEC_DOT    = 3'b011,
    MVM_VEC_SUM    = 3'b100,
    MVM_VEC_ADD    = 3'b101,
    MVM_VEC_SUB    = 3'b110,
    MVM_ELEM_MULTI = 3'b111
  } mvm_op_e;

  typedef enum logic [1:0] {
    ACTPRO_READ       = 2'b00,
    ACTPRO_WRITE_ACT  = 2'b01,
    ACTPRO_WRITE_DATA = 2'b10,
    ACTPRO_RUN        = 2'b11
  } act_op_e;

  // DSP function selected by the MVM control logic.
  typedef enum logic [2:0] {
    DSP_ADD  = 3'd0,   // P = A + B
    DSP_SUB  = 3'd1,   // P = A - B
    DSP_MUL  = 3'd2,   // P = A * B
    DSP_MACC = 3'd3,   // P = P + A * B
    DSP_SACC = 3'd4    // P = P + A + B
  } dsp_fn_e;

  // ------------------------------------------------------------ microcode
  // Bit fields of the 32 bit microcode (one microcode drives 4 processors).
  typedef struct packed {
    logic [3:0] pctl3;      // [31:28] processor 3 control
    logic [3:0] pctl2;      // [27:24]
    logic [3:0] pctl1;      // [23:20]
    logic [3:0] pctl0;      // [19:16]
    logic [1:0] out_mux;    // [15:14] output 4:1 multiplexer select
    logic       out_cnt_en; // [13]
    logic       out_col;    // [12]
    logic       in_cnt_en;  // [11]
    logic       in_col;     // [10]
    logic [9:0] cycles;     // [9:0]
  } ucode_t;

  // Group control (2 bits).
  typedef enum logic [1:0] {
    GC_HOLD  = 2'b00,   // nothing
    GC_LOAD  = 2'b01,   // write microcode input into the cache
    GC_START = 2'b10,   // start executing the cached program
    GC_STOP  = 2'b11    // abort execution
  } group_ctl_e;

  // ------------------------------------------------------ ring FIFO packet
  typedef enum logic [2:0] {
    PK_NONE  = 3'd0,
    PK_UCODE = 3'd1,    // microcode for the cache of group `gid`
    PK_DATA  = 3'd2,    // two input elements for group `gid`
    PK_START = 3'd3,    // start group `gid`: payload = {loop_start, iters}
    PK_STOP  = 3'd4,    // stop group `gid`
    PK_OUT   = 3'd5,    // two output elements from group `gid`
    PK_DONE  = 3'd6     // group `gid` finished its program
  } pkt_kind_e;

  typedef struct packed {
    pkt_kind_e        kind;
    logic [GID_W-1:0] gid;
    logic [31:0]      payload;
  } pkt_t;

  // ---------------------------------------------------- helper functions
  function automatic ucode_t mk_ucode(input logic [3:0] p0, input logic [3:0] p1,
                                      input logic [3:0] p2, input logic [3:0] p3,
                                      input logic [1:0] mux, input logic oen,
                                      input logic ocol, input logic ien,
                                      input logic icol, input logic [9:0] cyc);
    ucode_t u;
    u.pctl0 = p0; u.pctl1 = p1; u.pctl2 = p2; u.pctl3 = p3;
    u.out_mux = mux; u.out_cnt_en = oen; u.out_col = ocol;
    u.in_cnt_en = ien; u.in_col = icol; u.cycles = cyc;
    return u;
  endfunction

  // True for instructions executed by MVM groups.
  function automatic logic is_mvm_op(input isa_op_e op);
    return op inside {OP_VECTOR_DOT_PRODUCT, OP_VECTOR_SUMMATION,
                      OP_VECTOR_ADDITION, OP_VECTOR_SUBTRACTION,
                      OP_ELEMENT_MULTIPLICATION};
  endfunction

  function automatic mvm_op_e isa_to_mvm(input isa_op_e op);
    case (op)
      OP_VECTOR_DOT_PRODUCT:     return MVM_VEC_DOT;
      OP_VECTOR_SUMMATION:       return MVM_VEC_SUM;
      OP_VECTOR_ADDITION:        return MVM_VEC_ADD;
      OP_VECTOR_SUBTRACTION:     return MVM_VEC_SUB;
      default:                   return MVM_ELEM_MULTI;
    endcase
  endfunction

  // Microcode program of one instruction, as loaded into every selected
  // group. Entry k of the program; `len` entries in total; the loop of the
  // second and later iterations restarts at `loop_start`.
  //
  //  vector ops (MVM group):
  //    0..3  WRITE processor p, 512 cycles, input counter on (both columns)
  //    4     run operation on all four processors, MVM_RUN_CYCLES
  //    5..8  READ, output counter on, mux = p: 256 cycles (element-wise)
  //          or 1 cycle (dot product / summation: one scalar per processor)
  //  activation (ACTPRO group):
  //    0     WRITE_ACT on all four, 512 cycles (look-up table, first pass only)
  //    1..4  WRITE_DATA processor p, 512 cycles
  //    5     RUN on all four, ACT_RUN_CYCLES
  //    6..9  READ, mux = p, 512 cycles (both columns)
  localparam int unsigned MVM_PROG_LEN = 9;
  localparam int unsigned ACT_PROG_LEN = 10;

  function automatic ucode_t prog_word(input isa_op_e op, input int unsigned k);
    logic [3:0] rd, run;
    logic [3:0] p [PROCS];
    ucode_t     u;
    u = '0;
    if (is_mvm_op(op)) begin
      rd  = {1'b0, MVM_READ};
      run = {1'b0, isa_to_mvm(op)};
      if (k < 4) begin
        for (int i = 0; i < PROCS; i++) p[i] = (i == int'(k)) ? {1'b0, MVM_WRITE} : rd;
        u = mk_ucode(p[0], p[1], p[2], p[3], 2'd0, 1'b0, 1'b0, 1'b1, 1'b0, 10'd512);
      end else if (k == 4) begin
        u = mk_ucode(run, run, run, run, 2'd0, 1'b0, 1'b0, 1'b0, 1'b0,
                     10'(MVM_RUN_CYCLES));
      end else begin
        u = mk_ucode(rd, rd, rd, rd, 2'(k - 5), 1'b1, 1'b0, 1'b0, 1'b0,
                     (op inside {OP_VECTOR_DOT_PRODUCT, OP_VECTOR_SUMMATION})
                       ? 10'd1 : 10'd256);
      end
    end else begin
      rd  = {2'b00, ACTPRO_READ};
      run = {2'b00, ACTPRO_RUN};
      if (k == 0) begin
        u = mk_ucode({2'b00, ACTPRO_WRITE_ACT}, {2'b00, ACTPRO_WRITE_ACT},
                     {2'b00, ACTPRO_WRITE_ACT}, {2'b00, ACTPRO_WRITE_ACT},
                     2'd0, 1'b0, 1'b0, 1'b1, 1'b0, 10'd512);
      end else if (k < 5) begin
        for (int i = 0; i < PROCS; i++)
          p[i] = (i == int'(k) - 1) ? {2'b00, ACTPRO_WRITE_DATA} : rd;
        u = mk_ucode(p[0], p[1], p[2], p[3], 2'd0, 1'b0, 1'b0, 1'b1, 1'b0, 10'd512);
      end else if (k == 5) begin
        u = mk_ucode(run, run, run, run, 2'd0, 1'b0, 1'b0, 1'b0, 1'b0,
                     10'(ACT_RUN_CYCLES));
      end else begin
        u = mk_ucode(rd, rd, rd, rd, 2'(k - 6), 1'b1, 1'b0, 1'b0, 1'b0, 10'd512);
      end
    end
    return u;
  endfunction

endpackage
