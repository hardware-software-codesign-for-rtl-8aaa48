// tb_matrix_machine: end-to-end test of the Matrix Machine at reduced size
// (two MVM groups, one activation group). Runs a program that uses every
// opcode, several iterations, group ranges that are clamped or include groups
// of the other kind, with random gaps in the input stream and random stalls
// of the output receiver; checks all outputs against the group model and
// that every mechanism of the design occurred at least once.
module tb_matrix_machine;
  import mm_pkg::*;
  import tb_mm_model_pkg::*;
  localparam int N_MVM = 2;
  localparam int N_ACT = 1;

  `include "tb_mm_body.svh"

  matrix_machine #(.N_MVM_PG(N_MVM), .N_ACT_PG(N_ACT)) dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_t prog [$];
    init();
    gaps_in = 1; gaps_out = 1;
    prog.push_back(mk_instr(OP_VECTOR_ADDITION, 2, 0, 1));
    prog.push_back(mk_instr(OP_NOP, 0, 0, 0));
    prog.push_back(mk_instr(OP_VECTOR_DOT_PRODUCT, 2, 0, 0));
    prog.push_back(mk_instr(OP_ACTIVATION_FUNCTION, 2, 0, 2));
    prog.push_back(mk_instr(OP_VECTOR_SUBTRACTION, 1, 1, 100));
    prog.push_back(mk_instr(OP_ELEMENT_MULTIPLICATION, 1, 0, 1));
    prog.push_back(mk_instr(OP_VECTOR_SUMMATION, 0, 0, 1));
    prog.push_back(mk_instr(OP_VECTOR_DOT_PRODUCT, 1, 1, 1));
    run_program(prog, 1500000);
    report_mechanisms(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
