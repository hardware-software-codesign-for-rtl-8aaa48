// tb_matrix_machine_full: end-to-end test of the Matrix Machine at its default
// size (16 MVM groups, 4 activation groups). One vector addition over all 16
// MVM groups, one activation pass over all 4 activation groups and one
// two-iteration dot product over every group number (the activation groups
// are skipped by the controller), with random gaps in the input stream and
// random output stalls; all outputs are checked against the group model.
module tb_matrix_machine_full;
  import mm_pkg::*;
  import tb_mm_model_pkg::*;
  localparam int N_MVM = 16;
  localparam int N_ACT = 4;

  `include "tb_mm_body.svh"

  matrix_machine dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_t prog [$];
    init();
    gaps_in = 1; gaps_out = 1;
    prog.push_back(mk_instr(OP_VECTOR_ADDITION, 1, 0, 15));
    prog.push_back(mk_instr(OP_ACTIVATION_FUNCTION, 1, 16, 19));
    prog.push_back(mk_instr(OP_VECTOR_DOT_PRODUCT, 2, 0, 127));
    run_program(prog, 2500000);
    report_mechanisms(1'b0);
    check(n_in_stall > 0 && n_out_stall > 0 && n_recirc > 0, "stalls and recirculation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
