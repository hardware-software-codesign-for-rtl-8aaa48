// tb_mm_workloads: the three single-group workloads of the published
// performance study, run end to end through the Matrix Machine: vector
// addition, vector dot product and the activation function, each over
// N_I = 1024 iterations on one processor group (4 processors x 1024 elements
// per iteration). The input stream never pauses and the output receiver is
// always ready, so the measured cycle count is the group's own schedule.
//
// Checks: every output against the group model, and the total cycle count
// against this design's schedule per iteration (the microcode programs in
// mm_pkg):
//   vector addition  4 x 512 load + 522 run + 4 x 256 store = 3594 cycles
//   dot product      4 x 512 load + 522 run + 4 x 1 store    = 2574 cycles
//   activation       4 x 512 load + 520 run + 4 x 512 store  = 4616 cycles
//                    (+ 512 cycles of look-up-table load once)
// allowing 1% plus a fixed start-up allowance for the ring and the pipeline.
// The published estimates for one group (Eqn. 6) are printed alongside.
// The machine is built with one group of each kind to keep the run short.
module tb_mm_workloads;
  import mm_pkg::*;
  import tb_mm_model_pkg::*;
  localparam int N_MVM = 1;
  localparam int N_ACT = 1;
  localparam int N_I   = 1024;

  `include "tb_mm_body.svh"

  matrix_machine #(.N_MVM_PG(N_MVM), .N_ACT_PG(N_ACT)) dut (.*);

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(input isa_op_e op, input int gid, input int per_iter,
                         input int once, input int published_tall, input string name);
    instr_t prog [$];
    int ideal;
    prog.push_back(mk_instr(op, N_I, gid, gid));
    run_program(prog, 12000000);
    ideal = N_I * per_iter + once;
    $display("%s, N_I=%0d: %0d cycles (%0d per iteration); schedule %0d; published estimate %0d",
             name, N_I, last_cycles, last_cycles / N_I, ideal, published_tall);
    check(last_cycles >= ideal, $sformatf("%s not faster than its schedule", name));
    check(last_cycles <= ideal + ideal / 100 + 2000,
          $sformatf("%s within 1%% of its schedule (%0d > %0d)", name, last_cycles, ideal));
  endtask

  initial begin
    init();
    run_one(OP_VECTOR_ADDITION,     0, 3594,   0, 4238336, "vector addition");
    run_one(OP_VECTOR_DOT_PRODUCT,  0, 2574,   0, 4206592, "vector dot product");
    run_one(OP_ACTIVATION_FUNCTION, 1, 4616, 512, 5271552, "activation function");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
