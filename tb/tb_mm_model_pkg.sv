// tb_mm_model_pkg: reference model of one processor group, for testbenches.
//
// grp_model follows a group through the microcode programs of mm_pkg at the
// level of data: it takes the 32 bit input words of one iteration, in the
// order the group consumes them, and returns the 32 bit output words the
// group must produce. Results are computed from the arithmetic definitions
// (16 bit two's complement, truncated), independently of the RTL. State kept
// between iterations: the right-BRAM word 1 of every processor (the upper
// half of a dot-product / summation output) and the activation table.
package tb_mm_model_pkg;
  import mm_pkg::*;

  class grp_model;
    logic [15:0] rb1 [PROCS];     // right BRAM word 1 of each processor
    logic [15:0] lut [1024];

    function new();
      foreach (rb1[i]) rb1[i] = '0;
      foreach (lut[i]) lut[i] = '0;
    endfunction

    // number of input words of iteration `it`
    static function int words(isa_op_e op, int it);
      if (is_mvm_op(op)) return 2048;
      return (it == 0) ? 2560 : 2048;
    endfunction

    function void iterate(isa_op_e op, int it, logic [31:0] w [$], ref logic [31:0] outq [$]);
      logic signed [15:0] l [1024];
      logic [15:0] r [1024];
      logic signed [47:0] acc;
      logic signed [15:0] sh;
      int base;
      base = 0;
      if (!is_mvm_op(op) && it == 0) begin
        for (int j = 0; j < 512; j++) begin
          lut[2*j] = w[j][15:0]; lut[2*j+1] = w[j][31:16];
        end
        base = 512;
      end
      for (int p = 0; p < PROCS; p++) begin
        for (int j = 0; j < 512; j++) begin
          l[2*j]   = w[base + p*512 + j][15:0];
          l[2*j+1] = w[base + p*512 + j][31:16];
        end
        if (is_mvm_op(op)) begin
          acc = 0;
          for (int e = 0; e < 512; e++) begin
            case (op)
              OP_VECTOR_ADDITION:    r[e] = 16'(l[e] + l[512+e]);
              OP_VECTOR_SUBTRACTION: r[e] = 16'(l[e] - l[512+e]);
              OP_ELEMENT_MULTIPLICATION: r[e] = 16'(48'(l[e]) * 48'(l[512+e]));
              OP_VECTOR_DOT_PRODUCT: acc = acc + 48'(l[e]) * 48'(l[512+e]);
              default:               acc = acc + 48'(l[e]) + 48'(l[512+e]);
            endcase
          end
          if (op inside {OP_VECTOR_DOT_PRODUCT, OP_VECTOR_SUMMATION}) begin
            outq.push_back({rb1[p], acc[15:0]});
          end else begin
            rb1[p] = r[1];
            for (int j = 0; j < 256; j++) outq.push_back({r[2*j+1], r[2*j]});
          end
        end else begin
          for (int e = 0; e < 1024; e++) begin
            sh = l[e] >>> 7;
            r[e] = lut[{1'b0, sh[8:0]}];
          end
          for (int j = 0; j < 512; j++) outq.push_back({r[2*j+1], r[2*j]});
        end
      end
    endfunction
  endclass

endpackage
