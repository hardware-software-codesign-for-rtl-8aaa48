// tb_dsp_unit: self-checking test of the DSP arithmetic slice.
// Streams random operands in every function and checks each result against a
// reference computed in the testbench, exactly five cycles after the operands
// (six pipeline stages), including the running value of the accumulating
// modes and the clearing by `clr`.
module tb_dsp_unit;
  import mm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clr, in_valid, p_valid;
  dsp_fn_e fn;
  logic signed [15:0] a, b;
  logic signed [47:0] p;

  dsp_unit dut (.*);

  logic signed [47:0] exp_q [$];
  int                 due_q [$];
  logic signed [47:0] acc;
  int cyc = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // compare outputs
  always @(negedge clk) begin
    if (p_valid) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected p_valid"); end
      else begin
        if (p !== exp_q[0] || cyc != due_q[0]) begin
          failures++;
          if (failures < 10) $display("mismatch p=%0d exp=%0d cyc=%0d due=%0d", p, exp_q[0], cyc, due_q[0]);
        end
        void'(exp_q.pop_front());
        void'(due_q.pop_front());
      end
    end
  end

  initial begin
    clr = 1; in_valid = 0; fn = DSP_ADD; a = 0; b = 0;
    @(negedge clk); clr = 0;
    for (int f = 0; f < 5; f++) begin
      fn  = dsp_fn_e'(f);
      acc = 0;
      clr = 1; @(negedge clk); clr = 0;
      for (int n = 0; n < 300; n++) begin
        in_valid = ($urandom_range(0, 3) != 0);
        a = 16'($urandom); b = 16'($urandom);
        if (in_valid) begin
          case (fn)
            DSP_ADD:  acc = 48'(a) + 48'(b);
            DSP_SUB:  acc = 48'(a) - 48'(b);
            DSP_MUL:  acc = 48'(a) * 48'(b);
            DSP_MACC: acc = acc + 48'(a) * 48'(b);
            default:  acc = acc + 48'(a) + 48'(b);
          endcase
          exp_q.push_back(acc);
          due_q.push_back(cyc + 5);
        end
        @(negedge clk);
      end
      in_valid = 0;
      repeat (8) @(negedge clk);
    end
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
