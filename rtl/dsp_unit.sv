// dsp_unit: arithmetic slice of the Mini Vector Machine (DSP48E1 behaviour).
//
// Takes two 16 bit signed operands per cycle and produces a 48 bit signed
// result, as a DSP48E1 configured for a six-stage pipeline: operands that sit
// on A/B in cycle t give their result on P in cycle t+5 (stages t .. t+5:
// A/B registers, multiplier/pre-adder, two pipeline registers, P register).
// Functions (mm_pkg::dsp_fn_e):
//   DSP_ADD  P = A + B            DSP_SUB  P = A - B
//   DSP_MUL  P = A * B            DSP_MACC P = P + A * B (dot product)
//   DSP_SACC P = P + A + B (summation)
// In the two accumulating modes P keeps its value between operands; `clr`
// zeroes P and empties the pipeline (used by the MVM's setup cycle).
// `in_valid` travels with the operands and comes out as `p_valid`.
//
// The six-stage latency and the 48 bit result are the published design's;
// the split of the stages and the sign extension are this implementation's.
module dsp_unit
  import mm_pkg::*;
#(
  parameter int unsigned AW_IN = 16,
  parameter int unsigned PW    = 48
) (
  input  logic                    clk,
  input  logic                    clr,
  input  dsp_fn_e                 fn,
  input  logic                    in_valid,
  input  logic signed [AW_IN-1:0] a,
  input  logic signed [AW_IN-1:0] b,
  output logic signed [PW-1:0]    p,
  output logic                    p_valid
);

  logic signed [AW_IN-1:0] a1, b1;
  logic signed [PW-1:0]    m2, m3, m4;
  logic [3:0]              v;          // valid of stages 1..4
  logic                    acc1, acc2, acc3, acc4;
  dsp_fn_e                 fn1;

  always_ff @(posedge clk) begin
    if (clr) begin
      v       <= '0;
      p       <= '0;
      p_valid <= 1'b0;
      a1 <= '0; b1 <= '0; m2 <= '0; m3 <= '0; m4 <= '0;
      fn1 <= DSP_ADD;
      acc1 <= 1'b0; acc2 <= 1'b0; acc3 <= 1'b0; acc4 <= 1'b0;
    end else begin
      // stage 1: A/B input registers
      a1   <= a;
      b1   <= b;
      fn1  <= fn;
      acc1 <= (fn == DSP_MACC) || (fn == DSP_SACC);
      v[0] <= in_valid;
      // stage 2: multiplier / pre-adder
      case (fn1)
        DSP_SUB:           m2 <= PW'(a1) - PW'(b1);
        DSP_MUL, DSP_MACC: m2 <= PW'(a1) * PW'(b1);
        default:           m2 <= PW'(a1) + PW'(b1);
      endcase
      acc2 <= acc1;
      v[1] <= v[0];
      // stages 3, 4: pipeline registers
      m3 <= m2;  acc3 <= acc2;  v[2] <= v[1];
      m4 <= m3;  acc4 <= acc3;  v[3] <= v[2];
      // stage 5: P register (post-adder / accumulator)
      if (v[3]) p <= acc4 ? p + m4 : m4;
      p_valid <= v[3];
    end
  end

endmodule
