// bram_dp: true dual-port block RAM, 1024 x 16 bit by default.
//
// Models one RAMB18E1 in its 1024 x 16 configuration, the memory used for the
// left BRAM, the right BRAM and the activation look-up table of every
// processor. Both ports can read or write in every cycle. Reads are
// synchronous: the word at `addr_x` in cycle t appears on `dout_x` in cycle
// t+1. A port that writes returns the old contents (read-first). Writing the
// same address from both ports in one cycle is not allowed; port B wins in
// this model. The contents are cleared to zero at start-up so that a
// simulation never reads undefined data.
//
// Size follows the published design; the read-first behaviour and the
// one-cycle read latency are this implementation's choices (they match the
// block RAM's default mode).
module bram_dp #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 16,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we_a,
  input  logic [AW-1:0]    addr_a,
  input  logic [WIDTH-1:0] din_a,
  output logic [WIDTH-1:0] dout_a,
  input  logic             we_b,
  input  logic [AW-1:0]    addr_b,
  input  logic [WIDTH-1:0] din_b,
  output logic [WIDTH-1:0] dout_b
);

  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    dout_a <= mem[addr_a];
    dout_b <= mem[addr_b];
    if (we_a) mem[addr_a] <= din_a;
    if (we_b) mem[addr_b] <= din_b;
  end

endmodule
