// ucode_cache: microcode cache of one processor group, 16 x 32 bit.
//
// Holds the microcodes a processor group executes, so that the global
// controller sends a program once and the group can run it for many
// iterations without reloading. One write port (the microcode arriving from
// the ring, written when `we` is high) and one asynchronous read port (the
// local controller's program counter), as a small distributed (LUT) RAM.
// A word written in cycle t can be read from cycle t+1.
//
// The depth of 16 microcodes is the published one; the asynchronous read port
// is this implementation's choice.
module ucode_cache #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned WIDTH = 32,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
