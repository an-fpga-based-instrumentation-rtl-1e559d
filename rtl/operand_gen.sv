// operand_gen: pseudo-random operand source of one benchmark lane.
//
// Holds a 32-bit xorshift32 state. `restart` reloads SEED, so every benchmark
// run sees the same operand sequence and therefore the same expected result.
// `advance` steps the state once. The current pair is the upper half (a) and
// the lower half (b) of the state, read combinationally.
//
// The measurement used "pre-generated random numbers"; generating them with a
// seeded xorshift32 instead of storing them in block RAM is this design's
// choice. A host can reproduce the sequence with the same three shifts
// (x ^= x<<13; x ^= x>>17; x ^= x<<5).
module operand_gen
  import cryo_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        restart,
  input  logic        advance,
  output logic [15:0] a,
  output logic [15:0] b
);

  logic [31:0] state;

  always_ff @(posedge clk) begin
    if (!rst_n || restart) state <= SEED;
    else if (advance)      state <= xorshift32(state);
  end

  assign a = state[31:16];
  assign b = state[15:0];

  initial assert (SEED != 32'd0) else $error("operand_gen: SEED must be nonzero");

endmodule
