// xorshift64: 64-bit XOR-shift random number generator feeding the R
// replicas.
//
// The state advances by one xorshift64 step (shifts 13, 7, 17) on every
// cycle in which `en` is high, so every clock cycle of an annealing run sees
// a fresh 64-bit word. Replica k takes bit k of the current state as the
// sign of its random signal r_{i,k}(t) (1 -> +1, 0 -> -1), giving R parallel
// random signals per cycle. `load` writes the seed (a zero seed is replaced
// by a fixed non-zero constant) and has priority over `en`.
// The generator type and its 64-bit width follow the paper; the shift triple
// and the bit-to-replica mapping are this design's choice.
module xorshift64
  import ssqa_pkg::*;
#(
  parameter int R = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [63:0]   seed,
  input  logic          en,
  output logic [R-1:0]  rnd
);

  logic [63:0] state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      state <= SEED_DEFAULT;
    else if (load)   state <= (seed == '0) ? SEED_DEFAULT : seed;
    else if (en)     state <= xorshift64_next(state);
  end

  assign rnd = state[R-1:0];

  initial assert (R >= 1 && R <= 64) else $error("xorshift64: R must be 1..64");

endmodule
