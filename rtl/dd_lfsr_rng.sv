// dd_lfsr_rng: random number source for choosing the random row of a swap
// chain.
//
// The paper only names a Random Number Generator (RNG) that defines the
// random row of step 1; its construction is this design's choice: a 16-bit
// maximal-length Galois LFSR (polynomial x^16 + x^14 + x^13 + x^11 + 1,
// feedback mask 16'hB400) that advances every clock cycle, so the value seen
// at the moment a chain starts depends on the whole command history. The
// period is 2^16 - 1 and the all-zero state never occurs.
//
// Interface: rnd is the current state, valid one cycle after reset release.
// Timing: one new value per cycle; reset loads SEED (must be non-zero).
module dd_lfsr_rng #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [15:0] rnd
);

  logic [15:0] state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= SEED;
    else        state <= state[0] ? ((state >> 1) ^ 16'hB400) : (state >> 1);
  end

  assign rnd = state;

  initial assert (SEED != 16'h0) else $error("dd_lfsr_rng: SEED must be non-zero");

endmodule
