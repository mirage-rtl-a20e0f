// prng: hardware pseudo-random number generator of the cache controller.
//
// Mirage needs randomness that does not depend on addresses for two
// decisions: which data entry of the whole data-store is the victim of a
// global eviction, and which skew takes a line when both indexed sets have
// the same number of invalid tags (and, should one ever happen, which tag a
// set-associative eviction removes). The generator is not specified beyond
// "a hardware PRNG"; this design uses a 64-bit xorshift generator (shifts
// 13, 7, 17) that steps every cycle. A deployment wanting unpredictability
// against a strong adversary would replace it with a cryptographic
// generator; the interface would stay the same.
//
// Interface: rnd is the current 64-bit state; it advances on every clock
// edge while en is high. Reset loads SEED (must be non-zero).
module prng #(
  parameter logic [63:0] SEED = 64'h9E3779B97F4A7C15
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [63:0] rnd
);

  logic [63:0] state_q, nxt;

  always_comb begin
    nxt = state_q;
    nxt = nxt ^ (nxt << 13);
    nxt = nxt ^ (nxt >> 7);
    nxt = nxt ^ (nxt << 17);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state_q <= SEED;
    else if (en) state_q <= nxt;
  end

  assign rnd = state_q;

  initial assert (SEED != 64'd0) else $error("prng: SEED must be non-zero");

endmodule
