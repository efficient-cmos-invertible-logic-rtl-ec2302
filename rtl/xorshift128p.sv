// xorshift128p -- 64-bit xorshift+ pseudo-random number generator.
//
// Each bit of the 64-bit output is used as the single-bit noise stream of one
// Boltzmann-machine node, so one generator serves up to 64 nodes. A long,
// DC-free noise source matters here: a biased stream (as from a short LFSR)
// drives the saturating node accumulators to one side independently of their
// inputs and lengthens the time spent in invalid states.
//
// Algorithm (xorshift128+ with shifts 23, 17, 26): the state is two 64-bit
// words s0, s1. Each enabled clock:
//     t   = s0 ^ (s0 << 23)
//     s0' = s1
//     s1' = t ^ s1 ^ (t >> 17) ^ (s1 >> 26)
// The output is the 64-bit sum s0 + s1 of the current state, so it is a
// registered-state function available in the same cycle (no added latency).
// The use of a 64-bit xorshift+ generator follows the published design; the
// shift constants, the seeds and the synchronous reset are this design's
// choices. The seed must not be all-zero.
//
// Interface: clk, rst_n (synchronous, active low, loads SEED), en (advance
// one step), rnd (64-bit output). One new word per enabled cycle.
module xorshift128p #(
  parameter logic [127:0] SEED = {64'hD1B54A32D192ED03, 64'h9E3779B97F4A7C15}
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [63:0] rnd
);
  logic [63:0] s0, s1, t;

  assign t   = s0 ^ (s0 << 23);
  assign rnd = s0 + s1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s0 <= SEED[63:0];
      s1 <= SEED[127:64];
    end else if (en) begin
      s0 <= s1;
      s1 <= t ^ s1 ^ (t >> 17) ^ (s1 >> 26);
    end
  end

  initial assert (SEED != '0) else $error("xorshift128p: all-zero seed");
endmodule
