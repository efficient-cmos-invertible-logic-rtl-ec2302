// inv_mult_top -- invertible n x n unsigned multiplier / divider / factorizer.
//
// A 3*n^2-node stochastic Boltzmann machine (n = 5: 75 nodes) whose valid
// low-energy states are exactly the rows of the multiplication table
// A * B = Y (A, B n-bit, Y 2n-bit). Which terminals are inputs is decided at
// run time by clamping:
//   forward (multiply) : clamp A and B, read Y
//   reverse (factorize): clamp Y, read A and B
//   divide             : clamp Y and A, read B
// Each terminal bit has its own clamp enable, so any mix is possible.
//
// Contents: boltzmann_net with the multiplier Hamiltonian (composed from
// invertible AND gates, half adders and full adders), its xorshift+ noise
// generators (two of them for 75 nodes), and noise_annealer, which holds the
// noise weight at w_init for anneal_len cycles and then lowers it to w_final.
// The published chip is a 5 x 5 multiplier; the interface (plain ports for
// clamps, noise schedule and node states) is this design's choice because the
// chip's test interface is not documented.
//
// Operation: program w_init, w_final, anneal_len and the clamps, pulse start
// (clears all accumulators and the cycle counter), hold run high. Every
// cycle all free nodes update once. a_out / b_out / y_out show the current
// terminal states (clamped bits show their clamp value); cycle counts run
// cycles since start and annealed tells that w_final is in use. The outputs
// fluctuate while the noise is high. With a low final noise the small
// configurations settle on a valid A*B = Y combination; at 5 x 5 with the
// published schedule (w 11 -> 5) the network visits valid states quickly
// (mean about 430 cycles for a factorization) but does not stay in them,
// so the caller takes the first cycle at which A*B = Y holds. No on-chip
// convergence check is built. Latency from a clamp change to a node
// reaction is one clock.
module inv_mult_top
  import invlogic_pkg::*;
#(
  parameter int unsigned NBITS = 5,   // operand width (fabricated chip: 5)
  parameter int unsigned W     = 5,   // weight / noise-weight width, signed
  parameter int unsigned ACC_W = 4,   // neuron accumulator width, signed
  parameter int unsigned CNT_W = 24,  // run-cycle counter width
  localparam int unsigned NODES = 3 * NBITS * NBITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 run,
  // noise schedule
  input  logic signed [W-1:0]  w_init,
  input  logic signed [W-1:0]  w_final,
  input  logic [CNT_W-1:0]     anneal_len,
  // clamps: per-bit enable and value
  input  logic [NBITS-1:0]     a_clamp,
  input  logic [NBITS-1:0]     a_val,
  input  logic [NBITS-1:0]     b_clamp,
  input  logic [NBITS-1:0]     b_val,
  input  logic [2*NBITS-1:0]   y_clamp,
  input  logic [2*NBITS-1:0]   y_val,
  // terminal states
  output logic [NBITS-1:0]     a_out,
  output logic [NBITS-1:0]     b_out,
  output logic [2*NBITS-1:0]   y_out,
  output logic                 annealed,
  output logic [CNT_W-1:0]     cycle,
  output logic [NODES-1:0]     node_state
);
  localparam int unsigned NTERM = 4 * NBITS;   // A, B, Y terminals come first

  logic signed [W-1:0] w_rnd;
  logic [NODES-1:0]    clamp_en, clamp_val;

  noise_annealer #(.W(W), .CNT_W(CNT_W)) u_anneal (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .en        (run),
    .w_init    (w_init),
    .w_final   (w_final),
    .anneal_len(anneal_len),
    .w_rnd     (w_rnd),
    .annealed  (annealed),
    .cycle     (cycle)
  );

  // internal (auxiliary) nodes are never clamped
  assign clamp_en  = {{(NODES - NTERM){1'b0}}, y_clamp, b_clamp, a_clamp};
  assign clamp_val = {{(NODES - NTERM){1'b0}}, y_val,   b_val,   a_val};

  boltzmann_net #(
    .CIRCUIT(CIRC_MULT),
    .NBITS  (NBITS),
    .W      (W),
    .ACC_W  (ACC_W)
  ) u_net (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (run),
    .clear    (start),
    .w_rnd    (w_rnd),
    .clamp_en (clamp_en),
    .clamp_val(clamp_val),
    .state    (node_state)
  );

  assign a_out = node_state[NBITS-1:0];
  assign b_out = node_state[2*NBITS-1:NBITS];
  assign y_out = node_state[4*NBITS-1:2*NBITS];
endmodule
