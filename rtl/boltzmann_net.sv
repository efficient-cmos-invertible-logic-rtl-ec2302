// boltzmann_net -- invertible circuit as a network of stochastic neurons.
//
// The circuit is selected by CIRCUIT (gate, adder, ripple-carry adder or
// array multiplier) and NBITS; its Hamiltonian (biases h, symmetric weights J)
// comes from invlogic_pkg at elaboration time. One pbit_neuron is built per
// node. Node i receives the state bits of exactly the nodes j with J_ij != 0,
// each gated with the constant weight J_ij, plus the constant leak
// h_i - sum_j J_ij; zero couplings cost no hardware. All nodes update
// synchronously from the previous cycle's states.
//
// Noise: a bank of ceil(NODES/64) xorshift+ generators, each with its own
// seed; bit (i mod 64) of generator (i div 64) feeds node i. All nodes share
// one run-time noise weight w_rnd (normally driven by noise_annealer).
// When NODES is not a multiple of 64 the top bits of the last generator
// feed nothing, and each neuron's accumulator port is left unread here
// (it is kept for observation); lint reports both as unused.
//
// Any node can be clamped (clamp_en/clamp_val). Clamping the operand
// terminals runs the circuit forward, clamping the result terminals runs it
// in reverse, and mixed clamps give partial inversion (e.g. division).
//
// Interface: clk, rst_n, en (all neurons and generators advance), clear
// (restart: accumulators to -1), w_rnd, clamp_en/clamp_val per node, state
// per node (1 = logic 1 = +1). Terminal nodes are numbered first (see
// invlogic_pkg). Timing: a clamp shows on state combinationally; a free node
// reacts to its neighbours one clock later.
module boltzmann_net
  import invlogic_pkg::*;
#(
  parameter circuit_e    CIRCUIT = CIRC_MULT,
  parameter int unsigned NBITS   = 5,
  parameter int unsigned W       = 5,   // weight width, signed
  parameter int unsigned ACC_W   = 4,   // neuron accumulator width, signed
  localparam int unsigned NODES  = num_nodes(CIRCUIT, NBITS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                clear,
  input  logic signed [W-1:0] w_rnd,
  input  logic [NODES-1:0]    clamp_en,
  input  logic [NODES-1:0]    clamp_val,
  output logic [NODES-1:0]    state
);
  localparam int unsigned NPRNG  = (NODES + 63) / 64;
  localparam int unsigned LEAK_W = W + 4;

  logic [NPRNG*64-1:0] rnd_bits;

  for (genvar g = 0; g < NPRNG; g++) begin : g_prng
    xorshift128p #(.SEED(prng_seed(g))) u_prng (
      .clk  (clk),
      .rst_n(rst_n),
      .en   (en),
      .rnd  (rnd_bits[g*64 +: 64])
    );
  end

  for (genvar i = 0; i < NODES; i++) begin : g_node
    localparam node_info_t INFO = node_info(CIRCUIT, NBITS, i);
    localparam int unsigned FAN = int'(INFO.fan);

    logic [FAN-1:0]             in_bits;
    logic signed [W-1:0]        weights [FAN];
    logic signed [ACC_W-1:0]    acc;

    for (genvar k = 0; k < FAN; k++) begin : g_in
      assign in_bits[k] = state[int'(INFO.nbr[k])];
      assign weights[k] = W'($signed(INFO.wt[k]));
    end

    pbit_neuron #(
      .FANIN (FAN),
      .W     (W),
      .ACC_W (ACC_W),
      .LEAK_W(LEAK_W)
    ) u_neuron (
      .clk      (clk),
      .rst_n    (rst_n),
      .en       (en),
      .clear    (clear),
      .in_bits  (in_bits),
      .weights  (weights),
      .w_rnd    (w_rnd),
      .rnd      (rnd_bits[i]),
      .leak     (LEAK_W'(INFO.leak)),
      .clamp_en (clamp_en[i]),
      .clamp_val(clamp_val[i]),
      .out      (state[i]),
      .acc      (acc)
    );
  end
endmodule
