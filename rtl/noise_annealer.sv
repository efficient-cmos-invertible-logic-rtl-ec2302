// noise_annealer -- one-step simulated-annealing schedule for the noise weight.
//
// The Boltzmann machine escapes local minima through a weighted random input
// per node. Running with a large noise weight first and then lowering it lets
// the node states wander over many configurations and then settle in a low
// energy (valid) one. This block supplies that weight, w_rnd: it equals
// w_init for the first anneal_len enabled cycles after start, and w_final from
// then on. It also counts the enabled cycles of the current run, which the
// user can read to measure cycles to convergence.
//
// The published experiments use exactly one step (for example 5 -> 3 at half
// of the run); a single programmable step is therefore what is built. The
// counter width and the start/enable handshake are this design's choices.
//
// Interface: start (one-cycle pulse: restarts the schedule and the counter),
// en (the network advances this cycle), w_init, w_final, anneal_len; outputs
// w_rnd, annealed (1 once w_final is in use) and cycle (enabled cycles since
// start, saturating). Timing: the cycle after start, w_rnd = w_init; after
// anneal_len enabled cycles it switches to w_final.
module noise_annealer #(
  parameter int unsigned W     = 5,   // noise weight width (signed)
  parameter int unsigned CNT_W = 24   // cycle counter width
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                en,
  input  logic signed [W-1:0] w_init,
  input  logic signed [W-1:0] w_final,
  input  logic [CNT_W-1:0]    anneal_len,
  output logic signed [W-1:0] w_rnd,
  output logic                annealed,
  output logic [CNT_W-1:0]    cycle
);
  always_ff @(posedge clk) begin
    if (!rst_n || start)
      cycle <= '0;
    else if (en && cycle != '1)
      cycle <= cycle + 1'b1;
  end

  assign annealed = (cycle >= anneal_len);
  assign w_rnd    = annealed ? w_final : w_init;
endmodule
