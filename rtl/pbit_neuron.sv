// pbit_neuron -- base processing element of the stochastic Boltzmann machine.
//
// A node computes, every clock, its local field
//     I = h + sum_k J_k m_k + w_rnd * r,    m_k, r in {-1,+1}
// from the bipolar states m_k of its neighbours and one random bit r, and
// integrates I into a saturating accumulator. The node output is the sign of
// the accumulator (1 when acc >= 0). The saturating accumulator is the
// stochastic-computing finite-state machine that realises tanh(); taking the
// sign of its state realises sgn(tanh(I)).
//
// Hardware, as in a simplified spiking neuron: each neighbour bit gates its
// weight through an AND (bit ? w_k : 0), the random bit gates w_rnd the same
// way, and a constant "leak" is added. Gating with {0,1} bits instead of
// multiplying by {-1,+1} needs the identity J*m = 2*J*b - J, so the gated
// terms are added with a one-bit left shift (wiring only) and the constant
// -sum J_k (and the bias h) is carried in the leak input; the matching -w_rnd
// is subtracted here because w_rnd is a run-time value. The structure (AND
// gates, adder tree, leak, saturating accumulator, >= 0 comparator) follows
// the published processing element; this shift/leak encoding, the reset value
// and the clamp logic are this design's choices.
//
// Clamping: when clamp_en is 1 the node drives clamp_val instead of its
// comparator, which is how a terminal is fixed as an input (forward or
// reverse operation). The accumulator keeps running while clamped.
//
// Interface: in_bits / weights (FANIN neighbours), w_rnd, rnd, leak, clamp_en,
// clamp_val, out, acc. Timing: out is a function of the accumulator register,
// so a change of inputs reaches out one clock later. clear (synchronous)
// resets the accumulator to -1, i.e. the node starts at logic 0.
module pbit_neuron #(
  parameter int unsigned FANIN  = 2,   // neighbours (non-zero couplings)
  parameter int unsigned W      = 5,   // weight width, signed
  parameter int unsigned ACC_W  = 4,   // accumulator width, signed
  parameter int unsigned LEAK_W = W + 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clear,
  input  logic [FANIN-1:0]        in_bits,
  input  logic signed [W-1:0]     weights [FANIN],
  input  logic signed [W-1:0]     w_rnd,
  input  logic                    rnd,
  input  logic signed [LEAK_W-1:0] leak,
  input  logic                    clamp_en,
  input  logic                    clamp_val,
  output logic                    out,
  output logic signed [ACC_W-1:0] acc
);
  // Wide enough for FANIN+1 doubled weights, the leak and -w_rnd.
  localparam int unsigned SUM_W = ((W + 1 > LEAK_W) ? W + 1 : LEAK_W) + $clog2(FANIN + 3) + 1;
  localparam int unsigned TOT_W = ((SUM_W > ACC_W) ? SUM_W : ACC_W) + 1;
  localparam logic signed [TOT_W-1:0] ACC_MAX = TOT_W'((1 << (ACC_W - 1)) - 1);
  localparam logic signed [TOT_W-1:0] ACC_MIN = -TOT_W'(1 << (ACC_W - 1));

  logic signed [SUM_W-1:0] field;
  logic signed [TOT_W-1:0] acc_sum, acc_next;

  always_comb begin
    field = SUM_W'(leak) - SUM_W'(w_rnd);
    for (int k = 0; k < FANIN; k++)
      if (in_bits[k]) field += SUM_W'(weights[k]) <<< 1;
    if (rnd) field += SUM_W'(w_rnd) <<< 1;
  end

  assign acc_sum  = TOT_W'(acc) + TOT_W'(field);
  assign acc_next = (acc_sum > ACC_MAX) ? ACC_MAX :
                    (acc_sum < ACC_MIN) ? ACC_MIN : acc_sum;

  always_ff @(posedge clk) begin
    if (!rst_n || clear)
      acc <= '1;   // -1
    else if (en)
      acc <= acc_next[ACC_W-1:0];
  end

  assign out = clamp_en ? clamp_val : !acc[ACC_W-1];
endmodule
