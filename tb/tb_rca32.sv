// tb_rca32 -- 32-bit invertible ripple-carry adder (128 nodes).
//
// boltzmann_net is built with CIRCUIT = CIRC_RCA and NBITS = 32, the
// largest adder of the published resource comparison: one half adder and 31
// full adders, 4 * 32 = 128 nodes (A0..A31, B0..B31, S0..S31, Cout, then
// the 31 internal carries), fed by two xorshift+ generators. It is run
//   forward  : A and B clamped, {Cout, S} read (addition);
//   subtract : {Cout, S} and A clamped, B read;
//   reverse  : {Cout, S} clamped, A and B read (any pair with A + B = sum).
// Each run clears the network and lasts RUN cycles, noise weight 3 for the
// first half and 2 for the second (values chosen by simulation; the
// published comparison gives resources only). A run counts as solved at the
// first cycle in which the free terminals satisfy A + B = {Cout, S}; the
// number of valid cycles in the low-noise half is reported as well.
// Checked: every run is solved, at least half of the runs stay valid for
// more than half of the low-noise half, clamped nodes never move, and the
// carry chain is exercised by operands whose sum carries through all 32
// bits.
module tb_rca32;
  import invlogic_pkg::*;
  localparam int unsigned N = 32, W = 5;
  localparam int NODES = 4 * N;
  localparam int RUN = 60000;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, clear = 1'b0;
  logic signed [W-1:0] w_rnd = 5'sd3;
  logic [NODES-1:0] clamp_en = '0, clamp_val = '0, state;
  int checks = 0, failures = 0, n_held = 0, n_ops = 0;

  boltzmann_net #(.CIRCUIT(CIRC_RCA), .NBITS(N), .W(W)) u_rca (
    .clk, .rst_n, .en, .clear, .w_rnd, .clamp_en, .clamp_val, .state);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [N-1:0] a_of(input logic [NODES-1:0] s);
    return s[N-1:0];
  endfunction
  function automatic logic [N-1:0] b_of(input logic [NODES-1:0] s);
    return s[2*N-1:N];
  endfunction
  function automatic logic [N:0] sum_of(input logic [NODES-1:0] s);
    return s[3*N:2*N];   // {Cout, S}
  endfunction

  // mode: 0 forward, 1 subtract, 2 reverse
  task automatic run_op(input int mode, input logic [N-1:0] a, input logic [N-1:0] b);
    logic [N:0] sum;
    bit clamp_ok = 1'b1;
    int first = -1, held = 0;
    sum = {1'b0, a} + {1'b0, b};
    clamp_en = '0; clamp_val = '0;
    clamp_val[N-1:0] = a;
    clamp_val[2*N-1:N] = b;
    clamp_val[3*N:2*N] = sum;
    if (mode != 2) clamp_en[N-1:0] = '1;
    if (mode == 0) clamp_en[2*N-1:N] = '1;
    if (mode != 0) clamp_en[3*N:2*N] = '1;
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    en = 1'b1;
    w_rnd = 5'sd3;
    for (int t = 1; t <= RUN; t++) begin
      @(negedge clk);
      if (t == RUN / 2) w_rnd = 5'sd2;
      if ((state & clamp_en) != (clamp_val & clamp_en)) clamp_ok = 1'b0;
      if ({1'b0, a_of(state)} + {1'b0, b_of(state)} == sum_of(state)) begin
        if (first < 0) first = t;
        if (t > RUN / 2) held++;
      end
    end
    en = 1'b0;
    $display("%s %h + %h = %h: first valid cycle %0d, valid in %0d of the last %0d cycles",
             (mode == 0) ? "forward " : (mode == 1) ? "subtract" : "reverse ",
             a, b, sum, first, held, RUN / 2);
    n_ops++;
    if (held > RUN / 4) n_held++;
    check(clamp_ok, "clamped nodes held");
    check(first > 0, "a valid state was reached");
  endtask

  initial begin
    check(num_nodes(CIRC_RCA, N) == 128, "node count 4 * 32");
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_op(0, 32'h0000_1234, 32'h0000_4321);
    run_op(0, 32'hFFFF_FFFF, 32'h0000_0001);    // carry through all 32 bits
    run_op(0, 32'h5FA2_4450, 32'h2480_0459);
    run_op(0, 32'hFD8D_9D77, 32'hB722_072D);
    run_op(0, 32'h2441_13F3, 32'h776E_FB08);
    run_op(1, 32'hDEAD_BEEF, 32'h1234_5678);
    run_op(1, 32'h8000_0000, 32'h8000_0000);
    run_op(2, 32'h0BAD_F00D, 32'h0000_0FFF);
    $display("runs holding a valid state after the noise step: %0d of %0d", n_held, n_ops);
    check(2 * n_held >= n_ops, "at least half of the runs settle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
