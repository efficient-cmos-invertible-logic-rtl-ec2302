// tb_inv_mult_top -- end-to-end testbench of the invertible multiplier.
//
// Runs the multiplier (3 x 3 by default here, to keep it short) through
// every way of using it, each as one complete run: start pulse, high noise
// for half the run, low noise for the other half.
//   forward  : A and B clamped, Y free       (multiplication)
//   reverse  : Y clamped, A and B free       (factorization)
//   divide   : Y and A clamped, B free       (division)
// For every run it checks that clamped terminals never move, that the noise
// step comes exactly anneal_len cycles after start, and that the most
// frequent (A, B, Y) state of the low-noise half satisfies A * B = Y. It
// also reports the share of valid cycles and the cycle after which the
// state stayed valid (convergence). Each mechanism (forward, reverse,
// divide, noise step, restart, convergence) is counted and must occur.
module tb_inv_mult_top;
  localparam int unsigned NB = 3, W = 5, CNT_W = 24;
  localparam int RUN = 4000;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, run = 1'b0;
  logic signed [W-1:0] w_init = 5'sd4, w_final = 5'sd3;
  logic [CNT_W-1:0] anneal_len = CNT_W'(RUN / 2);
  logic [NB-1:0] a_clamp = '0, a_val = '0, b_clamp = '0, b_val = '0, a_out, b_out;
  logic [2*NB-1:0] y_clamp = '0, y_val = '0, y_out;
  logic annealed;
  logic [CNT_W-1:0] cycle;
  logic [3*NB*NB-1:0] node_state;
  int checks = 0, failures = 0;
  int n_fwd = 0, n_rev = 0, n_div = 0, n_step = 0, n_restart = 0, n_conv = 0, n_ops = 0, n_mode_ok = 0;

  inv_mult_top #(.NBITS(NB), .W(W), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

  // state histogram of the low-noise half, indexed by {y, b, a}
  int hist [1 << (4 * NB)];

  task automatic run_op(input string kind, input int a, input int b, input int y,
                        input bit ca, input bit cb, input bit cy);
    int valid = 0, last_bad = -1, best = 0, best_n = -1, step_at = -1;
    bit clamp_ok = 1'b1;
    a_clamp = ca ? '1 : '0; a_val = NB'(a);
    b_clamp = cb ? '1 : '0; b_val = NB'(b);
    y_clamp = cy ? '1 : '0; y_val = (2*NB)'(y);
    foreach (hist[i]) hist[i] = 0;
    start = 1'b1; run = 1'b1;
    @(negedge clk);
    start = 1'b0;
    n_restart++;
    check(cycle == 0, "counter restarted by start");
    for (int c = 1; c < RUN; c++) begin
      if (annealed && step_at < 0) step_at = int'(cycle);
      if (ca && a_out != NB'(a)) clamp_ok = 1'b0;
      if (cb && b_out != NB'(b)) clamp_ok = 1'b0;
      if (cy && y_out != (2*NB)'(y)) clamp_ok = 1'b0;
      if (int'(a_out) * int'(b_out) == int'(y_out)) valid++;
      else last_bad = c;
      if (annealed) hist[{y_out, b_out, a_out}]++;
      @(negedge clk);
    end
    for (int i = 0; i < (1 << (4 * NB)); i++)
      if (hist[i] > best_n) begin best_n = hist[i]; best = i; end
    check(clamp_ok, {kind, ": clamped terminals held"});
    check(step_at == RUN / 2, $sformatf("%s: noise step at cycle %0d", kind, step_at));
    if (step_at == RUN / 2) n_step++;
    n_ops++;
    if ((best & ((1 << NB) - 1)) * ((best >> NB) & ((1 << NB) - 1)) == (best >> (2 * NB))) n_mode_ok++;
    if (last_bad < RUN - 1) n_conv++;
    $display("%s a=%0d b=%0d y=%0d: valid %0d/%0d, mode a=%0d b=%0d y=%0d (%0d/%0d), settled after cycle %0d",
             kind, a, b, y, valid, RUN - 1, best & ((1 << NB) - 1), (best >> NB) & ((1 << NB) - 1),
             best >> (2 * NB), best_n, RUN / 2, last_bad + 1);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run_op("forward", 5, 6, 0, 1, 1, 0); n_fwd++;
    run_op("forward", 3, 7, 0, 1, 1, 0); n_fwd++;
    run_op("forward", 6, 6, 0, 1, 1, 0); n_fwd++;
    run_op("reverse", 0, 0, 35, 0, 0, 1); n_rev++;
    run_op("reverse", 0, 0, 15, 0, 0, 1); n_rev++;
    run_op("reverse", 0, 0, 42, 0, 0, 1); n_rev++;
    run_op("divide",  6, 0, 30, 1, 0, 1); n_div++;
    run_op("divide",  7, 0, 14, 1, 0, 1); n_div++;
    // run = 0 freezes the network
    run = 1'b0;
    begin
      logic [3*NB*NB-1:0] frozen;
      logic [CNT_W-1:0] cfrozen;
      frozen = node_state;
      cfrozen = cycle;
      repeat (20) @(negedge clk);
      check(node_state == frozen && cycle == cfrozen, "run = 0 freezes nodes and counter");
    end
    $display("mechanisms: forward %0d reverse %0d divide %0d noise-step %0d restart %0d settled %0d, valid mode %0d of %0d",
             n_fwd, n_rev, n_div, n_step, n_restart, n_conv, n_mode_ok, n_ops);
    check(n_fwd > 0 && n_rev > 0 && n_div > 0 && n_step > 0 && n_restart > 0 && n_conv > 0,
          "every mechanism occurred");
    check(n_mode_ok * 4 >= n_ops * 3, $sformatf("valid most-frequent state in %0d of %0d runs", n_mode_ok, n_ops));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
