// tb_inv_mult_factor_sweep -- factorization of every 5 x 5 product.
//
// The multiplier runs at its default parameters (5 x 5, 75 nodes) in
// reverse: for each distinct product y = a * b with 0 <= a, b < 32 (340
// values) the product is clamped, start is pulsed and the network runs for
// at most 8192 cycles (the worst-case cycle budget of the fabricated chip),
// noise weight 11 for the first 4096 cycles and 5 after (the schedule of the
// published factorization example). A value counts as converged at the first
// cycle in which the free operand terminals show a factor pair,
// a_out * b_out == y; at this noise level the network keeps moving after
// that, so the factor pair has to be taken at that cycle. The 66 values
// that are a product of two primes below 32 form the "prime" subset.
//
// Reported: converged count, mean and worst convergence cycles for all
// values and for the prime subset, and a histogram in 512-cycle bins, to be
// set against the published chip (mean 430 / 219 cycles, worst case 8192 /
// 2048, every value converged). Checked: the swept sets have 340 and 66
// members, the clamped product terminals never move, every converged run
// really shows a factor pair, every value converges within the budget and
// the mean convergence time stays below 1024 cycles.
module tb_inv_mult_factor_sweep;
  localparam int unsigned NB = 5, W = 5, CNT_W = 24;
  localparam int RUN = 8192;
  localparam int NBIN = RUN / 512;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, run = 1'b0;
  logic signed [W-1:0] w_init = 5'sd11, w_final = 5'sd5;
  logic [CNT_W-1:0] anneal_len = CNT_W'(RUN / 2);
  logic [NB-1:0] a_clamp = '0, a_val = '0, b_clamp = '0, b_val = '0, a_out, b_out;
  logic [2*NB-1:0] y_clamp = '0, y_val = '0, y_out;
  logic annealed;
  logic [CNT_W-1:0] cycle;
  logic [3*NB*NB-1:0] node_state;
  int checks = 0, failures = 0;

  inv_mult_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (3_500_000) @(posedge clk);
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

  function automatic bit is_prime(input int p);
    if (p < 2) return 1'b0;
    for (int d = 2; d * d <= p; d++) if (p % d == 0) return 1'b0;
    return 1'b1;
  endfunction

  bit general_set [1024];
  bit prime_set   [1024];
  int hist_all [NBIN];
  int hist_pr  [NBIN];

  // one reverse run; returns the convergence cycle, or -1
  task automatic factorize(input int y, output int conv);
    bit clamp_ok = 1'b1;
    conv = -1;
    y_clamp = '1; y_val = (2*NB)'(y);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    run = 1'b1;
    for (int t = 1; t <= RUN; t++) begin
      @(negedge clk);
      if (y_out != (2*NB)'(y)) clamp_ok = 1'b0;
      if (int'(a_out) * int'(b_out) == y) begin
        conv = t;
        break;
      end
    end
    run = 1'b0;
    check(clamp_ok, $sformatf("product %0d: clamped terminals moved", y));
    if (conv >= 0)
      check(int'(a_out) * int'(b_out) == y,
            $sformatf("product %0d: converged state %0d x %0d", y, a_out, b_out));
  endtask

  initial begin
    automatic int n_all = 0, n_pr = 0, c_all = 0, c_pr = 0;
    automatic int s_all = 0, s_pr = 0, w_all = 0, w_pr = 0;
    int conv;
    foreach (general_set[i]) begin general_set[i] = 1'b0; prime_set[i] = 1'b0; end
    foreach (hist_all[i]) begin hist_all[i] = 0; hist_pr[i] = 0; end
    for (int a = 0; a < 32; a++)
      for (int b = 0; b < 32; b++) begin
        general_set[a * b] = 1'b1;
        if (is_prime(a) && is_prime(b)) prime_set[a * b] = 1'b1;
      end
    for (int y = 0; y < 1024; y++) begin
      n_all += int'(general_set[y]);
      n_pr  += int'(prime_set[y]);
    end
    check(n_all == 340, $sformatf("general set has %0d values", n_all));
    check(n_pr == 66, $sformatf("prime set has %0d values", n_pr));

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int y = 0; y < 1024; y++) begin
      if (!general_set[y]) continue;
      factorize(y, conv);
      if (conv < 0) begin
        $display("product %0d: no factor pair within %0d cycles", y, RUN);
        continue;
      end
      c_all++; s_all += conv; if (conv > w_all) w_all = conv;
      hist_all[(conv - 1) / 512]++;
      if (prime_set[y]) begin
        c_pr++; s_pr += conv; if (conv > w_pr) w_pr = conv;
        hist_pr[(conv - 1) / 512]++;
      end
    end

    $display("general: %0d of %0d converged, mean %0d cycles, worst %0d",
             c_all, n_all, (c_all > 0) ? s_all / c_all : 0, w_all);
    $display("prime:   %0d of %0d converged, mean %0d cycles, worst %0d",
             c_pr, n_pr, (c_pr > 0) ? s_pr / c_pr : 0, w_pr);
    for (int i = 0; i < NBIN; i++)
      $display("cycles %5d..%5d: general %3d prime %3d", i * 512 + 1, (i + 1) * 512,
               hist_all[i], hist_pr[i]);
    check(c_all == n_all, $sformatf("%0d of %0d products converged", c_all, n_all));
    check(c_pr == n_pr, $sformatf("%0d of %0d prime products converged", c_pr, n_pr));
    check(c_all > 0 && s_all / c_all < 1024, "mean convergence time below 1024 cycles");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
