// tb_inv_mult_4bit -- the published 4-bit multiplier experiments.
//
// Two 4 x 4 invertible multipliers (48 nodes each) run the simulation
// experiments described for that size:
//   u_w4 (4-bit weights):
//     - forward 3 x 6 for N = 2^20 cycles, noise weight 5 for the first
//       N/2 cycles and 3 after (the published schedule); the most frequent
//       product after the step must be 18, held for at least 1/8 of that
//       half;
//     - forward with a fixed noise weight for eight operand pairs, 2^16
//       cycles each; the product is read as the most frequent output state
//       (mode), which must be the correct product every time;
//   u_w5 (5-bit weights):
//     - reverse with the product clamped to 55 (step at N/2, N = 2^16);
//       the most frequent operand pair after the step must be 5 x 11 or
//       11 x 5.
// The published fixed-noise runs use w = 5 and the factorization 11 -> 5,
// with h and J scaled by a factor the description leaves open. Here the
// weights are the unscaled gate values, and those noise levels are too
// high for a stable mode; w = 3 (fixed) and 5 -> 3 (factorization) are used
// instead, chosen by simulation. Checked as well: clamped terminals never
// move. The reported shares (cycles in the mode state) show how sharply
// each run settles.
module tb_inv_mult_4bit;
  localparam int unsigned NB = 4, CNT_W = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start4 = 1'b0, run4 = 1'b0, start5 = 1'b0, run5 = 1'b0;
  logic signed [3:0] w4_init = 4'sd5, w4_final = 4'sd3;
  logic signed [4:0] w5_init = 5'sd5, w5_final = 5'sd3;
  logic [CNT_W-1:0] len4 = '0, len5 = '0;
  logic [NB-1:0] a_clamp = '0, a_val = '0, b_clamp = '0, b_val = '0;
  logic [2*NB-1:0] y_clamp = '0, y_val = '0;
  logic [NB-1:0] a4, b4, a5, b5;
  logic [2*NB-1:0] y4, y5;
  logic ann4, ann5;
  logic [CNT_W-1:0] cyc4, cyc5;
  logic [3*NB*NB-1:0] st4, st5;
  int checks = 0, failures = 0;

  inv_mult_top #(.NBITS(NB), .W(4), .CNT_W(CNT_W)) u_w4 (
    .clk, .rst_n, .start(start4), .run(run4), .w_init(w4_init), .w_final(w4_final),
    .anneal_len(len4), .a_clamp, .a_val, .b_clamp, .b_val, .y_clamp, .y_val,
    .a_out(a4), .b_out(b4), .y_out(y4), .annealed(ann4), .cycle(cyc4), .node_state(st4));

  inv_mult_top #(.NBITS(NB), .W(5), .CNT_W(CNT_W)) u_w5 (
    .clk, .rst_n, .start(start5), .run(run5), .w_init(w5_init), .w_final(w5_final),
    .anneal_len(len5), .a_clamp, .a_val, .b_clamp, .b_val, .y_clamp, .y_val,
    .a_out(a5), .b_out(b5), .y_out(y5), .annealed(ann5), .cycle(cyc5), .node_state(st5));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
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

  int hist [256];

  function automatic int mode_of(output int count);
    int best = 0;
    count = -1;
    for (int i = 0; i < 256; i++)
      if (hist[i] > count) begin count = hist[i]; best = i; end
    return best;
  endfunction

  // forward on u_w4: histogram of y4 over the cycles from 'from' to 'len'
  task automatic forward4(input int a, input int b, input int len, input int from,
                          output int mode, output int share);
    bit clamp_ok = 1'b1;
    foreach (hist[i]) hist[i] = 0;
    a_clamp = '1; a_val = NB'(a); b_clamp = '1; b_val = NB'(b);
    y_clamp = '0; y_val = '0;
    @(negedge clk);
    start4 = 1'b1;
    @(negedge clk);
    start4 = 1'b0;
    run4 = 1'b1;
    for (int t = 1; t <= len; t++) begin
      @(negedge clk);
      if (a4 != NB'(a) || b4 != NB'(b)) clamp_ok = 1'b0;
      if (t > from) hist[y4]++;
    end
    run4 = 1'b0;
    mode = mode_of(share);
    check(clamp_ok, $sformatf("forward %0d x %0d: clamped operands held", a, b));
  endtask

  initial begin
    automatic int mode, share;
    automatic int pa [8] = '{3, 7, 15, 9, 12, 5, 13, 2};
    automatic int pb [8] = '{6, 7, 15, 4, 11, 0, 10, 14};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 3 x 6, 4-bit weights, noise 5 -> 3 at N/2, N = 2^20
    len4 = CNT_W'(1 << 19);
    forward4(3, 6, 1 << 20, 1 << 19, mode, share);
    $display("forward 3 x 6, w 5 -> 3, N = 2^20: mode %0d, held %0d of %0d cycles",
             mode, share, 1 << 19);
    check(mode == 18, $sformatf("3 x 6: mode %0d", mode));
    check(share >= (1 << 16), "3 x 6: product 18 held for 1/8 of the low-noise half");

    // fixed noise weight: read the product as the mode
    w4_init = 4'sd3; w4_final = 4'sd3;
    for (int k = 0; k < 8; k++) begin
      forward4(pa[k], pb[k], 1 << 16, 0, mode, share);
      $display("forward %0d x %0d, fixed w 3: mode %0d (%0d of %0d cycles)",
               pa[k], pb[k], mode, share, 1 << 16);
      check(mode == pa[k] * pb[k], $sformatf("%0d x %0d: mode %0d", pa[k], pb[k], mode));
    end

    // reverse 55 on the 5-bit-weight instance, 5 -> 3 at N/2, N = 2^16
    begin
      automatic bit clamp_ok = 1'b1;
      int pair, pa_m, pb_m;
      foreach (hist[i]) hist[i] = 0;
      a_clamp = '0; b_clamp = '0; y_clamp = '1; y_val = 8'd55;
      len5 = CNT_W'(1 << 15);
      @(negedge clk);
      start5 = 1'b1;
      @(negedge clk);
      start5 = 1'b0;
      run5 = 1'b1;
      for (int t = 1; t <= (1 << 16); t++) begin
        @(negedge clk);
        if (y5 != 8'd55) clamp_ok = 1'b0;
        if (t > (1 << 15)) hist[{b5, a5}]++;
      end
      run5 = 1'b0;
      pair = mode_of(share);
      pa_m = pair & 15;
      pb_m = pair >> 4;
      $display("reverse 55, w 5 -> 3: mode a=%0d b=%0d (%0d of %0d cycles)",
               pa_m, pb_m, share, 1 << 15);
      check(clamp_ok, "reverse 55: clamped product held");
      check(pa_m * pb_m == 55, $sformatf("reverse 55: mode %0d x %0d", pa_m, pb_m));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
