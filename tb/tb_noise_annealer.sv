// tb_noise_annealer -- self-checking testbench for the noise schedule.
//
// Checks, cycle by cycle against an independent count: w_rnd equals w_init
// for exactly anneal_len enabled cycles after start and w_final afterwards;
// cycles with en = 0 do not count; a second start restarts the schedule;
// the cycle counter saturates instead of wrapping.
module tb_noise_annealer;
  localparam int unsigned W = 5, CNT_W = 6;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, en = 1'b0;
  logic signed [W-1:0] w_init = 5'sd11, w_final = 5'sd5, w_rnd;
  logic [CNT_W-1:0] anneal_len = 6'd20, cycle;
  logic annealed;
  int checks = 0, failures = 0;
  int n_en, switches;

  noise_annealer #(.W(W), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
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

  task automatic run_schedule(input int len, input int gaps);
    logic prev;
    anneal_len = CNT_W'(len);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    n_en = 0;
    prev = 1'b0;
    for (int c = 0; c < 3 * len + 10; c++) begin
      en = (gaps != 0) ? ($urandom_range(0, 3) != 0) : 1'b1;
      check(cycle == CNT_W'(n_en), $sformatf("cycle %0d vs %0d", cycle, n_en));
      check(w_rnd == ((n_en < len) ? w_init : w_final),
            $sformatf("len %0d after %0d enabled cycles: w_rnd %0d", len, n_en, w_rnd));
      check(annealed == (n_en >= len), "annealed flag");
      if (annealed && !prev) switches++;
      prev = annealed;
      @(negedge clk);
      if (en && n_en < (1 << CNT_W) - 1) n_en++;
    end
  endtask

  initial begin
    switches = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run_schedule(20, 0);
    run_schedule(7, 1);
    w_init = -5'sd3; w_final = 5'sd2;
    run_schedule(40, 1);   // runs past 63: counter saturation
    check(cycle == '1, "counter saturates");
    check(switches == 3, $sformatf("one noise step per run, got %0d", switches));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
