// tb_xorshift128p -- self-checking testbench for the xorshift+ generator.
//
// Checks: the first four outputs after reset against constants computed
// offline from the published xorshift128+ recurrence; 2000 further steps
// against a behavioural model in this file; that en = 0 freezes the output;
// and that every one of the 64 output bits is close to 50 % ones over 4096
// samples (the node noise streams must carry no DC bias).
module tb_xorshift128p;
  logic        clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [63:0] rnd;
  int checks = 0, failures = 0;

  xorshift128p dut (.clk(clk), .rst_n(rst_n), .en(en), .rnd(rnd));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
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

  logic [63:0] m0, m1, t, hold;
  logic [63:0] known [4] = '{64'h6fecc3ec50dd6918, 64'h64f301f878dc944a,
                             64'hef1e0891a0de3a6b, 64'h85eecc080656981d};
  int ones [64];

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      check(rnd == known[i], $sformatf("known output %0d: %h", i, rnd));
      en = 1'b1;
      @(negedge clk);
    end
    en = 1'b0;
    // model from the current state
    m0 = dut.s0; m1 = dut.s1;
    for (int i = 0; i < 2000; i++) begin
      en = 1'b1;
      @(negedge clk);
      t  = m0 ^ (m0 << 23);
      m0 = m1;
      m1 = t ^ m1 ^ (t >> 17) ^ (m1 >> 26);
      check(rnd == m0 + m1, $sformatf("step %0d", i));
    end
    en = 1'b0;
    hold = rnd;
    repeat (3) @(negedge clk);
    check(rnd == hold, "output frozen while en = 0");
    // bit balance
    foreach (ones[b]) ones[b] = 0;
    en = 1'b1;
    for (int i = 0; i < 4096; i++) begin
      @(negedge clk);
      for (int b = 0; b < 64; b++) ones[b] += int'(rnd[b]);
    end
    en = 1'b0;
    for (int b = 0; b < 64; b++)
      check(ones[b] > 1848 && ones[b] < 2248, $sformatf("bit %0d ones=%0d of 4096", b, ones[b]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
