// tb_pbit_neuron -- self-checking testbench for one stochastic neuron.
//
// The neuron is driven with random neighbour bits, random weights, a random
// noise bit, noise weight and bias. A reference model in this file computes
// the bipolar local field directly, I = h + sum J_k m_k + w_rnd r with
// m, r in {-1,+1} (no AND/leak encoding), integrates it into a saturating
// signed ACC_W-bit accumulator and takes the sign; output and accumulator are
// compared every cycle. Also checked: clamping overrides the output at once,
// clear restarts the accumulator at -1, en = 0 holds it, and both saturation
// limits are reached during the run.
module tb_pbit_neuron;
  localparam int unsigned FANIN = 4, W = 5, ACC_W = 4, LEAK_W = W + 4;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, clear = 1'b0;
  logic [FANIN-1:0] in_bits;
  logic signed [W-1:0] weights [FANIN];
  logic signed [W-1:0] w_rnd;
  logic rnd, clamp_en, clamp_val, out;
  logic signed [LEAK_W-1:0] leak;
  logic signed [ACC_W-1:0] acc;
  int checks = 0, failures = 0;
  int h, model_acc, field, sat_hi, sat_lo;

  pbit_neuron #(.FANIN(FANIN), .W(W), .ACC_W(ACC_W), .LEAK_W(LEAK_W)) dut (.*);

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

  function automatic int jsum();
    int s = 0;
    for (int k = 0; k < FANIN; k++) s += int'(weights[k]);
    return s;
  endfunction

  initial begin
    in_bits = '0; rnd = 1'b0; clamp_en = 1'b0; clamp_val = 1'b0;
    w_rnd = '0; leak = '0;
    foreach (weights[k]) weights[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(acc == -1 && out == 1'b0, "reset state acc=-1, out=0");
    model_acc = -1; sat_hi = 0; sat_lo = 0;
    for (int c = 0; c < 4000; c++) begin
      // new random stimulus; the node's constants change only every 64 cycles
      if (c % 64 == 0) begin
        foreach (weights[k]) weights[k] = W'($urandom_range(0, 8) - 4);
        h     = $urandom_range(0, 10) - 5;
        w_rnd = W'($urandom_range(0, 11));
        leak  = LEAK_W'(h - jsum());
      end
      in_bits  = FANIN'($urandom);
      rnd      = $urandom_range(0, 1);
      en       = ($urandom_range(0, 7) != 0);
      clamp_en = ($urandom_range(0, 9) == 0);
      clamp_val = $urandom_range(0, 1);
      #1;
      check(out == (clamp_en ? clamp_val : (model_acc >= 0)), $sformatf("out at cycle %0d", c));
      field = h + int'(w_rnd) * (rnd ? 1 : -1);
      for (int k = 0; k < FANIN; k++) field += int'(weights[k]) * (in_bits[k] ? 1 : -1);
      @(negedge clk);
      if (en) begin
        model_acc += field;
        if (model_acc > (1 << (ACC_W - 1)) - 1) begin model_acc = (1 << (ACC_W - 1)) - 1; sat_hi++; end
        if (model_acc < -(1 << (ACC_W - 1)))    begin model_acc = -(1 << (ACC_W - 1));    sat_lo++; end
      end
      check(int'(acc) == model_acc, $sformatf("acc %0d model %0d at cycle %0d", acc, model_acc, c));
    end
    check(sat_hi > 0 && sat_lo > 0, "both saturation limits reached");
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    clamp_en = 1'b0;
    check(acc == -1 && out == 1'b0, "clear restarts accumulator at -1");
    $display("saturations: high %0d low %0d", sat_hi, sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
