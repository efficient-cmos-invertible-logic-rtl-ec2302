// tb_boltzmann_net -- self-checking testbench for the Boltzmann-machine network.
//
// 1. Hamiltonian check (no simulation): for every elementary gate, for the
//    2-bit ripple-carry adder and for the 2 x 2 multiplier, all 2^N node
//    states are enumerated with the (h, J) the network is built from, and the
//    lowest-energy states must be exactly the rows of the truth table.
// 2. Cycle-exact check: a 2 x 2 multiplier network and a 3-bit ripple-carry
//    adder run with random clamps and noise weights; a model in this file
//    recomputes each node's bipolar local field from the previous states and
//    the generator bits, integrates it and predicts every node state.
// 3. Behaviour: an invertible AND gate run in reverse with Y clamped to 0
//    must visit (0,0), (0,1), (1,0) each a sizeable share of the time and
//    (1,1) rarely; with Y = 1 it must sit at (1,1). A full adder run forward
//    must spend most cycles on the correct (S, Co) for every input.
module tb_boltzmann_net;
  import invlogic_pkg::*;
  localparam int unsigned W = 5, ACC_W = 3;
  localparam int N_M2 = num_nodes(CIRC_MULT, 2), N_RCA = num_nodes(CIRC_RCA, 3);

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, clear = 1'b0;
  logic signed [W-1:0] w_rnd = '0;
  int checks = 0, failures = 0;

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

  // ---------------- networks under test ----------------
  logic [N_M2-1:0]  m2_ce = '0, m2_cv = '0, m2_st;
  logic [N_RCA-1:0] r3_ce = '0, r3_cv = '0, r3_st;
  logic [2:0]       and_ce = '0, and_cv = '0, and_st;
  logic [4:0]       fa_ce = '0, fa_cv = '0, fa_st;

  boltzmann_net #(.CIRCUIT(CIRC_MULT), .NBITS(2), .W(W), .ACC_W(ACC_W)) u_m2 (
    .clk, .rst_n, .en, .clear, .w_rnd, .clamp_en(m2_ce), .clamp_val(m2_cv), .state(m2_st));
  boltzmann_net #(.CIRCUIT(CIRC_RCA), .NBITS(3), .W(W), .ACC_W(ACC_W)) u_r3 (
    .clk, .rst_n, .en, .clear, .w_rnd, .clamp_en(r3_ce), .clamp_val(r3_cv), .state(r3_st));
  boltzmann_net #(.CIRCUIT(CIRC_AND), .NBITS(1), .W(W), .ACC_W(ACC_W)) u_and (
    .clk, .rst_n, .en, .clear, .w_rnd, .clamp_en(and_ce), .clamp_val(and_cv), .state(and_st));
  boltzmann_net #(.CIRCUIT(CIRC_FA), .NBITS(1), .W(W), .ACC_W(ACC_W)) u_fa (
    .clk, .rst_n, .en, .clear, .w_rnd, .clamp_en(fa_ce), .clamp_val(fa_cv), .state(fa_st));

  // ---------------- 1. ground states ----------------
  function automatic int energy2(circuit_e c, int n, int nodes, int unsigned s);
    // returns 2*E = -(2 sum h m + sum_ij J m m)
    node_info_t ni;
    int e = 0, mi, mj;
    for (int i = 0; i < nodes; i++) begin
      ni = node_info(c, n, i);
      mi = s[i] ? 1 : -1;
      e -= 2 * int'(ni.bias) * mi;
      for (int k = 0; k < int'(ni.fan); k++) begin
        mj = s[int'(ni.nbr[k])] ? 1 : -1;
        e -= int'($signed(ni.wt[k])) * mi * mj;
      end
    end
    return e;
  endfunction

  function automatic bit row_valid(circuit_e c, int n, int unsigned s);
    int a, b, y, ci;
    case (c)
      CIRC_AND:     return s[2] == (s[0] & s[1]);
      CIRC_XOR_OR:  return s[2] == (s[0] ^ s[1]) && s[3] == (s[0] | s[1]);
      CIRC_XOR_NOR: return s[2] == (s[0] ^ s[1]) && s[3] == !(s[0] | s[1]);
      CIRC_HA:      return s[2] == (s[0] ^ s[1]) && s[3] == (s[0] & s[1]);
      CIRC_HA_ALT:  return s[2] == (s[0] & s[1]) && s[3] == (s[0] ^ s[1]) && s[4] == !(s[0] | s[1]);
      CIRC_FA:      return {s[4], s[3]} == 2'(s[0] + s[1] + s[2]);
      CIRC_RCA: begin
        a = int'(s & ((1 << n) - 1)); b = int'((s >> n) & ((1 << n) - 1));
        y = int'((s >> (2 * n)) & ((1 << (n + 1)) - 1));
        return a + b == y;
      end
      default: begin
        a = int'(s & ((1 << n) - 1)); b = int'((s >> n) & ((1 << n) - 1));
        y = int'((s >> (2 * n)) & ((1 << (2 * n)) - 1));
        ci = 0;
        return a * b == y;
      end
    endcase
  endfunction

  task automatic ground_states(circuit_e c, int n, int expect_rows);
    int nodes = num_nodes(c, n);
    int emin = 1 << 30, e, nmin = 0, nbad = 0;
    for (int unsigned s = 0; s < (1 << nodes); s++) begin
      e = energy2(c, n, nodes, s);
      if (e < emin) begin emin = e; nmin = 0; nbad = 0; end
      if (e == emin) begin
        nmin++;
        if (!row_valid(c, n, s)) nbad++;
      end
    end
    check(nbad == 0 && nmin == expect_rows,
          $sformatf("%s n=%0d: %0d ground states, %0d invalid", c.name(), n, nmin, nbad));
  endtask

  // ---------------- 2. cycle-exact model ----------------
  int m2_acc [N_M2];
  int r3_acc [N_RCA];


  function automatic int field_of(circuit_e c, int n, int i, logic [127:0] st, bit r, int w);
    node_info_t ni = node_info(c, n, i);
    int f = int'(ni.bias) + w * (r ? 1 : -1);
    for (int k = 0; k < int'(ni.fan); k++)
      f += int'($signed(ni.wt[k])) * (st[int'(ni.nbr[k])] ? 1 : -1);
    return f;
  endfunction

  function automatic int sat(int v);
    if (v > (1 << (ACC_W - 1)) - 1) return (1 << (ACC_W - 1)) - 1;
    if (v < -(1 << (ACC_W - 1)))    return -(1 << (ACC_W - 1));
    return v;
  endfunction

  int cnt [8];
  int fa_ok, fa_tot, exp_s, exp_c, a_in, b_in, c_in;

  initial begin
    // 1. Hamiltonians
    ground_states(CIRC_AND, 1, 4);
    ground_states(CIRC_XOR_OR, 1, 4);
    ground_states(CIRC_XOR_NOR, 1, 4);
    ground_states(CIRC_HA, 1, 4);
    ground_states(CIRC_HA_ALT, 1, 4);
    ground_states(CIRC_FA, 1, 8);
    ground_states(CIRC_RCA, 2, 16);
    ground_states(CIRC_MULT, 2, 16);

    // 2. cycle-exact
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    foreach (m2_acc[i]) m2_acc[i] = -1;
    foreach (r3_acc[i]) r3_acc[i] = -1;
    for (int c = 0; c < 3000; c++) begin
      logic [127:0] st2, st3, rb2, rb3;
      int f;
      if (c % 100 == 0) begin
        w_rnd = W'($urandom_range(0, 6));
        m2_ce = N_M2'($urandom) & N_M2'(12'h0FF);
        m2_cv = N_M2'($urandom);
        r3_ce = N_RCA'($urandom) & N_RCA'(12'h3FF);
        r3_cv = N_RCA'($urandom);
      end
      en = ($urandom_range(0, 9) != 0);
      #1;
      for (int i = 0; i < N_M2; i++)
        check(m2_st[i] == (m2_ce[i] ? m2_cv[i] : (m2_acc[i] >= 0)), $sformatf("mult2 node %0d cycle %0d", i, c));
      for (int i = 0; i < N_RCA; i++)
        check(r3_st[i] == (r3_ce[i] ? r3_cv[i] : (r3_acc[i] >= 0)), $sformatf("rca3 node %0d cycle %0d", i, c));
      st2 = 128'(m2_st); st3 = 128'(r3_st);
      rb2 = 128'(u_m2.rnd_bits); rb3 = 128'(u_r3.rnd_bits);
      if (en) begin
        for (int i = 0; i < N_M2; i++) begin
          f = field_of(CIRC_MULT, 2, i, st2, rb2[i], int'(w_rnd));
          m2_acc[i] = sat(m2_acc[i] + f);
        end
        for (int i = 0; i < N_RCA; i++) begin
          f = field_of(CIRC_RCA, 3, i, st3, rb3[i], int'(w_rnd));
          r3_acc[i] = sat(r3_acc[i] + f);
        end
      end
      @(negedge clk);
    end
    en = 1'b1;

    // 3a. AND in reverse, Y = 0
    w_rnd = 5'sd2;
    and_ce = 3'b100; and_cv = 3'b000;
    foreach (cnt[i]) cnt[i] = 0;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      cnt[and_st[1:0]]++;
    end
    $display("AND reverse Y=0: (0,0) %0d (0,1) %0d (1,0) %0d (1,1) %0d", cnt[0], cnt[2], cnt[1], cnt[3]);
    for (int v = 0; v < 3; v++)
      check(cnt[v] > 3000 && cnt[v] < 10000, $sformatf("AND Y=0 state %0d share %0d/20000", v, cnt[v]));
    check(cnt[3] < 2000, "AND Y=0 invalid (1,1) rare");
    // 3b. Y = 1
    and_cv = 3'b100;
    foreach (cnt[i]) cnt[i] = 0;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      cnt[and_st[1:0]]++;
    end
    $display("AND reverse Y=1: (1,1) %0d of 5000", cnt[3]);
    check(cnt[3] > 4000, "AND Y=1 settles at (1,1)");

    // 3c. full adder forward, every input row
    for (int v = 0; v < 8; v++) begin
      a_in = v & 1; b_in = (v >> 1) & 1; c_in = v >> 2;
      fa_ce = 5'b00111; fa_cv = 5'(v);
      exp_s = (a_in + b_in + c_in) & 1; exp_c = (a_in + b_in + c_in) >> 1;
      fa_ok = 0;
      for (int c = 0; c < 2000; c++) begin
        @(negedge clk);
        if (fa_st[3] == exp_s[0] && fa_st[4] == exp_c[0]) fa_ok++;
      end
      $display("FA forward %0d: correct %0d of 2000", v, fa_ok);
      check(fa_ok > 1400, $sformatf("FA forward input %0d correct %0d/2000", v, fa_ok));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
