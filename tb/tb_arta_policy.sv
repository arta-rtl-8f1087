// tb_arta_policy: checks greedy selection (highest Q-value, ties to the
// lower throttle level) with exploration switched off, and with exploration
// on checks that exploratory choices stay among the K = 3 actions nearest
// the optimal action, that all K are used, and that epsilon decays to zero
// so that exploration stops after EPS0 decisions. A third instance with a
// floor EPS_MIN = 4 must keep exploring at about 4/256 after its decay.
module tb_arta_policy;
  import arta_pkg::*;

  logic    clk = 0, rst_n = 0;
  qval_t   q_row [N_A];
  state_t  state;
  logic    step = 0;
  action_t act_g, act_e, greedy_g, greedy_e;
  action_t act_f, greedy_f;
  logic    expl_g, expl_e, expl_f;
  int checks = 0, failures = 0;

  // exploration off
  arta_policy #(.EPS0(0)) dut_g (.clk, .rst_n, .q_row, .state, .step,
    .action(act_g), .greedy_action(greedy_g), .explored(expl_g));
  // exploration on, epsilon = 200/256 at reset
  arta_policy #(.EPS0(200), .EPS_MIN(0), .SEED(16'h1234)) dut_e (.clk, .rst_n, .q_row, .state, .step,
    .action(act_e), .greedy_action(greedy_e), .explored(expl_e));
  // exploration with a floor: 20/256 decaying to 4/256
  arta_policy #(.EPS0(20), .EPS_MIN(4), .SEED(16'h5A5A)) dut_f (.clk, .rst_n, .q_row, .state, .step,
    .action(act_f), .greedy_action(greedy_f), .explored(expl_f));

  always #5 clk = ~clk;

  task automatic expect_true(input string what, input bit c);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int ref_opt(input int k);
    // nearest throttle level j/5 to k/10, ties low
    return k / 2;
  endfunction

  initial begin
    int best, n_expl, lo, n_floor;
    int seen [N_A];
    for (int a = 0; a < N_A; a++) seen[a] = 0;
    state = '0;
    for (int a = 0; a < N_A; a++) q_row[a] = '0;
    #12 rst_n = 1;
    // greedy selection on random rows
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int a = 0; a < N_A; a++) q_row[a] = qval_t'($urandom_range(0, 7) * 16 - 64);
      state = state_t'($urandom_range(0, N_LEV));
      #1;
      best = 0;
      for (int a = 1; a < N_A; a++) if (q_row[a] > q_row[best]) best = a;
      expect_true($sformatf("greedy %0d vs %0d", act_g, best), int'(act_g) == best && !expl_g);
      expect_true("greedy output", int'(greedy_e) == best);
    end
    // exploration: 200 decisions
    n_expl = 0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int a = 0; a < N_A; a++) q_row[a] = qval_t'($urandom_range(0, 127));
      state = state_t'($urandom_range(0, N_LEV));
      #1;
      lo = ref_opt(int'(state)) - 1;
      if (lo < 0) lo = 0;
      if (lo > N_A - 3) lo = N_A - 3;
      if (expl_e) begin
        n_expl++;
        seen[int'(act_e) - lo]++;
        expect_true($sformatf("explored action %0d in [%0d,%0d]", act_e, lo, lo + 2),
                    int'(act_e) >= lo && int'(act_e) <= lo + 2);
        if (t >= 200) expect_true("no exploration after decay", 0);
      end else begin
        expect_true("non-explored is greedy", act_e == greedy_e);
      end
      step = 1;
      @(negedge clk);
      step = 0;
    end
    expect_true($sformatf("explored %0d times", n_expl), n_expl > 20);
    for (int i = 0; i < 3; i++) expect_true($sformatf("candidate %0d used", i), seen[i] > 0 || i >= N_A);
    // epsilon has decayed to 0 after 200 steps: no more exploration
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      for (int a = 0; a < N_A; a++) q_row[a] = qval_t'($urandom_range(0, 127));
      #1;
      expect_true("exploration stopped", !expl_e);
      step = 1;
      @(negedge clk);
      step = 0;
    end
    // floor: after 300 steps dut_f sits at epsilon = 4/256 and keeps exploring
    expect_true($sformatf("epsilon floor reached (%0d)", dut_f.eps), dut_f.eps == 8'd4);
    n_floor = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      for (int a = 0; a < N_A; a++) q_row[a] = qval_t'($urandom_range(0, 127));
      state = state_t'($urandom_range(0, N_LEV));
      #1;
      lo = ref_opt(int'(state)) - 1;
      if (lo < 0) lo = 0;
      if (lo > N_A - 3) lo = N_A - 3;
      if (expl_f) begin
        n_floor++;
        expect_true($sformatf("floor exploration %0d in [%0d,%0d]", act_f, lo, lo + 2),
                    int'(act_f) >= lo && int'(act_f) <= lo + 2);
      end else begin
        expect_true("floor: non-explored is greedy", act_f == greedy_f);
      end
      expect_true("decayed instance stays greedy", !expl_e);
      step = 1;
      @(negedge clk);
      step = 0;
    end
    // expected 4000 * 4/256 = 62.5
    expect_true($sformatf("explorations at the floor (%0d of 4000)", n_floor), n_floor >= 25 && n_floor <= 120);
    expect_true("floor holds", dut_f.eps == 8'd4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
