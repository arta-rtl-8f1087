// tb_arta_release: release of a throttled bank through exploration.
// One core's agent (T_A = 100 cycles) with epsilon held at 64/256
// (EPS0 = EPS_MIN = 64), so that greedy and exploratory choices both occur.
// Bank 0 alternates between a hammering sweep window (severity 1) and a
// window of scattered rows (severity 0). Each window is completed by a PRE
// issued after T_A, so that every window yields exactly one decision.
// Checked for every scattered window, from the relative-severity rule:
//  * after C1 the bank reads state 10 whatever it observes (it stays);
//  * after P3 or P4 (explored at first, later also greedy once learned) it
//    reads state 0: it is released;
//  * in both cases Q(10, a) follows the Bellman update with the reward
//    w_r(0.5 - d_a + d_s), computed here in floating point;
//  * every sweep window reads state 10 and selects P3, P4 or C1.
// Both outcomes must occur at least once.
module tb_arta_release;
  import arta_pkg::*;

  localparam longint unsigned TA = 100;
  localparam int ROUNDS = 40;

  logic     clk = 0, rst_n = 0;
  cycle_t   now = '0;
  logic     pre_valid = 0;
  bank_id_t pre_bank = '0;
  row_t     pre_row = '0;
  logic     dfs_valid, held, explored;
  action_t  dfs_action, cur_action;
  state_t   last_state, last_obs_state;
  logic signed [15:0] last_reward;
  int checks = 0, failures = 0;

  arta_core_agent #(.T_A(TA), .EPS0(64), .EPS_MIN(64), .SEED(16'hBEEF)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) now <= now + 1;

  task automatic expect_true(input string what, input bit c);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // issue one PRE to bank 0; report whether it produced a decision
  task automatic pre(input int r, output bit decided);
    @(negedge clk);
    pre_valid = 1;
    pre_bank = '0;
    pre_row = row_t'(r);
    @(negedge clk);
    pre_valid = 0;
    repeat (2) @(negedge clk);
    decided = dfs_valid;
  endtask

  // fill a whole window: 15 PREs inside T_A (no decision), then wait T_A
  // and complete it with the 16th, which must decide
  task automatic window(input bit sweep, input int round, output action_t act);
    bit d;
    for (int i = 0; i < N_F; i++) begin
      if (i == N_F - 1) repeat (int'(TA)) @(negedge clk);
      pre(sweep ? 2000 + 3 * i : (i * 40503 + 777 + round * 1231) % 131072, d);
      if (i < N_F - 1) expect_true($sformatf("round %0d PRE %0d: no decision", round, i), !d);
    end
    expect_true($sformatf("round %0d: window decided", round), d);
    act = dfs_action;
  endtask

  initial begin
    action_t a_hammer, a_scatter;
    int n_stay, n_release;
    int s_next, a_i;
    real q_old, q_max, r_exp, q_exp, q_got;
    n_stay = 0;
    n_release = 0;
    #12 rst_n = 1;
    for (int round = 0; round < ROUNDS; round++) begin
      window(1, round, a_hammer);
      expect_true($sformatf("round %0d: sweep reads state 10 (%0d)", round, last_state),
                  last_state == state_t'(N_LEV) && last_obs_state == state_t'(N_LEV));
      expect_true($sformatf("round %0d: sweep selects P3..C1 (%0d)", round, a_hammer),
                  a_hammer >= ACT_P3);
      // state the scattered window will lead to, by the rule under test
      s_next = (a_hammer == ACT_C1) ? N_LEV : 0;
      q_old = dut.u_qt.q[N_LEV][a_hammer[$clog2(N_A)-1:0]] / 128.0;
      q_max = -2.0;
      for (int a = 0; a < N_A; a++)
        if (dut.u_qt.q[s_next][a] / 128.0 > q_max) q_max = dut.u_qt.q[s_next][a] / 128.0;
      window(0, round, a_scatter);
      expect_true($sformatf("round %0d: scattered rows observed as state 0", round),
                  last_obs_state == '0);
      if (a_hammer == ACT_C1) begin
        n_stay++;
        expect_true($sformatf("round %0d: after C1 the bank stays at state 10", round),
                    last_state == state_t'(N_LEV));
      end else begin
        n_release++;
        expect_true($sformatf("round %0d: after P%0d the bank is released to state 0",
                              round, a_hammer), last_state == '0);
      end
      // Bellman update of Q(10, a_hammer): a* = C1 for state 10
      a_i = int'(a_hammer);
      r_exp = 0.25 * (0.5 - real'(5 - a_i) / 6.0 + real'(N_LEV - s_next) / 10.0);
      q_exp = q_old + 0.125 * (r_exp + 0.5 * q_max - q_old);
      q_got = dut.u_qt.q[N_LEV][a_hammer[$clog2(N_A)-1:0]] / 128.0;
      expect_true($sformatf("round %0d: Q(10,%0d) %f vs %f", round, a_hammer, q_got, q_exp),
                  q_got - q_exp < 2.0 / 128 && q_exp - q_got < 2.0 / 128);
    end
    expect_true($sformatf("stays at C1 (%0d)", n_stay), n_stay > 0);
    expect_true($sformatf("releases (%0d)", n_release), n_release > 0);
    $display("rounds %0d: stayed at C1 %0d, released %0d; Q(10,P3..C1) = %0d %0d %0d",
             ROUNDS, n_stay, n_release, dut.u_qt.q[N_LEV][3], dut.u_qt.q[N_LEV][4],
             dut.u_qt.q[N_LEV][5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
