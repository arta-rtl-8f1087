// tb_arta_core_agent: scenario test of one core's agent (T_A = 200 cycles,
// exploration off). Checks, with expected values worked out from the
// paper's formulas:
//  * no decision until a bank's window holds 16 rows;
//  * a sequential hammering sweep (sum of |d2| = 0, severity 1) selects C1,
//    3 cycles after the PRE that completed the window;
//  * further PREs to that bank inside T_A are held back, not decided;
//  * scattered rows (severity 0) select P0;
//  * a window with sum 9000 (s_F = 0.51, state 5) selects P2; after T_A the
//    same severity seen while throttled at P2 is rescaled to s_R = 0.85
//    (state 8) and selects P4, the reward is w_r(0.5 - 0 - 0.3) and
//    Q(5,P2) is updated by the Bellman rule;
//  * after C1 the relative severity is 1 whatever is observed.
module tb_arta_core_agent;
  import arta_pkg::*;

  localparam longint unsigned TA = 200;

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
  int n_dfs = 0, n_held = 0;

  arta_core_agent #(.T_A(TA), .EPS0(0)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    now <= now + 1;
    if (rst_n && dfs_valid) n_dfs <= n_dfs + 1;
    if (rst_n && held)      n_held <= n_held + 1;
  end

  task automatic expect_true(input string what, input bit c);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // issue one PRE and watch the next 3 edges; returns what happened
  task automatic pre(input int b, input int r, output bit decided, output bit was_held);
    @(negedge clk);
    pre_valid = 1;
    pre_bank = bank_id_t'(b);
    pre_row = row_t'(r);
    @(negedge clk);
    pre_valid = 0;
    decided = 0;
    was_held = 0;
    // edges 1 and 2: nothing may appear yet
    expect_true("no early output", !dfs_valid && !held);
    @(negedge clk);
    expect_true("no early output", !dfs_valid && !held);
    @(negedge clk);
    decided = dfs_valid;
    was_held = held;
  endtask

  task automatic wait_cycles(input int n);
    repeat (n) @(negedge clk);
  endtask

  function automatic real ref_q(input real q, input real r, input real m);
    return q + 0.125 * (r + 0.5 * m - q);
  endfunction

  initial begin
    bit d, h;
    int q52_old, q8_max, q52_new;
    real r_exp, q_exp;
    #12 rst_n = 1;

    // --- hammering sweep in bank 3
    for (int i = 0; i < N_F; i++) begin
      pre(3, 5000 + i, d, h);
      if (i < N_F - 1) expect_true($sformatf("no decision before full (%0d)", i), !d && !h);
    end
    expect_true("decision on full window, 3 cycles after PRE", d);
    expect_true("sweep -> C1", dfs_action == ACT_C1 && cur_action == ACT_C1);
    expect_true("sweep -> state 10", last_state == 10 && last_obs_state == 10);
    for (int i = 0; i < 5; i++) begin
      pre(3, 5016 + i, d, h);
      expect_true("held inside T_A", !d && h);
    end

    // --- scattered rows in bank 5
    for (int i = 0; i < N_F; i++) pre(5, (i * 40503 + 777) % 131072, d, h);
    expect_true("scattered -> decision", d);
    expect_true("scattered -> P0, state 0", dfs_action == ACT_P0 && last_state == 0);

    // --- moderate severity in bank 7: ramp with one kink of 9000
    for (int i = 0; i < N_F; i++) pre(7, (i < 8) ? 100 : 100 + 9000 * (i - 7), d, h);
    expect_true("kink -> decision", d);
    expect_true("kink -> state 5, P2", last_obs_state == 5 && last_state == 5 && dfs_action == ACT_P2);

    wait_cycles(int'(TA));
    q52_old = int'(dut.u_qt.q[5][2]);
    q8_max = -1000;
    for (int a = 0; a < N_A; a++) if (int'(dut.u_qt.q[8][a]) > q8_max) q8_max = int'(dut.u_qt.q[8][a]);
    pre(7, 100 + 9000 * 9, d, h);
    expect_true("second kink decision", d);
    expect_true($sformatf("relative severity: obs %0d rel %0d", last_obs_state, last_state),
                last_obs_state == 5 && last_state == 8);
    expect_true("state 8 -> P4", dfs_action == ACT_P4);
    r_exp = 0.25 * (0.5 - 0.0 + (5 - 8) / 10.0);
    expect_true($sformatf("reward %0d/128 vs %f", last_reward, r_exp),
                last_reward / 128.0 - r_exp < 1.0 / 128 && r_exp - last_reward / 128.0 < 1.0 / 128);
    q52_new = int'(dut.u_qt.q[5][2]);
    q_exp = ref_q(q52_old / 128.0, r_exp, q8_max / 128.0);
    expect_true($sformatf("Bellman update Q(5,P2) %0d -> %0d vs %f", q52_old, q52_new, q_exp * 128),
                q52_new / 128.0 - q_exp < 2.0 / 128 && q_exp - q52_new / 128.0 < 2.0 / 128);

    // --- after C1, relative severity is 1 whatever is observed
    pre(3, 99999, d, h);
    expect_true("C1 bank decides after T_A", d);
    expect_true("C1 -> relative state 10", last_state == 10 && last_obs_state < 10);

    // --- back-to-back PREs to two banks, one per cycle
    @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      pre_valid = 1;
      pre_bank = bank_id_t'((i % 2) ? 9 : 10);
      pre_row = row_t'(3000 + i);
      @(negedge clk);
    end
    pre_valid = 0;
    wait_cycles(4);
    expect_true("cur_action after interleaved sweeps is C1", cur_action == ACT_C1);
    expect_true($sformatf("decisions counted %0d", n_dfs), n_dfs == 7);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
