// tb_arta_qtable: checks the reset contents against the Gaussian-like
// linear-decay pre-initialisation computed in floating point (lambda = 1,
// s_min = 1/3, s_max = 8/9, 11 states, 6 actions), checks a few printed
// properties of the Q0 profile (P0 best at severity 0, C1 best at 1, values
// of a state summing to 1), then writes and reads entries.
module tb_arta_qtable;
  import arta_pkg::*;

  logic    clk = 0, rst_n = 0;
  state_t  rd_state = '0, cur_state = '0, wr_state = '0;
  action_t cur_action = '0, wr_action = '0;
  qval_t   rd_row [N_A];
  qval_t   cur_q, wr_data = '0;
  logic    we = 0;
  int checks = 0, failures = 0;
  qval_t   model [N_S][N_A];

  arta_qtable dut (.*);
  always #5 clk = ~clk;

  function automatic real center(input int a);
    real smin, smax, w;
    smin = 1.0 / 3.0;
    smax = 8.0 / 9.0;
    w = (smax - smin) / 4.0;
    if (a == 0) return smin / 2.0;
    if (a == 5) return (smax + 1.0) / 2.0;
    return smin + w * (a - 0.5);
  endfunction

  function automatic real q0(input int k, input int a);
    real s, u, tot;
    s = k / 10.0;
    tot = 0.0;
    for (int i = 0; i < 6; i++) begin
      u = 1.0 - ((s > center(i)) ? s - center(i) : center(i) - s);
      tot += (u > 0.0) ? u : 0.0;
    end
    u = 1.0 - ((s > center(a)) ? s - center(a) : center(a) - s);
    return ((u > 0.0) ? u : 0.0) / tot;
  endfunction

  task automatic expect_eq(input string what, input int got, input int exp_v, input int tol);
    checks++;
    if (got - exp_v > tol || exp_v - got > tol) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp_v);
    end
  endtask

  initial begin
    int tot, best;
    #12 rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < N_S; k++) begin
      rd_state = state_t'(k);
      #1;
      tot = 0;
      best = 0;
      for (int a = 0; a < N_A; a++) begin
        expect_eq($sformatf("Q0(%0d,%0d)", k, a), int'(rd_row[a]),
                  int'(q0(k, a) * 128.0 + 0.5), 1);
        tot += int'(rd_row[a]);
        if (rd_row[a] > rd_row[best]) best = a;
        model[k][a] = rd_row[a];
      end
      expect_eq($sformatf("row %0d sums to 1", k), tot, 128, 3);
      if (k == 0)  expect_eq("P0 best at 0", best, 0, 0);
      if (k == 10) expect_eq("C1 best at 1", best, 5, 0);
    end
    // values read off the published profile at severity 0 and 1
    rd_state = 0; #1;
    expect_eq("Q0(0,P0) ~ 0.345", int'(rd_row[0]), 44, 1);
    rd_state = 10; #1;
    expect_eq("Q0(1,C1) ~ 0.265", int'(rd_row[5]), 34, 1);
    // random writes, compared with a model
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1);
      wr_state  = state_t'($urandom_range(0, N_S - 1));
      wr_action = action_t'($urandom_range(0, N_A - 1));
      wr_data   = qval_t'($urandom);
      if (we) model[wr_state][wr_action] = wr_data;
      @(negedge clk);
      we = 0;
      cur_state  = state_t'($urandom_range(0, N_S - 1));
      cur_action = action_t'($urandom_range(0, N_A - 1));
      rd_state   = cur_state;
      #1;
      expect_eq("cur_q", int'(cur_q), int'(model[cur_state][cur_action]), 0);
      for (int a = 0; a < N_A; a++)
        expect_eq("rd_row", int'(rd_row[a]), int'(model[rd_state][a]), 0);
    end
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
