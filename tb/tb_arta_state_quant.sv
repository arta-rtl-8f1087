// tb_arta_state_quant: checks observed and relative severity states against
// a reference that evaluates the paper's formulas with integer division:
//   s_F = (D - S)/D for S <= D else 0, with D = beta*(N_F-2);
//   s_R = 1 for C1, otherwise min(1, s_F / (1 - j/5));
//   state = floor(10 * s).
module tb_arta_state_quant;
  import arta_pkg::*;

  localparam longint D = longint'(BETA_ROWS) * (N_F - 2);

  sev_sum_t sum;
  logic     full;
  action_t  prev_action;
  state_t   obs_state, rel_state;
  int checks = 0, failures = 0;

  arta_state_quant #(.DEPTH(N_F), .BETA(BETA_ROWS)) dut (.*);

  function automatic int ref_state(input longint s, input int j);
    longint num, den, k;
    if (j == A_LEV) return N_LEV;
    if (s >= D) return 0;
    // 10 * (D-s)/D / ((5-j)/5)
    num = longint'(N_LEV) * A_LEV * (D - s);
    den = (longint'(A_LEV) - longint'(j)) * D;
    k   = num / den;
    return (k > N_LEV) ? N_LEV : int'(k);
  endfunction

  task automatic check_one(input longint s, input int j, input bit f);
    int eo, er;
    sum = sev_sum_t'(s);
    prev_action = action_t'(j);
    full = f;
    #1;
    eo = f ? ref_state(s, 0) : 0;
    er = f ? ref_state(s, j) : 0;
    checks++;
    if (int'(obs_state) != eo || int'(rel_state) != er) begin
      failures++;
      $display("FAIL S=%0d a=%0d full=%0d: obs=%0d rel=%0d expected %0d %0d",
               s, j, f, obs_state, rel_state, eo, er);
    end
  endtask

  initial begin
    // exact bin edges and their neighbours
    for (int j = 0; j < N_A; j++)
      for (int k = 0; k <= N_LEV; k++) begin
        longint edge_s;
        edge_s = (D * (N_LEV - k)) / N_LEV;
        check_one(edge_s, j, 1);
        check_one(edge_s + 1, j, 1);
        if (edge_s > 0) check_one(edge_s - 1, j, 1);
      end
    check_one(0, 0, 1);            // perfect repetition: severity 1
    check_one(D * 3, 0, 1);        // beyond beta: severity 0
    check_one(0, 0, 0);            // window not full: 0
    check_one(9000, 2, 1);         // s_F = 0.51 throttled at P2 -> 0.85
    for (int t = 0; t < 2000; t++)
      check_one(longint'($urandom_range(0, 2 * D)), $urandom_range(0, N_A - 1), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
