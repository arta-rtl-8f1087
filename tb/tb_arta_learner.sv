// tb_arta_learner: checks the reward and the Bellman update against the
// paper's formulas evaluated in floating point:
//   r = w_r (0.5 - |a_t - a*(s_t)|/N_A + (s_t - s_{t+1})/10),  w_r = 1/4
//   Q' = Q + alpha (r + gamma max Q(s_{t+1},.) - Q), alpha = 1/8, gamma = 1/2
// with a* the throttle level (j/5) nearest the severity (k/10), ties low.
// Q-values are in units of 1/128; the tolerance covers the fixed-point
// truncation of the hardware.
module tb_arta_learner;
  import arta_pkg::*;

  state_t  s_t, s_next;
  action_t a_t;
  qval_t   q_cur, q_next_max, q_new;
  logic signed [15:0] reward;
  int checks = 0, failures = 0;

  arta_learner dut (.*);

  function automatic int ref_opt(input int k);
    real best_d, d;
    int best;
    best = 0;
    best_d = 10.0;
    for (int j = 0; j < 6; j++) begin
      d = j / 5.0 - k / 10.0;
      if (d < 0) d = -d;
      if (d < best_d - 1e-9) begin
        best_d = d;
        best = j;
      end
    end
    return best;
  endfunction

  function automatic real fabs(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  task automatic run(input int st, input int at, input int sn, input int qc, input int qm);
    real r, da, ds, qn;
    int  ao;
    s_t = state_t'(st); a_t = action_t'(at); s_next = state_t'(sn);
    q_cur = qval_t'(qc); q_next_max = qval_t'(qm);
    #1;
    ao = ref_opt(st);
    da = ((at > ao) ? at - ao : ao - at) / 6.0;
    ds = (st - sn) / 10.0;
    r  = 0.25 * (0.5 - da + ds);
    qn = qc / 128.0 + 0.125 * (r + 0.5 * (qm / 128.0) - qc / 128.0);
    if (qn > 127.0 / 128.0) qn = 127.0 / 128.0;
    if (qn < -1.0) qn = -1.0;
    checks++;
    if (fabs(reward / 128.0 - r) > 1.0 / 128.0) begin
      failures++;
      $display("FAIL reward s=%0d a=%0d s'=%0d: %0d/128 expected %f", st, at, sn, reward, r);
    end
    checks++;
    if (fabs(q_new / 128.0 - qn) > 2.0 / 128.0) begin
      failures++;
      $display("FAIL q_new s=%0d a=%0d s'=%0d q=%0d m=%0d: %0d/128 expected %f",
               st, at, sn, qc, qm, q_new, qn);
    end
  endtask

  initial begin
    // reward extremes of the paper's range [-1.5 w_r, 1.5 w_r]
    run(10, 0, 0, 0, 0);     // d_a = 5/6, d_s = +1
    run(0, 5, 10, 0, 0);     // d_a = 5/6, d_s = -1
    run(10, 5, 0, 0, 0);     // optimal action, severity fell to 0: best case
    run(4, 2, 4, 20, 30);    // optimal action, no change: r = 0.125
    // saturation
    run(10, 5, 0, 127, 127);
    run(0, 5, 10, -128, -128);
    for (int t = 0; t < 3000; t++)
      run($urandom_range(0, 10), $urandom_range(0, 5), $urandom_range(0, 10),
          $urandom_range(0, 255) - 128, $urandom_range(0, 255) - 128);
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
