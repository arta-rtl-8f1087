// arta_learner: reward and Bellman update for the pair (s_t, a_t) that the
// CBF registers recorded at the previous decision of a bank.
//
//   d_a = |a_t - a*(s_t)| / N_A          (action indices, a* = nearest level)
//   d_s = s_t - s_{t+1}                  (severities k/N_LEV)
//   r   = w_r * (0.5 - d_a + d_s)
//   Q(s_t,a_t) <- Q + alpha * (r + gamma * max_a' Q(s_{t+1},a') - Q)
//
// The formulas are the paper's. In integers the reward is
// WR_Q * (N_A*N_LEV - 2*N_LEV*|a_t-a*| + 2*N_A*(s_t - s_{t+1})) / (2*N_A*N_LEV)
// in Q-value units; alpha and gamma are powers of two (shifts), and the
// updated value saturates to the signed 8-bit range. w_r, alpha and gamma
// are this design's choices. Purely combinational.
module arta_learner
  import arta_pkg::*;
(
  input  state_t  s_t,
  input  action_t a_t,
  input  state_t  s_next,
  input  qval_t   q_cur,        // Q(s_t, a_t)
  input  qval_t   q_next_max,   // max_a' Q(s_{t+1}, a')
  output logic signed [15:0] reward,
  output qval_t   q_new
);

  localparam int RDEN = 2 * int'(N_A) * int'(N_LEV);

  int          adist, num, target, td, upd;
  action_t     a_opt;

  always_comb begin
    a_opt  = opt_action(s_t);
    adist   = int'(a_t) - int'(a_opt);
    if (adist < 0) adist = -adist;
    num    = int'(N_A) * int'(N_LEV) - 2 * int'(N_LEV) * adist
           + 2 * int'(N_A) * (int'(s_t) - int'(s_next));
    reward = 16'((WR_Q * num) / RDEN);
    target = int'(reward) + (int'(q_next_max) >>> GAMMA_SHIFT);
    td     = target - int'(q_cur);
    upd    = int'(q_cur) + (td >>> ALPHA_SHIFT);
    if (upd > 127)       q_new = qval_t'(127);
    else if (upd < -128) q_new = qval_t'(-128);
    else                 q_new = qval_t'(upd);
  end

endmodule
