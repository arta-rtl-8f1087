// arta_policy: action selection for one core.
//
// Exploitation picks the action with the highest Q-value in the row of the
// new severity state (ties go to the lower throttle level). With probability
// epsilon the policy explores instead, choosing uniformly among the TOPK
// actions nearest the optimal action a*(s) (the throttle level closest to
// the severity), as the paper describes; epsilon decays over time. The
// exploration schedule (epsilon = EPS0/256 at reset, minus 1/256 per
// decision, down to a floor of EPS_MIN/256) and the 16-bit LFSR that
// supplies randomness are choices of this design. The floor keeps a trickle
// of exploration alive so that online learning can still move a state away
// from an action chosen in error, e.g. release a benign core from C1.
//
// Interface and timing: action/explored are combinational from q_row and
// state; on a clock edge with step high (a decision is committed) the LFSR
// advances and epsilon decays.
module arta_policy
  import arta_pkg::*;
#(
  parameter int unsigned  EPS0    = EPS_INIT,
  parameter int unsigned  EPS_MIN = EPS_FLOOR,
  parameter int unsigned  K    = TOPK,
  parameter logic [15:0]  SEED = 16'hACE1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  qval_t   q_row [N_A],
  input  state_t  state,
  input  logic    step,
  output action_t action,
  output action_t greedy_action,
  output logic    explored
);

  logic [15:0] lfsr;
  logic [7:0]  eps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= (SEED == 16'h0) ? 16'h1 : SEED;
      eps  <= 8'(EPS0);
    end else if (step) begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      if (eps > 8'(EPS_MIN)) eps <= eps - 8'd1;
    end
  end

  action_t a_opt, lo;
  int      lo_i;

  always_comb begin
    greedy_action = ACT_P0;
    for (int a = 1; a < int'(N_A); a++)
      if (q_row[a] > q_row[greedy_action[$clog2(N_A)-1:0]]) greedy_action = action_t'(a);

    a_opt = opt_action(state);
    lo_i  = int'(a_opt) - (int'(K) - 1) / 2;
    if (lo_i > int'(N_A) - int'(K)) lo_i = int'(N_A) - int'(K);
    if (lo_i < 0) lo_i = 0;
    lo = action_t'(lo_i);

    explored = (lfsr[7:0] < eps);
    if (explored)
      action = lo + action_t'(int'(lfsr[15:8]) % int'(K));
    else
      action = greedy_action;
  end

endmodule
