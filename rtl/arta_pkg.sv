// arta_pkg: types, sizes and fixed-point constants shared by the ARTA
// RowHammer throttling agent.
//
// ARTA sits in the DDR5 memory controller. Each PRE command is filed by the
// requesting core and the target bank into a small FIFO of recent row IDs
// (the CBF). The second-order differences of that row sequence give a
// severity score; the score picks a row of a per-core Q-table, and the
// best-valued action in that row is the processor state (P0..P4 or C1)
// requested for the core. Q-learning refines the table online.
//
// Sizes that follow the paper: 4 cores, 32 banks (8 bank groups x 4 banks),
// 17-bit row IDs (128K rows/bank), 16-entry CBF, 11 severity states,
// 6 actions, 8-bit Q-values, 5-bit state and 4-bit action registers and a
// 64-bit cycle register per bank. T_A = t_REFW = 32 ms, counted here in
// cycles of the 4 GHz core clock (128,000,000).
//
// Design choices of this implementation (the paper gives no number):
//  * severity and actions are kept as integer indices: state k means
//    severity k/10, action j means throttle level j/5;
//  * Q-values are signed 8-bit fixed point with 7 fraction bits;
//  * beta = 1% of a 128K-row bank = 1311 rows;
//  * the pre-initialisation uses lambda = 1, s_min = 1/3, s_max = 8/9,
//    which reproduces the bar heights of the published Q0 profile;
//  * w_r = 1/4, alpha = 1/8, gamma = 1/2, epsilon starts at 26/256 and
//    falls by 1/256 per decision, exploration picks among K = 3 actions.
package arta_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NUM_CORES   = 4;
  localparam int unsigned NUM_BG      = 8;
  localparam int unsigned BANKS_PER_BG = 4;
  localparam int unsigned NUM_BANKS   = NUM_BG * BANKS_PER_BG;   // 32
  localparam int unsigned CORE_W      = $clog2(NUM_CORES);
  localparam int unsigned BG_W        = $clog2(NUM_BG);
  localparam int unsigned BA_W        = $clog2(BANKS_PER_BG);
  localparam int unsigned BANK_W      = BG_W + BA_W;              // 5
  localparam int unsigned ROW_W       = 17;                       // 128K rows
  localparam int unsigned N_F         = 16;                       // CBF depth
  localparam int unsigned N_S         = 11;                       // states
  localparam int unsigned N_A         = 6;                        // actions
  localparam int unsigned STATE_W     = 5;
  localparam int unsigned ACTION_W    = 4;
  localparam int unsigned CYCLE_W     = 64;
  localparam int unsigned Q_W         = 8;
  localparam int unsigned Q_FRAC      = 7;

  // severity levels above zero (state k <-> k/N_LEV) and throttle steps
  // above zero (action j <-> j/A_LEV)
  localparam int unsigned N_LEV       = N_S - 1;                  // 10
  localparam int unsigned A_LEV       = N_A - 1;                  // 5

  // throttling window T_A = t_REFW = 32 ms at 4 GHz
  localparam longint unsigned T_A_CYCLES = 64'd128_000_000;

  // beta: rows an attacker can target per window, 1% of 128K rows
  localparam int unsigned BETA_ROWS   = 1311;

  // sum of |second-order differences|: up to 126 terms (CBF depth 128, the
  // largest size the paper sweeps) of up to 2*(2^ROW_W-1) each
  localparam int unsigned N_F_MAX     = 128;
  localparam int unsigned SUM_W       = ROW_W + 2 + $clog2(N_F_MAX - 2);

  // ------------------------------------------------------ Q-learning knobs
  localparam int WR_Q          = 32;   // w_r = 1/4 in Q-value units (x128)
  localparam int ALPHA_SHIFT   = 3;    // alpha = 1/8
  localparam int GAMMA_SHIFT   = 1;    // gamma = 1/2
  localparam int EPS_INIT      = 26;   // epsilon = 26/256 at reset
  localparam int EPS_FLOOR     = 2;    // epsilon never decays below 2/256
  localparam int TOPK          = 3;    // exploration candidates

  // ---------------------------------------- pre-initialisation (Fig. Q0)
  // Severities and interval bounds in units of 1/SEV_DEN.
  localparam int SEV_DEN    = 360;
  localparam int S_MIN      = 120;     // 1/3
  localparam int S_MAX      = 320;     // 8/9
  localparam int LAMBDA_NUM = 1;
  localparam int LAMBDA_DEN = 1;

  // ----------------------------------------------------------------- types
  typedef logic [CORE_W-1:0]   core_id_t;
  typedef logic [BANK_W-1:0]   bank_id_t;
  typedef logic [ROW_W-1:0]    row_t;
  typedef logic [STATE_W-1:0]  state_t;
  typedef logic [ACTION_W-1:0] action_t;
  typedef logic [CYCLE_W-1:0]  cycle_t;
  typedef logic signed [Q_W-1:0] qval_t;
  typedef logic [SUM_W-1:0]    sev_sum_t;

  // processor states, the action indices
  localparam action_t ACT_P0 = 4'd0;
  localparam action_t ACT_P1 = 4'd1;
  localparam action_t ACT_P2 = 4'd2;
  localparam action_t ACT_P3 = 4'd3;
  localparam action_t ACT_P4 = 4'd4;
  localparam action_t ACT_C1 = 4'd5;

  // a PRE command as the memory controller issues it, with the core ID
  // taken from the request metadata
  typedef struct packed {
    core_id_t          core;
    logic [BG_W-1:0]   bg;
    logic [BA_W-1:0]   ba;
    row_t              row;
  } pre_cmd_t;

  // the per-bank CBF registers (5 + 4 + 64 = 73 bits)
  typedef struct packed {
    state_t  state;
    action_t action;
    cycle_t  cycle;
  } cbf_regs_t;

  // ------------------------------------------------------------- functions
  // Target severity (centre of the preferred interval) of action a.
  function automatic int act_center(input int a);
    int w2;
    if (a == 0)              return S_MIN / 2;
    if (a == int'(N_A) - 1)  return (S_MAX + SEV_DEN) / 2;
    w2 = 2 * (int'(N_A) - 2);
    return S_MIN + ((2 * a - 1) * (S_MAX - S_MIN)) / w2;
  endfunction

  // Unnormalised linear-decay weight max(0, 1 - lambda*|s - centre|).
  function automatic int q0_weight(input int k, input int a);
    int s, d, u;
    s = (k * SEV_DEN) / int'(N_LEV);
    d = s - act_center(a);
    if (d < 0) d = -d;
    u = LAMBDA_DEN * SEV_DEN - LAMBDA_NUM * d;
    return (u < 0) ? 0 : u;
  endfunction

  // Q0(s_k, a) normalised over the actions of state k, rounded to Q-value
  // units.
  function automatic int q0_init(input int k, input int a);
    int sum;
    sum = 0;
    for (int i = 0; i < int'(N_A); i++) sum += q0_weight(k, i);
    if (sum == 0) return 0;
    return (q0_weight(k, a) * (2 << Q_FRAC) + sum) / (2 * sum);
  endfunction

  // Optimal action a*(k): throttle level nearest to severity k/N_LEV,
  // ties to the lower throttle level.
  function automatic action_t opt_action(input state_t k);
    int best, bestd, d;
    best  = 0;
    bestd = 1 << 30;
    for (int j = 0; j < int'(N_A); j++) begin
      d = j * int'(N_LEV) - int'(k) * int'(A_LEV);
      if (d < 0) d = -d;
      if (d < bestd) begin
        bestd = d;
        best  = j;
      end
    end
    return action_t'(best[ACTION_W-1:0]);
  endfunction

endpackage
