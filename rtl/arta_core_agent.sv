// arta_core_agent: the ARTA agent of one core.
//
// A three-stage pipeline handles one PRE command of this core per cycle:
//   A  (cycle of pre_valid) the row ID is pushed into the bank's CBF FIFO;
//   B  the bank's updated window is read and the sum of absolute
//      second-order differences is computed and registered;
//   C  the bank's registers (s_t, a_t, cycle of the last decision) are read.
//      If the window is full and at least T_A cycles have passed since that
//      decision (the ACPI minimum delay the paper enforces with the stored
//      cycle), a decision is made: the relative severity gives s_{t+1}, the
//      policy picks a_{t+1} from the Q-table row of s_{t+1}, Q(s_t,a_t) is
//      updated with the reward, and the registers are overwritten with
//      (s_{t+1}, a_{t+1}, now). Otherwise the PRE only fills the FIFO and,
//      if the window is full, is counted as held back.
// The decision is registered: dfs_valid/dfs_action appear 3 cycles after the
// PRE that caused them (PRE in cycle 0, pulse in cycle 3), and cur_action
// holds the processor state last requested for the core. Events to the same
// bank back to back are safe: stage C reads the registers that the previous
// stage C wrote, and the Q-table entry it updated.
// EPS0 and EPS_MIN set the exploration schedule (see arta_policy).
// NF is the CBF depth (16 in the paper's chosen configuration; its
// sensitivity study sweeps 8 to 128). The order of the steps follows the paper; the pipelining, the full-window
// rule and the use of the per-bank cycle register as the T_A gate are this
// design's choices.
module arta_core_agent
  import arta_pkg::*;
#(
  parameter longint unsigned T_A   = T_A_CYCLES,
  parameter int unsigned     NF    = N_F,
  parameter int unsigned     EPS0  = EPS_INIT,
  parameter int unsigned     EPS_MIN = EPS_FLOOR,
  parameter logic [15:0]     SEED  = 16'hACE1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  cycle_t    now,
  input  logic      pre_valid,
  input  bank_id_t  pre_bank,
  input  row_t      pre_row,
  output logic      dfs_valid,      // one-cycle pulse per decision
  output action_t   dfs_action,     // a_{t+1} of that decision
  output action_t   cur_action,     // processor state last requested
  output state_t    last_state,     // s_{t+1} of the last decision
  output state_t    last_obs_state, // observed (unscaled) state of it
  output logic      held,           // pulse: full window, decision held by T_A
  output logic      explored,       // pulse with dfs_valid: exploratory choice
  output logic signed [15:0] last_reward  // reward of the last Q update
);

  // stage A -> B
  logic     s1_valid;
  bank_id_t s1_bank;
  cycle_t   s1_cycle;
  // stage B -> C
  logic     s2_valid;
  bank_id_t s2_bank;
  cycle_t   s2_cycle;
  sev_sum_t s2_sum;
  logic     s2_full;

  row_t      win_rows [NF];
  logic      win_full;
  cbf_regs_t rd_regs;
  logic      regs_we;
  cbf_regs_t regs_wdata;
  sev_sum_t  sum_b;

  arta_cbf #(.BANKS(NUM_BANKS), .DEPTH(NF), .T_A(T_A)) u_cbf (
    .clk, .rst_n,
    .push_valid   (pre_valid),
    .push_bank    (pre_bank),
    .push_row     (pre_row),
    .win_bank     (s1_bank),
    .win_rows, .win_full,
    .regs_rd_bank (s2_bank),
    .rd_regs,
    .regs_we,
    .regs_bank    (s2_bank),
    .regs_wdata
  );

  arta_severity #(.DEPTH(NF)) u_sev (.rows(win_rows), .sum(sum_b));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_bank  <= '0;
      s1_cycle <= '0;
      s2_valid <= 1'b0;
      s2_bank  <= '0;
      s2_cycle <= '0;
      s2_sum   <= '0;
      s2_full  <= 1'b0;
    end else begin
      s1_valid <= pre_valid;
      s1_bank  <= pre_bank;
      s1_cycle <= now;
      s2_valid <= s1_valid;
      s2_bank  <= s1_bank;
      s2_cycle <= s1_cycle;
      s2_sum   <= sum_b;
      s2_full  <= win_full;
    end
  end

  // ---------------------------------------------------------------- stage C
  state_t  obs_state, rel_state;
  qval_t   q_row [N_A];
  qval_t   q_cur, q_new;
  action_t a_next, a_greedy;
  logic    explore_c;
  logic    allowed, decide;
  logic signed [15:0] reward_c;

  arta_state_quant #(.DEPTH(NF), .BETA(BETA_ROWS)) u_quant (
    .sum (s2_sum), .full (s2_full), .prev_action (rd_regs.action),
    .obs_state, .rel_state
  );

  assign allowed = (s2_cycle - rd_regs.cycle) >= cycle_t'(T_A);
  assign decide  = s2_valid && s2_full && allowed;

  arta_qtable u_qt (
    .clk, .rst_n,
    .rd_state   (rel_state),
    .rd_row     (q_row),
    .cur_state  (rd_regs.state),
    .cur_action (rd_regs.action),
    .cur_q      (q_cur),
    .we         (decide),
    .wr_state   (rd_regs.state),
    .wr_action  (rd_regs.action),
    .wr_data    (q_new)
  );

  arta_policy #(.EPS0(EPS0), .EPS_MIN(EPS_MIN), .K(TOPK), .SEED(SEED)) u_pol (
    .clk, .rst_n,
    .q_row, .state (rel_state), .step (decide),
    .action (a_next), .greedy_action (a_greedy), .explored (explore_c)
  );

  arta_learner u_learn (
    .s_t        (rd_regs.state),
    .a_t        (rd_regs.action),
    .s_next     (rel_state),
    .q_cur,
    .q_next_max (q_row[a_greedy[$clog2(N_A)-1:0]]),
    .reward     (reward_c),
    .q_new
  );

  assign regs_we    = decide;
  assign regs_wdata = '{state: rel_state, action: a_next, cycle: s2_cycle};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dfs_valid   <= 1'b0;
      dfs_action  <= ACT_P0;
      cur_action  <= ACT_P0;
      last_state  <= '0;
      last_obs_state <= '0;
      held        <= 1'b0;
      explored    <= 1'b0;
      last_reward <= '0;
    end else begin
      dfs_valid <= decide;
      held      <= s2_valid && s2_full && !allowed;
      explored  <= decide && explore_c;
      if (decide) begin
        dfs_action  <= a_next;
        cur_action  <= a_next;
        last_state  <= rel_state;
        last_obs_state <= obs_state;
        last_reward <= reward_c;
      end
    end
  end

  // a decision never names an action outside P0..C1
  assert property (@(posedge clk) disable iff (!rst_n)
                   dfs_valid |-> dfs_action < action_t'(N_A));

endmodule
