// arta_top: ARTA, the RowHammer throttling agent in the memory controller.
//
// The memory controller presents every PRE command it issues, with the ID of
// the core whose request caused it (pre_cmd.core), the bank group, the bank
// and the row. ARTA forms the bank ID {bank group, bank}, hands the row to
// the agent of that core, and each agent files it into its per-bank CBF
// FIFO, scores the window by its second-order differences, maps the score
// to a severity state and picks a processor state for the core from its
// Q-table (P0..P4 or the C1 idle state), learning from the outcome of its
// previous choice. A free-running 64-bit cycle counter time-stamps the
// decisions so that a bank's decisions are at least T_A cycles apart
// (T_A = t_REFW = 32 ms at the 4 GHz core clock by default; 64 ms for
// DDR4). NF sets the CBF depth, 16 by default; EPS0 and EPS_MIN the
// exploration schedule (initial epsilon and its floor, in 1/256).
//
// Interface and timing
//  * One PRE per cycle at most (pre_valid). The paper's configuration is a
//    single DDR5 channel whose command bus carries one command per cycle.
//  * Per core c: dfs_valid[c] pulses for one cycle with dfs_action[c] when a
//    decision is made, 3 cycles after the PRE that caused it; cur_action[c]
//    is the processor state last requested, which the core's DFS hardware
//    applies; sev_state[c]/obs_state[c] are the relative and observed
//    severity states of that decision. held[c] pulses when a full window was scored but the T_A
//    window had not yet elapsed; explored[c] marks an exploratory choice.
// The core ID source, the one-PRE-per-cycle interface and the output
// handshake are this design's choices; the structure (one CBF and one
// Q-table per core, indexed by core and bank) is the paper's.
module arta_top
  import arta_pkg::*;
#(
  parameter longint unsigned T_A  = T_A_CYCLES,
  parameter int unsigned     NF   = N_F,
  parameter int unsigned     EPS0 = EPS_INIT,
  parameter int unsigned     EPS_MIN = EPS_FLOOR
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      pre_valid,
  input  pre_cmd_t  pre_cmd,
  output logic      dfs_valid  [NUM_CORES],
  output action_t   dfs_action [NUM_CORES],
  output action_t   cur_action [NUM_CORES],
  output state_t    sev_state  [NUM_CORES],
  output state_t    obs_state  [NUM_CORES],
  output logic      held       [NUM_CORES],
  output logic      explored   [NUM_CORES],
  output cycle_t    now
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end

  bank_id_t pre_bank;
  assign pre_bank = {pre_cmd.bg, pre_cmd.ba};

  for (genvar c = 0; c < int'(NUM_CORES); c++) begin : g_core
    logic signed [15:0] rew_unused;
    arta_core_agent #(
      .T_A  (T_A),
      .NF   (NF),
      .EPS0 (EPS0),
      .EPS_MIN (EPS_MIN),
      .SEED (16'hACE1 ^ 16'(c * 16'h1F35))
    ) u_agent (
      .clk, .rst_n, .now,
      .pre_valid      (pre_valid && pre_cmd.core == core_id_t'(c)),
      .pre_bank,
      .pre_row        (pre_cmd.row),
      .dfs_valid      (dfs_valid[c]),
      .dfs_action     (dfs_action[c]),
      .cur_action     (cur_action[c]),
      .last_state     (sev_state[c]),
      .last_obs_state (obs_state[c]),
      .held           (held[c]),
      .explored       (explored[c]),
      .last_reward    (rew_unused)
    );
  end

endmodule
