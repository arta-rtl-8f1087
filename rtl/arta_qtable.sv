// arta_qtable: the per-core Q-table, N_S severity states x N_A actions of
// signed 8-bit Q-values (7 fraction bits).
//
// At reset every entry is loaded with the paper's Gaussian-like linear-decay
// pre-initialisation
//     Q0(s,a) = max(0, 1 - lambda*|s - c_a|) / sum_a' max(0, 1 - lambda*|s - c_a'|)
// where c_a is the centre of action a's preferred severity interval (P0 on
// [0, s_min], C1 on [s_max, 1], P1..P4 equally spaced in between). The table
// is computed at elaboration by arta_pkg::q0_init; lambda, s_min and s_max
// are this design's fit to the published Q0 profile.
//
// Interface and timing: rd_state selects a whole row (rd_row, one value per
// action) and (cur_state, cur_action) one entry (cur_q), both combinational;
// we/wr_state/wr_action/wr_data write one entry at the clock edge.
module arta_qtable
  import arta_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  state_t  rd_state,
  output qval_t   rd_row [N_A],
  input  state_t  cur_state,
  input  action_t cur_action,
  output qval_t   cur_q,
  input  logic    we,
  input  state_t  wr_state,
  input  action_t wr_action,
  input  qval_t   wr_data
);

  localparam int unsigned SI_W = $clog2(N_S);
  localparam int unsigned AI_W = $clog2(N_A);

  qval_t q [N_S][N_A];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(N_S); s++)
        for (int a = 0; a < int'(N_A); a++)
          q[s][a] <= qval_t'(q0_init(s, a));
    end else if (we && wr_state < state_t'(N_S) && wr_action < action_t'(N_A)) begin
      q[wr_state[SI_W-1:0]][wr_action[AI_W-1:0]] <= wr_data;
    end
  end

  always_comb begin
    for (int a = 0; a < int'(N_A); a++)
      rd_row[a] = (rd_state < state_t'(N_S)) ? q[rd_state[SI_W-1:0]][a] : '0;
    cur_q = (cur_state < state_t'(N_S) && cur_action < action_t'(N_A))
          ? q[cur_state[SI_W-1:0]][cur_action[AI_W-1:0]] : '0;
  end

endmodule
