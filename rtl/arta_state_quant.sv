// arta_state_quant: severity score, relative severity and state index.
//
// The paper's normalised score is
//     s_F = 1 - min(1, sum / (beta * (DEPTH-2)))
// and, when the bank's last action a_t throttled the core, the observed
// score is scaled back to its unthrottled equivalent
//     s_R = 1                      if a_t = C1 (throttle 1)
//     s_R = min(1, s_F / (1-a_t))  otherwise.
// The score is then quantised to state k = floor(N_LEV * s), k = 0..N_LEV,
// so that state k stands for severity k/10 as in the Q0 figure.
// No division is built: with a_t = j/A_LEV, "s_R >= k/N_LEV" is the integer
// test  N_LEV*A_LEV*sum <= (N_LEV*A_LEV - k*(A_LEV-j)) * beta*(DEPTH-2),
// made for every k in parallel; the state is the number of k that pass.
// A window that is not yet full reads as severity 0 (a choice of this
// design). Purely combinational.
module arta_state_quant
  import arta_pkg::*;
#(
  parameter int unsigned DEPTH = N_F,
  parameter int unsigned BETA  = BETA_ROWS
) (
  input  sev_sum_t sum,
  input  logic     full,
  input  action_t  prev_action,   // a_t stored in the CBF registers
  output state_t   obs_state,     // quantised s_F
  output state_t   rel_state      // quantised s_R
);

  localparam longint unsigned NA   = longint'(N_LEV) * longint'(A_LEV);
  localparam longint unsigned DNRM = longint'(BETA) * (longint'(DEPTH) - 64'd2);
  localparam int unsigned     CW   = 48;

  function automatic state_t quantise(input sev_sum_t s, input int j);
    logic [CW-1:0] lhs, rhs;
    state_t        k_out;
    lhs   = CW'(NA) * CW'(s);
    k_out = '0;
    for (int k = 1; k <= int'(N_LEV); k++) begin
      rhs = (CW'(NA) - CW'(unsigned'(k * (int'(A_LEV) - j)))) * CW'(DNRM);
      if (lhs <= rhs) k_out = state_t'(k);
    end
    return k_out;
  endfunction

  always_comb begin
    if (!full) begin
      obs_state = '0;
      rel_state = '0;
    end else begin
      obs_state = quantise(sum, 0);
      if (prev_action >= action_t'(A_LEV))
        rel_state = state_t'(N_LEV);
      else
        rel_state = quantise(sum, int'(prev_action));
    end
  end

endmodule
