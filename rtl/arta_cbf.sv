// arta_cbf: the per-core, per-bank FIFO (CBF) of one core.
//
// For every bank it keeps the row IDs of the last N_F PRE commands that the
// core caused in that bank, oldest in entry 0 and newest in entry N_F-1, and
// the three per-bank registers the paper lists: the last severity state,
// the last action and the cycle of the last throttling decision.
//
// Interface and timing
//  * push_valid/push_bank/push_row: on a clock edge with push_valid high the
//    bank's FIFO shifts by one and the row enters at the newest end.
//  * win_bank selects the window seen on win_rows/win_full, regs_rd_bank the
//    registers seen on rd_regs (combinational reads of registered contents).
//  * regs_we/regs_bank/regs_wdata overwrite one bank's registers at the edge.
//  * Reset empties every FIFO (the fill counters), sets state 0 and action
//    P0 and a decision cycle of -T_A, so that the first full window of a bank
//    may be acted on at once.
// The FIFO depth, row width and register widths follow the paper; the fill
// counter (one 5-bit counter per bank) is this design's addition, used to
// hold decisions until a full window has been seen.
module arta_cbf
  import arta_pkg::*;
#(
  parameter int unsigned      BANKS  = NUM_BANKS,
  parameter int unsigned      DEPTH  = N_F,
  parameter longint unsigned  T_A    = T_A_CYCLES
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // push port
  input  logic                       push_valid,
  input  logic [$clog2(BANKS)-1:0]   push_bank,
  input  row_t                       push_row,
  // window read port
  input  logic [$clog2(BANKS)-1:0]   win_bank,
  output row_t                       win_rows [DEPTH],
  output logic                       win_full,
  // register read port
  input  logic [$clog2(BANKS)-1:0]   regs_rd_bank,
  output cbf_regs_t                  rd_regs,
  // register write port
  input  logic                       regs_we,
  input  logic [$clog2(BANKS)-1:0]   regs_bank,
  input  cbf_regs_t                  regs_wdata
);

  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  row_t             fifo  [BANKS][DEPTH];
  logic [CNT_W-1:0] fill  [BANKS];
  cbf_regs_t        regs  [BANKS];

  // FIFO storage, not reset: the fill counter says which entries are valid
  always_ff @(posedge clk) begin
    if (push_valid) begin
      for (int i = 0; i < int'(DEPTH) - 1; i++)
        fifo[push_bank][i] <= fifo[push_bank][i+1];
      fifo[push_bank][DEPTH-1] <= push_row;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < int'(BANKS); b++) begin
        fill[b]        <= '0;
        regs[b].state  <= '0;
        regs[b].action <= ACT_P0;
        regs[b].cycle  <= cycle_t'(0) - cycle_t'(T_A);
      end
    end else begin
      if (push_valid && fill[push_bank] != CNT_W'(DEPTH))
        fill[push_bank] <= fill[push_bank] + 1'b1;
      if (regs_we)
        regs[regs_bank] <= regs_wdata;
    end
  end

  always_comb begin
    for (int i = 0; i < int'(DEPTH); i++) win_rows[i] = fifo[win_bank][i];
    win_full = (fill[win_bank] == CNT_W'(DEPTH));
    rd_regs  = regs[regs_rd_bank];
  end

endmodule
