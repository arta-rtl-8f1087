// tb_arta_cbf_sweep: the CBF-size sweep of the sensitivity study (N_F = 8,
// 16, 32, 128) on the 32-sided multi-bank attack. Four copies of ARTA, one
// per CBF depth, see the same command stream: the attacker core hammers the
// 32 banks in turn (rows +1 per round, 32 rows per bank), a benign core
// scatters rows. Checked for each depth: the attacker's first request in a
// bank is C1 and comes with the PRE that completes that bank's window, i.e.
// after exactly N_F PREs to the bank, with severity state 9 or 10 (a
// 128-entry window spans four wraps of the 32-row sweep, each adding 64 to
// the second-order sum, which gives s = 0.998, state 9); the benign core is never throttled
// beyond P2 and is judged severity 0. Reports the detection latency in
// attacker PREs per depth.
module tb_arta_cbf_sweep;
  import arta_pkg::*;

  localparam int NSIZE = 4;
  localparam int SIZES [NSIZE] = '{8, 16, 32, 128};

  logic     clk = 0, rst_n = 0;
  logic     pre_valid = 0;
  pre_cmd_t pre_cmd = '0;
  int checks = 0, failures = 0;

  logic    dfs_valid  [NSIZE][NUM_CORES];
  action_t dfs_action [NSIZE][NUM_CORES];
  state_t  sev_state  [NSIZE][NUM_CORES];

  for (genvar g = 0; g < NSIZE; g++) begin : g_size
    action_t cur_action [NUM_CORES];
    state_t  obs_state  [NUM_CORES];
    logic    held       [NUM_CORES];
    logic    explored   [NUM_CORES];
    cycle_t  now;
    arta_top #(.T_A(1_000_000), .NF(SIZES[g])) u_arta (
      .clk, .rst_n, .pre_valid, .pre_cmd,
      .dfs_valid (dfs_valid[g]), .dfs_action (dfs_action[g]),
      .cur_action, .sev_state (sev_state[g]), .obs_state, .held, .explored, .now
    );
  end

  always #5 clk = ~clk;

  int atk_pres [NUM_BANKS];
  int cur_n = 0;
  int first_dec [NSIZE][NUM_BANKS];

  task automatic expect_true(input string what, input bit c);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // the PRE that caused a decision is the one 3 cycles earlier
  logic     h_v [4];
  pre_cmd_t h_c [4];
  int       h_n [4];
  always @(posedge clk) begin
    for (int i = 3; i > 0; i--) begin
      h_v[i] <= h_v[i-1];
      h_c[i] <= h_c[i-1];
      h_n[i] <= h_n[i-1];
    end
    h_v[0] <= pre_valid;
    h_c[0] <= pre_cmd;
    h_n[0] <= cur_n;
  end

  always @(negedge clk) begin
    if (rst_n)
      for (int g = 0; g < NSIZE; g++) begin
        if (dfs_valid[g][3]) begin
          int b;
          b = int'({h_c[2].bg, h_c[2].ba});
          expect_true($sformatf("N_F=%0d attacker bank %0d -> C1", SIZES[g], b),
                      dfs_action[g][3] == ACT_C1 && sev_state[g][3] >= 9);
          expect_true($sformatf("N_F=%0d bank %0d detected after %0d PREs", SIZES[g], b, h_n[2]),
                      h_n[2] == SIZES[g]);
          if (first_dec[g][b] < 0) first_dec[g][b] = h_n[2];
        end
        if (dfs_valid[g][0])
          expect_true($sformatf("N_F=%0d benign core within P0..P2, state 0", SIZES[g]),
                      dfs_action[g][0] <= ACT_P2 && sev_state[g][0] == 0);
      end
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      h_v[i] = 0;
      h_c[i] = '0;
      h_n[i] = 0;
    end
    for (int b = 0; b < NUM_BANKS; b++) begin
      atk_pres[b] = 0;
      for (int g = 0; g < NSIZE; g++) first_dec[g][b] = -1;
    end
    #12 rst_n = 1;
    for (int round = 0; round < 130; round++)
      for (int b = 0; b < NUM_BANKS; b++) begin
        @(negedge clk);
        pre_valid = 1;
        pre_cmd = '{core: 2'd3, bg: 3'(b >> 2), ba: 2'(b), row: row_t'(1000 + 4096 * b + round % 32)};
        atk_pres[b]++;
        cur_n = atk_pres[b];
        @(negedge clk);
        cur_n = 0;
        pre_cmd = '{core: 2'd0, bg: 3'(b >> 2), ba: 2'(b), row: row_t'($urandom)};
      end
    @(negedge clk);
    pre_valid = 0;
    repeat (5) @(negedge clk);
    for (int g = 0; g < NSIZE; g++) begin
      int n;
      n = 0;
      for (int b = 0; b < NUM_BANKS; b++) if (first_dec[g][b] == SIZES[g]) n++;
      expect_true($sformatf("N_F=%0d: all 32 banks detected (%0d)", SIZES[g], n), n == NUM_BANKS);
      $display("N_F=%0d: attacker detected in %0d banks, %0d PREs per bank, %0d attacker PREs in all",
               SIZES[g], n, SIZES[g], SIZES[g] * NUM_BANKS);
    end
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
