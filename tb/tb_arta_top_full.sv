// tb_arta_top_full: one complete operation of ARTA with every parameter at
// its default (4 cores, 32 banks, 16-entry CBFs, T_A = 128,000,000 cycles).
// The attacker core runs 16 rounds of the 32-sided multi-bank attack, which
// fills all 32 of its CBFs; each bank's first full window must yield a C1
// request. Two benign cores scatter rows over all banks; their first full
// windows must yield P0..P2 (P0 unless the decision explored). Afterwards
// every further PRE to a bank that has decided is held back by T_A, since
// 32 ms have not passed.
module tb_arta_top_full;
  import arta_pkg::*;

  logic     clk = 0, rst_n = 0;
  logic     pre_valid = 0;
  pre_cmd_t pre_cmd = '0;
  logic     dfs_valid  [NUM_CORES];
  action_t  dfs_action [NUM_CORES];
  action_t  cur_action [NUM_CORES];
  state_t   sev_state  [NUM_CORES];
  state_t   obs_state  [NUM_CORES];
  logic     held       [NUM_CORES];
  logic     explored   [NUM_CORES];
  cycle_t   now;

  arta_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_dec [NUM_CORES], n_held [NUM_CORES], n_p0 = 0, n_c1 = 0;

  task automatic expect_true(input string what, input bit c);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  always @(negedge clk) begin
    if (rst_n)
      for (int c = 0; c < NUM_CORES; c++) begin
        if (held[c]) n_held[c]++;
        if (dfs_valid[c]) begin
          n_dec[c]++;
          if (c == 3) begin
            expect_true("attacker bank -> C1", dfs_action[c] == ACT_C1 && sev_state[c] == 10);
            if (dfs_action[c] == ACT_C1) n_c1++;
          end else begin
            expect_true("benign bank -> P0..P2", dfs_action[c] <= ACT_P2 && sev_state[c] == 0);
            if (dfs_action[c] == ACT_P0) n_p0++;
          end
        end
      end
  end

  task automatic issue(input int core, input int b, input int r);
    @(negedge clk);
    pre_valid = 1;
    pre_cmd = '{core: core_id_t'(core), bg: b[4:2], ba: b[1:0], row: row_t'(r)};
  endtask

  initial begin
    for (int c = 0; c < NUM_CORES; c++) begin
      n_dec[c] = 0;
      n_held[c] = 0;
    end
    #12 rst_n = 1;
    // 20 rounds: 16 fill the windows, 4 more find the banks held
    for (int round = 0; round < 20; round++)
      for (int b = 0; b < NUM_BANKS; b++) begin
        issue(3, b, 1000 + 4096 * b + round);
        issue(0, b, $urandom_range(0, (1 << ROW_W) - 1));
        issue(1, b, $urandom_range(0, (1 << ROW_W) - 1));
      end
    @(negedge clk);
    pre_valid = 0;
    repeat (5) @(negedge clk);
    for (int c = 0; c < NUM_CORES; c++)
      if (c != 2) begin
        expect_true($sformatf("core %0d: one decision per bank (%0d)", c, n_dec[c]), n_dec[c] == NUM_BANKS);
        expect_true($sformatf("core %0d: later PREs held (%0d)", c, n_held[c]), n_held[c] == 4 * NUM_BANKS);
      end
    expect_true("idle core 2 made no decision", n_dec[2] == 0);
    expect_true("attacker requested C1", cur_action[3] == ACT_C1 && n_c1 == NUM_BANKS);
    expect_true($sformatf("benign P0 decisions (%0d)", n_p0), n_p0 > NUM_BANKS);
    $display("decisions %0d %0d %0d %0d, C1 %0d, P0 %0d", n_dec[0], n_dec[1], n_dec[2], n_dec[3], n_c1, n_p0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
