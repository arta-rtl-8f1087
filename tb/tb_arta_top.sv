// tb_arta_top: end-to-end run of ARTA with four cores sharing one DDR5
// channel (T_A shortened to 3000 cycles so that many decision windows pass).
//   core 0, 1  benign: scattered rows in random banks;
//   core 2     regular streaming with row noise: moderate severity;
//   core 3     the 32-sided multi-bank attack: banks hammered in turn, each
//              bank's next aggressor row one above its previous one.
// Checked: every decision appears 3 cycles after a PRE of its core; the
// decisions of one (core, bank) are at least T_A apart; the attacker is
// driven to C1 and never requested below P3 (the exploration range around
// C1); benign cores stay within P0..P2 and end at P0. Each mechanism must
// occur at least once: window fill and decision, T_A hold, exploration
// (also after epsilon has decayed to its floor),
// C1 throttling, relative-severity rescaling and Q-value change.
module tb_arta_top;
  import arta_pkg::*;

  localparam longint unsigned TA = 3000;
  localparam int CYCLES = 60000;

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

  arta_top #(.T_A(TA)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_dec [NUM_CORES], n_held = 0, n_expl = 0, n_c1 = 0, n_rel = 0, n_expl_late = 0;
  longint last_dec [NUM_CORES][NUM_BANKS];
  logic     h_valid [4];
  pre_cmd_t h_cmd   [4];
  longint   cyc = 0;

  task automatic expect_true(input string what, input bit c);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // history of the PREs of the last cycles, for latency checks
  always @(posedge clk) begin
    if (rst_n) begin
      cyc <= cyc + 1;
      for (int i = 3; i > 0; i--) begin
        h_valid[i] <= h_valid[i-1];
        h_cmd[i]   <= h_cmd[i-1];
      end
      h_valid[0] <= pre_valid;
      h_cmd[0]   <= pre_cmd;
    end
  end

  always @(negedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < NUM_CORES; c++) begin
        if (held[c]) n_held++;
        if (dfs_valid[c]) begin
          int b;
          b = int'({h_cmd[2].bg, h_cmd[2].ba});
          n_dec[c]++;
          expect_true($sformatf("core %0d decision 3 cycles after its PRE", c),
                      h_valid[2] && h_cmd[2].core == core_id_t'(c));
          expect_true($sformatf("core %0d bank %0d decisions T_A apart", c, b),
                      last_dec[c][b] < 0 || cyc - last_dec[c][b] >= longint'(TA));
          last_dec[c][b] = cyc;
          if (explored[c]) n_expl++;
          // epsilon reaches its floor after EPS_INIT - EPS_FLOOR decisions
          if (explored[c] && n_dec[c] > EPS_INIT - EPS_FLOOR) n_expl_late++;
          if (dfs_action[c] == ACT_C1) n_c1++;
          if (sev_state[c] > obs_state[c] && sev_state[c] < state_t'(N_LEV)) n_rel++;
          if (c < 2)
            expect_true($sformatf("benign core %0d within P0..P2 (%0d)", c, dfs_action[c]),
                        dfs_action[c] <= ACT_P2);
          if (c == 3)
            expect_true($sformatf("attacker at P3 or above (%0d)", dfs_action[c]),
                        dfs_action[c] >= ACT_P3);
        end
      end
    end
  end

  initial begin
    int slot, b, r;
    int atk_bank, atk_round;
    int str_pos [NUM_BANKS];
    qval_t q_before;
    for (int c = 0; c < NUM_CORES; c++) begin
      n_dec[c] = 0;
      for (int i = 0; i < NUM_BANKS; i++) last_dec[c][i] = -1;
    end
    for (int i = 0; i < NUM_BANKS; i++) str_pos[i] = 0;
    for (int i = 0; i < 4; i++) begin
      h_valid[i] = 0;
      h_cmd[i] = '0;
    end
    atk_bank = 0;
    atk_round = 0;
    q_before = dut.g_core[2].u_agent.u_qt.q[5][2];
    #12 rst_n = 1;
    for (int t = 0; t < CYCLES; t++) begin
      @(negedge clk);
      slot = t % 4;
      pre_valid = 1;
      case (slot)
        0, 1: begin
          b = $urandom_range(0, NUM_BANKS - 1);
          r = $urandom_range(0, (1 << ROW_W) - 1);
          pre_cmd = '{core: core_id_t'(slot), bg: b[4:2], ba: b[1:0], row: row_t'(r)};
        end
        2: begin
          b = $urandom_range(0, NUM_BANKS - 1);
          r = 20000 + 64 * str_pos[b] + $urandom_range(0, 700);
          str_pos[b] = (str_pos[b] + 1) % 1024;
          pre_cmd = '{core: 2'd2, bg: b[4:2], ba: b[1:0], row: row_t'(r)};
        end
        default: begin
          b = atk_bank;
          r = 1000 + 4096 * b + atk_round;
          pre_cmd = '{core: 2'd3, bg: b[4:2], ba: b[1:0], row: row_t'(r)};
          atk_bank = (atk_bank + 1) % NUM_BANKS;
          if (atk_bank == 0) atk_round = (atk_round + 1) % 32;
        end
      endcase
      if ($urandom_range(0, 9) == 0) pre_valid = 0;   // idle command slots
    end
    @(negedge clk);
    pre_valid = 0;
    repeat (5) @(negedge clk);

    expect_true("attacker ends at C1", cur_action[3] == ACT_C1);
    expect_true("benign core 0 ends at P0", cur_action[0] == ACT_P0);
    expect_true("benign core 1 ends at P0", cur_action[1] == ACT_P0);
    for (int c = 0; c < NUM_CORES; c++)
      expect_true($sformatf("core %0d made decisions (%0d)", c, n_dec[c]), n_dec[c] > 0);
    expect_true($sformatf("T_A holds (%0d)", n_held), n_held > 0);
    expect_true($sformatf("explorations (%0d)", n_expl), n_expl > 0);
    expect_true($sformatf("explorations at the epsilon floor (%0d)", n_expl_late), n_expl_late > 0);
    expect_true($sformatf("C1 throttles (%0d)", n_c1), n_c1 > 0);
    expect_true($sformatf("relative severity rescaling (%0d)", n_rel), n_rel > 0);
    expect_true("Q-table learned", dut.g_core[2].u_agent.u_qt.q[5][2] != q_before
                || dut.g_core[0].u_agent.u_qt.q[0][0] != qval_t'(q0_init(0, 0)));
    $display("decisions %0d %0d %0d %0d, held %0d, explored %0d, C1 %0d, rescaled %0d",
             n_dec[0], n_dec[1], n_dec[2], n_dec[3], n_held, n_expl, n_c1, n_rel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
