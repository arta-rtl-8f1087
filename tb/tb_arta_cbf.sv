// tb_arta_cbf: checks the per-bank FIFOs (order, shift on push, independence
// of banks, full flag after N_F pushes) and the per-bank registers (reset
// values state 0 / P0 / -T_A, write and read back) against a model.
module tb_arta_cbf;
  import arta_pkg::*;

  localparam longint unsigned TA = 1000;

  logic      clk = 0, rst_n = 0;
  logic      push_valid = 0;
  bank_id_t  push_bank = '0, win_bank = '0, regs_rd_bank = '0, regs_bank = '0;
  row_t      push_row = '0;
  row_t      win_rows [N_F];
  logic      win_full;
  cbf_regs_t rd_regs, regs_wdata;
  logic      regs_we = 0;
  int checks = 0, failures = 0;

  row_t      m_fifo [NUM_BANKS][$];
  cbf_regs_t m_regs [NUM_BANKS];

  arta_cbf #(.BANKS(NUM_BANKS), .DEPTH(N_F), .T_A(TA)) dut (.*);
  always #5 clk = ~clk;

  task automatic expect_true(input string what, input bit c);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic check_bank(input int b);
    int n;
    win_bank = bank_id_t'(b);
    regs_rd_bank = bank_id_t'(b);
    #1;
    n = m_fifo[b].size();
    expect_true($sformatf("bank %0d full flag", b), win_full == (n == N_F));
    if (n == N_F)
      for (int i = 0; i < N_F; i++)
        expect_true($sformatf("bank %0d entry %0d", b, i), win_rows[i] == m_fifo[b][i]);
    expect_true($sformatf("bank %0d regs", b), rd_regs == m_regs[b]);
  endtask

  initial begin
    for (int b = 0; b < NUM_BANKS; b++)
      m_regs[b] = '{state: '0, action: ACT_P0, cycle: cycle_t'(0) - cycle_t'(TA)};
    #12 rst_n = 1;
    for (int b = 0; b < NUM_BANKS; b++) check_bank(b);
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      push_valid = ($urandom_range(0, 3) != 0);
      push_bank  = bank_id_t'($urandom_range(0, 3) == 0 ? $urandom_range(0, NUM_BANKS - 1)
                                                        : $urandom_range(0, 3));
      push_row   = row_t'($urandom);
      regs_we    = ($urandom_range(0, 4) == 0);
      regs_bank  = bank_id_t'($urandom_range(0, NUM_BANKS - 1));
      regs_wdata = '{state: state_t'($urandom_range(0, 10)), action: action_t'($urandom_range(0, 5)),
                     cycle: {$urandom, $urandom}};
      @(posedge clk);
      #1;
      if (push_valid) begin
        m_fifo[push_bank].push_back(push_row);
        if (m_fifo[push_bank].size() > N_F) void'(m_fifo[push_bank].pop_front());
      end
      if (regs_we) m_regs[regs_bank] = regs_wdata;
      push_valid = 0;
      regs_we = 0;
      check_bank($urandom_range(0, 3));
      if (t % 100 == 0) check_bank($urandom_range(0, NUM_BANKS - 1));
    end
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
