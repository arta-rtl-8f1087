// tb_arta_severity: checks the sum of absolute second-order differences
// against a reference computed in the testbench, for hammering-like patterns
// (constant, strided, double-sided, N-sided) and for random windows.
module tb_arta_severity;
  import arta_pkg::*;

  row_t     rows [N_F];
  sev_sum_t sum;
  int checks = 0, failures = 0;

  arta_severity #(.DEPTH(N_F)) dut (.rows, .sum);

  function automatic longint ref_sum(input row_t r [N_F]);
    longint d1 [N_F];
    longint s;
    s = 0;
    for (int i = 1; i < N_F; i++) d1[i] = longint'(r[i]) - longint'(r[i-1]);
    for (int i = 2; i < N_F; i++) begin
      longint d2;
      d2 = d1[i] - d1[i-1];
      s += (d2 < 0) ? -d2 : d2;
    end
    return s;
  endfunction

  task automatic check(input string what, input longint expect_v);
    #1;
    checks++;
    if (longint'(sum) != expect_v) begin
      failures++;
      $display("FAIL %s: sum=%0d expected %0d", what, sum, expect_v);
    end
  endtask

  initial begin
    // constant row: 0
    for (int i = 0; i < N_F; i++) rows[i] = 17'd1000;
    check("constant", 0);
    // strided sweep: 0
    for (int i = 0; i < N_F; i++) rows[i] = row_t'(500 + 3 * i);
    check("stride", 0);
    // double-sided a, a+2d: |d2| = 4d at each of the 14 terms
    for (int i = 0; i < N_F; i++) rows[i] = row_t'(2000 + ((i % 2) ? 8 : 0));
    check("double-sided", 14 * 16);
    // ramp with one kink of slope X: sum = X
    for (int i = 0; i < N_F; i++) rows[i] = row_t'((i < 8) ? 100 : 100 + 9000 * (i - 7));
    check("kink", 9000);
    // extreme swing: 0, max, 0, max ...
    for (int i = 0; i < N_F; i++) rows[i] = (i % 2) ? '1 : '0;
    check("full swing", 14 * 2 * ((1 << ROW_W) - 1));
    // N-sided patterns with distance d, against the reference
    for (int n = 1; n <= 10; n++)
      for (int d = 0; d <= 4; d++) begin
        for (int i = 0; i < N_F; i++) rows[i] = row_t'(4000 + d * (i % n));
        check($sformatf("%0d-sided d=%0d", n, d), ref_sum(rows));
      end
    // random windows
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N_F; i++) rows[i] = row_t'($urandom);
      check("random", ref_sum(rows));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
