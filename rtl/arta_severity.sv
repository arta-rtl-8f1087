// arta_severity: sum of absolute second-order differences of a CBF window.
//
// For the row sequence m[0..DEPTH-1] (oldest first) it forms the first-order
// differences d1[i] = m[i] - m[i-1] and the second-order differences
// d2[i] = d1[i] - d1[i-1], and returns sum |d2| over the DEPTH-2 terms. A
// perfectly repeating or evenly strided access sequence, which is what a
// hammering loop produces in one bank, gives 0; scattered benign accesses
// give a large sum. The arithmetic follows the paper exactly; the block is
// purely combinational (the caller registers the result).
module arta_severity
  import arta_pkg::*;
#(
  parameter int unsigned DEPTH = N_F
) (
  input  row_t      rows [DEPTH],
  output sev_sum_t  sum
);

  localparam int unsigned D1_W = ROW_W + 1;   // signed first differences
  localparam int unsigned D2_W = ROW_W + 2;   // signed second differences

  logic signed [D1_W-1:0] d1 [DEPTH];
  logic signed [D2_W-1:0] d2 [DEPTH];

  always_comb begin
    d1[0] = '0;
    d2[0] = '0;
    d2[1] = '0;
    for (int i = 1; i < int'(DEPTH); i++)
      d1[i] = $signed({1'b0, rows[i]}) - $signed({1'b0, rows[i-1]});
    for (int i = 2; i < int'(DEPTH); i++)
      d2[i] = D2_W'(d1[i]) - D2_W'(d1[i-1]);
    sum = '0;
    for (int i = 2; i < int'(DEPTH); i++)
      sum = sum + sev_sum_t'(unsigned'(d2[i] < 0 ? -d2[i] : d2[i]));
  end

endmodule
