// fssc_rep -- repetition (REP) leaf of the pruned polar factor tree, with path metric.
//
// A REP node holds a single information bit (its last leaf); the whole node
// decodes to that bit repeated: b = sign(sum_j alpha_j) (1 when the sum is
// negative, 0 when it is zero or positive).  Each position whose own hard decision
// disagrees with b was corrected, and its |alpha_j| is added to the path metric.
// Combinational.  The sum is computed at full width, so no precision is lost.
module fssc_rep
  import aed_pkg::*;
#(
  parameter int unsigned NS = 4
) (
  input  llr_t [NS-1:0] alpha_i,
  input  pm_t           pm_i,
  output logic [NS-1:0] beta_o,
  output pm_t           pm_o
);
  int          sum;
  int unsigned pen;
  logic        b;

  always_comb begin
    sum = 0;
    for (int unsigned j = 0; j < NS; j++) sum += int'(alpha_i[j]);
    b   = (sum < 0);
    pen = 0;
    for (int unsigned j = 0; j < NS; j++)
      if ((alpha_i[j] < 0) != b) pen += abs_llr(alpha_i[j]);
    beta_o = {NS{b}};
    pm_o   = pm_add(pm_i, pen);
  end
endmodule
