// fssc_rate0 -- Rate-0 leaf of the pruned polar factor tree, with path metric.
//
// Every bit of a Rate-0 node is frozen, so the returned partial sum is all zero and
// needs no computation.  What remains is the path-metric update taken straight
// from the node's input LLRs: each negative LLR points at a bit the channel got
// "wrong" with respect to the known zero, so the metric grows by
//   sum_j |min(0, alpha_j)|.
// Purely combinational; the surrounding node decides where registers sit.
// The path metric saturates at its all-ones value (this design's choice).
module fssc_rate0
  import aed_pkg::*;
#(
  parameter int unsigned NS = 16   // node size (number of LLRs)
) (
  input  llr_t [NS-1:0] alpha_i,   // node input LLRs
  input  pm_t           pm_i,      // path metric before this node
  output logic [NS-1:0] beta_o,    // partial sum (all zero)
  output pm_t           pm_o       // path metric after this node
);
  int unsigned pen;

  always_comb begin
    pen = 0;
    for (int unsigned j = 0; j < NS; j++)
      if (alpha_i[j] < 0) pen += abs_llr(alpha_i[j]);
    pm_o   = pm_add(pm_i, pen);
    beta_o = '0;
  end
endmodule
