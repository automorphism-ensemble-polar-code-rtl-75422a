// pm_select -- path-metric based candidate selection of the ensemble.
//
// Of the M candidate code words, the one with the lowest path metric is the most
// likely and is output; a tie goes to the lowest lane index (this design's choice).
// This replaces the correlation ("ML-in-the-list") selection, which would need the
// channel LLRs kept in a buffer for the whole decoding latency.  A combinational
// linear scan feeds one output register, so the unit adds one cycle of latency and
// accepts a new set of candidates every cycle.  valid_o is reset by rst_n
// (synchronous, active low); data registers are not.
module pm_select
  import aed_pkg::*;
#(
  parameter int unsigned M = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 valid_i,
  input  logic [N-1:0]         cand_x_i  [M],
  input  pm_t                  cand_pm_i [M],
  output logic                 valid_o,
  output logic [N-1:0]         x_o,
  output pm_t                  pm_o,
  output logic [$clog2(M_MAX)-1:0] sel_o
);
  int unsigned best;

  always_comb begin
    best = 0;
    for (int unsigned m = 1; m < M; m++)
      if (cand_pm_i[m] < cand_pm_i[best]) best = m;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
    x_o   <= cand_x_i[best];
    pm_o  <= cand_pm_i[best];
    sel_o <= ($clog2(M_MAX))'(best);
  end
endmodule
