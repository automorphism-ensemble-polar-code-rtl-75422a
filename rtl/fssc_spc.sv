// fssc_spc -- single parity check (SPC) leaf of the pruned polar factor tree,
// with path metric.
//
// An SPC node has one frozen bit (its first leaf), which makes the node's partial
// sum an even-parity word.  Maximum-likelihood decoding: take the hard decisions,
// compute their parity gamma, and if it is odd flip the least reliable position
// j_min = argmin |alpha_j|.  The path metric grows by gamma * |alpha_jmin|.
// Ties for j_min go to the lowest index (this design's choice).  Combinational.
module fssc_spc
  import aed_pkg::*;
#(
  parameter int unsigned NS = 4
) (
  input  llr_t [NS-1:0] alpha_i,
  input  pm_t           pm_i,
  output logic [NS-1:0] beta_o,
  output pm_t           pm_o
);
  logic [NS-1:0] hd;
  logic          gamma;
  int unsigned   jmin;
  int unsigned   amin;

  always_comb begin
    for (int unsigned j = 0; j < NS; j++) hd[j] = alpha_i[j] < 0;
    gamma = ^hd;
    jmin  = 0;
    amin  = abs_llr(alpha_i[0]);
    for (int unsigned j = 1; j < NS; j++)
      if (abs_llr(alpha_i[j]) < amin) begin
        amin = abs_llr(alpha_i[j]);
        jmin = j;
      end
    beta_o = hd;
    beta_o[jmin] = hd[jmin] ^ gamma;
    pm_o = pm_add(pm_i, gamma ? amin : 0);
  end
endmodule
