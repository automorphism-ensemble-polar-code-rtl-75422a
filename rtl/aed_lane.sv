// aed_lane -- decoder lane m of the automorphism ensemble: pi_m, Dec, pi_m^-1.
//
// The received LLR vector is permuted by the BLTA automorphism pi_m of entry M_IDX
// of aed_pkg::BLTA_A (y'[pi_m(i)] = y[i]), decoded by a Fast-SSC decoder, and the
// code word estimate is mapped back (x[i] = x'[pi_m(i)]).  Both permutations are
// fixed wiring computed at elaboration time: they cost no logic and no cycles.
// The lane has the decoder's timing: one frame per clock, LAT = 10 cycles.
module aed_lane
  import aed_pkg::*;
#(
  parameter int unsigned M_IDX    = 1,
  parameter int unsigned REG_SIZE = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid_i,
  input  llr_t [N-1:0] y_i,
  output logic         valid_o,
  output logic [N-1:0] x_o,
  output pm_t          pm_o
);
  llr_t [N-1:0] y_p;
  logic [N-1:0] x_p;

  for (genvar i = 0; i < N; i++) begin : g_perm
    localparam int unsigned P = blta_map(M_IDX, i);
    assign y_p[P] = y_i[i];
    assign x_o[i] = x_p[P];
  end

  fssc_decoder #(.REG_SIZE(REG_SIZE)) u_dec (
    .clk, .rst_n, .valid_i, .llr_i(y_p), .valid_o, .x_o(x_p), .pm_o);
endmodule
