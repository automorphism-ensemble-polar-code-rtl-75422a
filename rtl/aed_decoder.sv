// aed_decoder -- path-metric based automorphism ensemble decoder (AED) for the
// polar code P(128,60); top level.
//
// M lanes decode the same received frame in parallel, each on its own automorphism
// of the code (aed_lane: pi_m, Fast-SSC decoder with path metric, pi_m^-1); lanes
// use the first M entries of the automorphism list in aed_pkg, lane 0 being the
// identity.  pm_select picks the candidate code word with the lowest path metric.
// No LLR buffer is needed, since the selection uses only the path metrics.
//
// Interface: y_i carries the 128 channel LLRs (6-bit two's complement, positive
// favours bit 0) of one frame, qualified by valid_i; a new frame may be given every
// clock cycle.  x_o is the estimated code word, pm_o its path metric and sel_o the
// lane that produced it, qualified by valid_o, 11 cycles after the frame went in
// (10 for the decoders, 1 for the selection).  rst_n is synchronous, active low,
// and clears only the valid flags.  An LLR of -32 is treated as -31 after the
// first f/g operation; inputs should stay within +-31.
module aed_decoder
  import aed_pkg::*;
#(
  parameter int unsigned M        = 4,   // ensemble size, 1..16
  parameter int unsigned REG_SIZE = 8    // subtree size evaluated per pipeline stage
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid_i,
  input  llr_t [N-1:0]             y_i,
  output logic                     valid_o,
  output logic [N-1:0]             x_o,
  output pm_t                      pm_o,
  output logic [$clog2(M_MAX)-1:0] sel_o
);
  logic         lane_valid [M];
  logic [N-1:0] lane_x     [M];
  pm_t          lane_pm    [M];

  initial assert (M >= 1 && M <= M_MAX) else $fatal(1, "aed_decoder: M must be 1..%0d", M_MAX);

  for (genvar m = 0; m < M; m++) begin : g_lane
    aed_lane #(.M_IDX(m), .REG_SIZE(REG_SIZE)) u_lane (
      .clk, .rst_n, .valid_i, .y_i,
      .valid_o(lane_valid[m]), .x_o(lane_x[m]), .pm_o(lane_pm[m]));
  end

  // all lanes are identical pipelines and must stay in lock-step (checked outside reset)
  for (genvar m = 1; m < M; m++) begin : g_lockstep
    always_ff @(posedge clk)
      if (rst_n) a_lockstep: assert (lane_valid[m] == lane_valid[0])
        else $error("aed_decoder: lane %0d out of step", m);
  end

  pm_select #(.M(M)) u_sel (
    .clk, .rst_n, .valid_i(lane_valid[0]), .cand_x_i(lane_x), .cand_pm_i(lane_pm),
    .valid_o, .x_o, .pm_o, .sel_o);
endmodule
